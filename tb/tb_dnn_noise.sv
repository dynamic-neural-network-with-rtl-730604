// tb_dnn_noise: end-to-end self-checking test of the dynamic network with memristor write noise.
//
// Builds a random ternary network (the configuration block below), programs
// its weights into the CIM crossbar, derives one semantic centre per class
// and layer by running a class prototype through a reference model written
// here (activation shifts are calibrated on the first prototype), programs
// the centres into the CAM, and then runs queries made of the prototypes
// with increasing noise. For every query the class, the number of layers
// run, the early-exit flag and the executed multiply-accumulate count are
// compared with the reference model. When WNOISE is set, the crossbars model
// that programming spread; the class may then differ from the ideal model,
// so each query is only checked for consistency (layer count, early-exit
// flag, executed operations for that layer count), and the agreement with
// the ideal model and the accuracy on the prototypes' labels are reported
// but not judged: the network here has random, untrained weights, and how
// much accuracy it keeps under noise depends on the draw. The test also
// counts how often each
// mechanism occurred (early exit, running to the last layer, pooling,
// 64-row group tiling, a search vector with negative entries) and fails if
// one never did.
module tb_dnn_noise;
  import dnn_pkg::*;
  // ---- test configuration (reduced sizes, 15 % programming spread) ----
  localparam int L = 4, P = 16, CH = 80, NC = 4, XR = 256, XC = 256, CR = 256;
  localparam int NQ = 40;
  localparam int CIN  [L] = '{70, 40, 80, 32};
  localparam int COUT [L] = '{40, 80, 32, 24};
  localparam bit POOL [L] = '{1'b1, 1'b0, 1'b1, 1'b0};
  localparam int THR  [L] = '{256, 256, 250, 200};
  localparam int NOISE [4] = '{0, 10, 40, 120};
  localparam int WNOISE = 15;
  localparam int WDOG_CYCLES = 2000000;
  localparam int LW = $clog2(L + 1), PW = $clog2(P + 1), KW = (NC > 1) ? $clog2(NC) : 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 cfg_we = 0, norm_we = 0, prog_en = 0, prog_sel = 0, in_we = 0, start = 0;
  logic [LW-1:0]        cfg_layer = 0, norm_layer = 0, num_layers = 0;
  layer_cfg_t           cfg_data = '0;
  logic [KW-1:0]        norm_class = 0;
  logic [7:0]           norm_data = 0;
  logic [8:0]           prog_row = 0;
  logic [7:0]           prog_col = 0;
  trit_e                prog_trit = TRIT_ZERO;
  logic [PW-1:0]        in_pos = 0, num_pos = 0;
  logic [CH-1:0][7:0]   in_vec = '0;
  logic                 prog_ready, busy, done, early_exit;
  logic [KW-1:0]        result_class;
  logic [LW-1:0]        result_layers;
  logic [31:0]          ops_count;

  dnn_top #(.MAX_LAYERS(L), .MAX_POS(P), .MAX_CH(CH), .N_CLASS(NC), .XB_ROWS(XR),
            .XB_COLS(XC), .CAM_ROWS(CR), .CONV_CYCLES(3), .WRITE_NOISE_PCT(WNOISE)) u_dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (WDOG_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------ reference model
  int W [L][CH][CH];       // [layer][input][output] trits
  int C [L][NC][CH];       // semantic centres
  int RB [L], CB [L], CAMB [L], SH [L];
  int X [P][CH];           // query input map
  int proto [NC][P][CH];
  int fm [P][CH], fm2 [P][CH];
  int sv_last [L][CH];
  // mechanism counters
  int n_early = 0, n_last = 0, n_pool = 0, n_tile = 0, n_neg = 0;

  int n_agree = 0, n_right_hw = 0, n_right_ref = 0;

  // multiply-accumulates of the first nl layers (positions halve after a
  // pooled layer, an odd last position passing through)
  function automatic longint ops_upto(int nl);
    longint o;
    int np;
    o = 0; np = P;
    for (int l = 0; l < nl && l < L; l++) begin
      o += longint'(np) * CIN[l] * COUT[l];
      if (POOL[l]) np = (np + 1) / 2;
    end
    return o;
  endfunction

  task automatic ref_run(input bit derive, output int cls, output int nl, output bit ee,
                         output longint ops);
    int npos;
    npos = P;
    ops = 0; cls = 0; nl = 0; ee = 0;
    for (int p = 0; p < P; p++) for (int i = 0; i < CH; i++) fm[p][i] = X[p][i];
    for (int l = 0; l < L; l++) begin
      int outp, maxacc, ns;
      bit have;
      int held [CH];
      int mean [CH];
      int sv [CH];
      int mn, mx, lo, hi;
      // calibrate the activation shift on the first derivation
      if (derive && SH[l] < 0) begin
        maxacc = 1;
        for (int p = 0; p < npos; p++)
          for (int j = 0; j < COUT[l]; j++) begin
            int acc;
            acc = 0;
            for (int i = 0; i < CIN[l]; i++) acc += fm[p][i] * W[l][i][j];
            if (acc > maxacc) maxacc = acc;
          end
        SH[l] = 0;
        while ((maxacc >> SH[l]) > 255) SH[l]++;
      end
      outp = 0; have = 0;
      for (int p = 0; p < npos; p++) begin
        int a [CH];
        for (int j = 0; j < CH; j++) begin
          int acc;
          acc = 0;
          if (j < COUT[l]) for (int i = 0; i < CIN[l]; i++) acc += fm[p][i] * W[l][i][j];
          acc = acc >>> SH[l];
          a[j] = (acc < 0) ? 0 : (acc > 255) ? 255 : acc;
        end
        ops += longint'(CIN[l]) * COUT[l];
        if (!POOL[l] || (!have && p == npos - 1)) begin
          for (int j = 0; j < CH; j++) fm2[outp][j] = a[j];
          outp++;
        end else if (!have) begin
          for (int j = 0; j < CH; j++) held[j] = a[j];
          have = 1;
        end else begin
          for (int j = 0; j < CH; j++) fm2[outp][j] = (held[j] > a[j]) ? held[j] : a[j];
          outp++;
          have = 0;
        end
      end
      if (!derive) begin
        if (POOL[l]) n_pool++;
        if (CIN[l] > 64) n_tile++;
      end
      // global average pooling and ternary quantisation
      mn = 1 << 30; mx = -1;
      for (int j = 0; j < COUT[l]; j++) begin
        int s;
        s = 0;
        for (int p = 0; p < outp; p++) s += fm2[p][j];
        mean[j] = s / outp;
        if (mean[j] < mn) mn = mean[j];
        if (mean[j] > mx) mx = mean[j];
      end
      lo = mn + (mx - mn) / 3;
      hi = mx - (mx - mn) / 3;
      ns = 0;
      for (int j = 0; j < CH; j++) begin
        sv[j] = 0;
        if (j < COUT[l]) sv[j] = (mean[j] < lo) ? -1 : (mean[j] > hi) ? 1 : 0;
        if (sv[j] != 0) ns++;
        sv_last[l][j] = sv[j];
      end
      if (!derive) begin
        bit neg;
        real bestc;
        int best, bd, bn;
        bit conf;
        neg = 0;
        for (int j = 0; j < CH; j++) if (sv[j] < 0) neg = 1;
        if (neg) n_neg++;
        bestc = -2.0; best = 0; bd = 0; bn = 0;
        for (int k = 0; k < NC; k++) begin
          int d, nc;
          real cs;
          d = 0; nc = 0;
          for (int j = 0; j < COUT[l]; j++) begin
            d += sv[j] * C[l][k][j];
            if (C[l][k][j] != 0) nc++;
          end
          if (nc != 0) begin
            cs = (ns == 0) ? 0.0 : real'(d) / $sqrt(real'(nc) * real'(ns));
            if (cs > bestc + 1e-12) begin bestc = cs; best = k; bd = d; bn = nc; end
          end
        end
        // cos >= THR/256, written without the square root
        conf = (bd > 0) && (ns != 0) &&
               (longint'(bd) * bd * 65536 >= longint'(THR[l]) * THR[l] * ns * bn);
        if (conf || l == L - 1) begin
          cls = best; nl = l + 1; ee = conf && (l != L - 1);
          return;
        end
      end
      npos = outp;
      for (int p = 0; p < npos; p++) for (int j = 0; j < CH; j++) fm[p][j] = fm2[p][j];
    end
  endtask

  // ------------------------------------------------------ host actions
  task automatic prog(bit sel, int row, int col, int v);
    @(negedge clk);
    while (!prog_ready) @(negedge clk);
    prog_en = 1; prog_sel = sel; prog_row = 9'(row); prog_col = 8'(col);
    prog_trit = (v > 0) ? TRIT_POS : (v < 0) ? TRIT_NEG : TRIT_ZERO;
    @(negedge clk);
    prog_en = 0;
  endtask

  task automatic load_input();
    for (int p = 0; p < P; p++) begin
      @(negedge clk);
      in_we = 1; in_pos = PW'(p);
      for (int i = 0; i < CH; i++) in_vec[i] = 8'(X[p][i]);
    end
    @(negedge clk);
    in_we = 0;
  endtask

  initial begin
    int row, camrow, band;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // random ternary weights, placed in bands of CH column pairs
    row = 0; band = 0; camrow = 0;
    for (int l = 0; l < L; l++) begin
      if (row + CIN[l] > XR) begin row = 0; band += CH; end
      RB[l] = row; CB[l] = band; row += CIN[l];
      CAMB[l] = camrow; camrow += COUT[l];
      SH[l] = -1;
      for (int i = 0; i < CH; i++)
        for (int j = 0; j < CH; j++) W[l][i][j] = int'($urandom % 3) - 1;
    end
    if (band + CH > XC / 2 || camrow > CR) begin
      failures++; $display("network does not fit the crossbars");
    end
    for (int l = 0; l < L; l++)
      for (int i = 0; i < CIN[l]; i++)
        for (int j = 0; j < COUT[l]; j++)
          if (W[l][i][j] != 0) prog(1'b0, RB[l] + i, CB[l] + j, W[l][i][j]);
    // prototypes and semantic centres
    for (int k = 0; k < NC; k++) begin
      int c, nl; bit ee; longint ops;
      // each class has its own per-channel level, plus per-position texture
      int bias [CH];
      for (int i = 0; i < CH; i++) bias[i] = 20 + int'($urandom % 216);
      for (int p = 0; p < P; p++) for (int i = 0; i < CH; i++)
        proto[k][p][i] = (i < CIN[0]) ? bias[i] + int'($urandom % 41) - 20 : 0;
      for (int p = 0; p < P; p++) for (int i = 0; i < CH; i++) X[p][i] = proto[k][p][i];
      ref_run(1'b1, c, nl, ee, ops);
      for (int l = 0; l < L; l++) for (int j = 0; j < CH; j++) C[l][k][j] = sv_last[l][j];
    end
    for (int l = 0; l < L; l++) begin
      @(negedge clk);
      cfg_we = 1; cfg_layer = LW'(l);
      cfg_data = '{c_in: 8'(CIN[l]), c_out: 8'(COUT[l]), cim_row_base: 9'(RB[l]),
                   cim_col_base: 9'(CB[l]), cam_row_base: 9'(CAMB[l]), pool_en: POOL[l],
                   act_shift: 5'(SH[l]), threshold: 9'(THR[l])};
      @(negedge clk);
      cfg_we = 0;
      for (int k = 0; k < NC; k++) begin
        int nz;
        nz = 0;
        for (int j = 0; j < COUT[l]; j++) begin
          if (C[l][k][j] != 0) begin nz++; prog(1'b1, CAMB[l] + j, k, C[l][k][j]); end
        end
        @(negedge clk);
        norm_we = 1; norm_layer = LW'(l); norm_class = KW'(k); norm_data = 8'(nz);
        @(negedge clk);
        norm_we = 0;
      end
    end
    $display("network programmed at cycle %0d", cyc);
    // queries
    for (int q = 0; q < NQ; q++) begin
      int k, amp, ecls, enl, c0;
      int offs [CH];
      bit eee;
      longint eops;
      k = q % NC;
      amp = NOISE[(q / NC) % 4];
      for (int i = 0; i < CH; i++) offs[i] = (amp > 0) ? int'($urandom % (2 * amp + 1)) - amp : 0;
      for (int p = 0; p < P; p++) for (int i = 0; i < CH; i++) begin
        int v;
        // noise: a per-channel offset plus per-position jitter
        v = proto[k][p][i] + offs[i];
        if (i < CIN[0] && amp > 0) v += int'($urandom % 21) - 10;
        X[p][i] = (i >= CIN[0]) ? 0 : (v < 0) ? 0 : (v > 255) ? 255 : v;
      end
      ref_run(1'b0, ecls, enl, eee, eops);
      if (eee) n_early++;
      if (enl == L) n_last++;
      load_input();
      @(negedge clk);
      num_layers = LW'(L); num_pos = PW'(P); start = 1;
      @(negedge clk);
      start = 0;
      c0 = cyc;
      while (!done) @(negedge clk);
      $display("query %0d (class %0d, noise %0d): class %0d layers %0d exit %0d ops %0d, %0d cycles",
               q, k, amp, result_class, result_layers, early_exit, ops_count, cyc - c0);
      if (WNOISE == 0) begin
        checks++;
        if (int'(result_class) != ecls) begin failures++; $display("  class: expected %0d", ecls); end
        checks++;
        if (int'(result_layers) != enl) begin failures++; $display("  layers: expected %0d", enl); end
        checks++;
        if (early_exit != eee) begin failures++; $display("  early exit: expected %0d", eee); end
        checks++;
        if (longint'(ops_count) != eops) begin failures++; $display("  ops: expected %0d", eops); end
      end else begin
        // noisy cells: the class may differ from the ideal model, but the
        // run must stay self-consistent
        if (int'(result_class) == ecls) n_agree++;
        if (int'(result_class) == k) n_right_hw++;
        if (ecls == k) n_right_ref++;
        checks++;
        if (result_layers == 0 || int'(result_layers) > L) begin
          failures++; $display("  layers out of range");
        end
        checks++;
        if (int'(result_layers) < L && !early_exit) begin
          failures++; $display("  stopped before the last layer without an early exit");
        end
        checks++;
        if (longint'(ops_count) != ops_upto(int'(result_layers))) begin
          failures++; $display("  ops: expected %0d", ops_upto(int'(result_layers)));
        end
      end
    end
    if (WNOISE != 0) begin
      $display("write noise %0d %%: agreement with the ideal model %0d/%0d, correct %0d (ideal model %0d)",
               WNOISE, n_agree, NQ, n_right_hw, n_right_ref);
    end
    $display("mechanisms: early exit %0d, last layer %0d, pooled layers %0d, tiled layers %0d, negative search entries %0d",
             n_early, n_last, n_pool, n_tile, n_neg);
    checks++; if (n_early == 0) begin failures++; $display("early exit never happened"); end
    checks++; if (n_last == 0)  begin failures++; $display("no query reached the last layer"); end
    checks++; if (n_pool == 0)  begin failures++; $display("pooling never happened"); end
    checks++; if (n_tile == 0)  begin failures++; $display("row-group tiling never happened"); end
    checks++; if (n_neg == 0)   begin failures++; $display("no negative search entry"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
