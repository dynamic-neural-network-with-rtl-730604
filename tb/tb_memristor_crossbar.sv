// tb_memristor_crossbar: self-checking test of the crossbar model.
// Programs random LRS/HRS patterns (including re-programming cells back to
// HRS), applies random word-line codes at several group offsets (one group
// running past the last row) and compares every source-line current with a
// sum computed here from the test's own copy of the cell states. Also checks
// the one-cycle read latency through sl_valid.
//
// A second instance models a 15 % programming spread. Every cell is set to
// LRS and read back one row at a time (code 1 on one word line), which gives
// each cell's conductance. The test checks the mean and standard deviation
// of those conductances, that a second read returns the same values (there
// is no read noise), that re-programming draws a new value and that HRS
// cells with zero nominal conductance stay at zero.
module tb_memristor_crossbar;
  localparam int ROWS = 128, COLS = 16, PR = 64, IN_W = 8, CUR_W = 22;
  localparam int GL = 64, GH = 3;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                         prog_en = 0, prog_lrs = 0, read_en = 0;
  logic [$clog2(ROWS)-1:0]      prog_row = 0, wl_base = 0;
  logic [$clog2(COLS)-1:0]      prog_col = 0;
  logic [PR-1:0][IN_W-1:0]      wl_code = '0;
  logic [COLS-1:0][CUR_W-1:0]   sl_current;
  logic                         sl_valid;

  int checks = 0, failures = 0;
  bit model [ROWS][COLS];

  memristor_crossbar #(.ROWS(ROWS), .COLS(COLS), .PAR_ROWS(PR), .IN_W(IN_W),
                       .CUR_W(CUR_W), .G_LRS(GL), .G_HRS(GH)) dut (.*);

  // ---- noisy instance ----
  localparam int NR = 64, NCOL = 16, NPCT = 15;
  logic                         n_prog_en = 0, n_prog_lrs = 0, n_read_en = 0;
  logic [$clog2(NR)-1:0]        n_prog_row = 0, n_wl_base = 0;
  logic [$clog2(NCOL)-1:0]      n_prog_col = 0;
  logic [PR-1:0][IN_W-1:0]      n_wl_code = '0;
  logic [NCOL-1:0][CUR_W-1:0]   n_sl_current;
  logic                         n_sl_valid;
  int                           gmeas [NR][NCOL];

  memristor_crossbar #(.ROWS(NR), .COLS(NCOL), .PAR_ROWS(PR), .IN_W(IN_W), .CUR_W(CUR_W),
                       .G_LRS(GL), .G_HRS(0), .WRITE_NOISE_PCT(NPCT)) dut_noisy (
    .clk, .prog_en(n_prog_en), .prog_row(n_prog_row), .prog_col(n_prog_col),
    .prog_lrs(n_prog_lrs), .read_en(n_read_en), .wl_base(n_wl_base), .wl_code(n_wl_code),
    .sl_current(n_sl_current), .sl_valid(n_sl_valid));

  task automatic n_prog(int r, int c, bit v);
    @(negedge clk);
    n_prog_en = 1; n_prog_row = r[$clog2(NR)-1:0]; n_prog_col = c[$clog2(NCOL)-1:0];
    n_prog_lrs = v;
    @(negedge clk);
    n_prog_en = 0;
  endtask

  // Reads row r alone with code 1: each column current is that cell's conductance.
  task automatic n_read_row(int r, output int gv [NCOL]);
    @(negedge clk);
    n_wl_base = r[$clog2(NR)-1:0];
    n_wl_code = '0;
    n_wl_code[0] = 1;
    n_read_en = 1;
    @(negedge clk);
    n_read_en = 0;
    for (int c = 0; c < NCOL; c++) gv[c] = int'(n_sl_current[c]);
  endtask

  task automatic noise_check();
    real mean, var_s, sd;
    int gv [NCOL];
    int n_diff, n_same;
    for (int r = 0; r < NR; r++) for (int c = 0; c < NCOL; c++) n_prog(r, c, 1'b1);
    mean = 0.0;
    for (int r = 0; r < NR; r++) begin
      n_read_row(r, gv);
      for (int c = 0; c < NCOL; c++) begin
        gmeas[r][c] = gv[c];
        mean += real'(gv[c]);
      end
    end
    mean /= real'(NR * NCOL);
    var_s = 0.0;
    for (int r = 0; r < NR; r++) for (int c = 0; c < NCOL; c++)
      var_s += (real'(gmeas[r][c]) - mean) ** 2;
    sd = $sqrt(var_s / real'(NR * NCOL - 1));
    $display("programmed LRS conductance: mean %0.2f sd %0.2f (nominal %0d, %0d %%)",
             mean, sd, GL, NPCT);
    checks++;
    if (mean < GL - 2.0 || mean > GL + 2.0) begin failures++; $display("mean off"); end
    checks++;
    if (sd < 0.8 * GL * NPCT / 100.0 || sd > 1.2 * GL * NPCT / 100.0) begin
      failures++; $display("spread off");
    end
    // a second read returns the same conductances
    n_same = 0;
    for (int r = 0; r < NR; r++) begin
      n_read_row(r, gv);
      for (int c = 0; c < NCOL; c++) if (gv[c] == gmeas[r][c]) n_same++;
    end
    checks++;
    if (n_same != NR * NCOL) begin failures++; $display("reads differ: %0d same", n_same); end
    // re-programming row 0 to LRS draws new values
    for (int c = 0; c < NCOL; c++) n_prog(0, c, 1'b1);
    n_read_row(0, gv);
    n_diff = 0;
    for (int c = 0; c < NCOL; c++) if (gv[c] != gmeas[0][c]) n_diff++;
    checks++;
    if (n_diff < NCOL / 4) begin failures++; $display("re-programming kept %0d values", NCOL - n_diff); end
    // HRS with zero nominal conductance stays exactly zero
    for (int c = 0; c < NCOL; c++) n_prog(1, c, 1'b0);
    n_read_row(1, gv);
    for (int c = 0; c < NCOL; c++) begin
      checks++;
      if (gv[c] != 0) begin failures++; $display("HRS cell %0d reads %0d", c, gv[c]); end
    end
  endtask

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic prog(int r, int c, bit v);
    @(negedge clk);
    prog_en = 1; prog_row = r[$clog2(ROWS)-1:0]; prog_col = c[$clog2(COLS)-1:0]; prog_lrs = v;
    @(negedge clk);
    prog_en = 0;
    model[r][c] = v;
  endtask

  task automatic read_check(int base);
    @(negedge clk);
    wl_base = base[$clog2(ROWS)-1:0];
    for (int k = 0; k < PR; k++) wl_code[k] = IN_W'($urandom);
    read_en = 1;
    @(negedge clk);
    read_en = 0;
    checks++;
    if (!sl_valid) begin failures++; $display("sl_valid missing"); end
    for (int c = 0; c < COLS; c++) begin
      int exp_i;
      exp_i = 0;
      for (int k = 0; k < PR; k++)
        if (base + k < ROWS) exp_i += int'(wl_code[k]) * (model[base + k][c] ? GL : GH);
      checks++;
      if (int'(sl_current[c]) != exp_i) begin
        failures++;
        $display("col %0d base %0d: got %0d exp %0d", c, base, sl_current[c], exp_i);
      end
    end
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) model[r][c] = 0;
    repeat (2) @(negedge clk);
    for (int i = 0; i < 600; i++) prog($urandom % ROWS, $urandom % COLS, 1'b1);
    for (int i = 0; i < 150; i++) prog($urandom % ROWS, $urandom % COLS, 1'b0);
    read_check(0);
    read_check(64);
    read_check(17);
    read_check(100);   // runs past the last row
    for (int i = 0; i < 10; i++) read_check($urandom % ROWS);
    noise_check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
