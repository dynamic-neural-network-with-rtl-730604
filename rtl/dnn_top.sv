// dnn_top: semantic-memory dynamic neural network with a ternary memristor
// compute-in-memory (CIM) crossbar and a memristor content-addressable
// memory (CAM) for early exit.
//
// A network of up to MAX_LAYERS ternary layers runs one layer at a time.
// For every position of the current feature map the input vector is
// applied to the CIM crossbar (xbar_vmm), the digitised outputs are
// activated and pooled (act_pool) and written to the other half of a
// ping-pong feature buffer, and the same outputs are accumulated by global
// average pooling (gap_unit). At the end of the layer the averaged vector is
// ternary-quantised (ternary_quant) into a search vector, which is applied
// to this layer's semantic centres in the CAM crossbar (a second xbar_vmm in
// two-pass signed mode). The match-line dot products go to cam_sort, which
// picks the class of highest cosine similarity and compares it with the
// layer's threshold. If it is confident the network exits with that class
// and the remaining layers are skipped; otherwise the next layer runs on the
// buffer just written. The last configured layer always returns its best
// class. ops_count counts ternary multiply-accumulates actually executed
// (the computational budget).
//
// The flow (CIM feature extraction, digital activation and pooling, GAP,
// ternary search vector, CAM cosine search, per-layer threshold, early exit)
// follows the paper. Layers are pointwise (the same weights for every
// position, as in PointNet's shared MLPs); spatial convolution windows,
// residual additions and point sampling/grouping are not built. The
// configuration layout, the separate CIM and CAM crossbar instances, and
// the host-written centre norms are this design's choices.
// WRITE_NOISE_PCT sets the programming spread of the memristor model in
// both crossbars (0 = ideal cells, the default; the paper measures about
// 15 % on its devices).
//
// Host interface (all synchronous, use while idle):
//   cfg_we/cfg_layer/cfg_data          : per-layer configuration (layer_cfg_t)
//   norm_we/norm_layer/norm_class/...  : non-zero count of each stored centre
//   prog_en/prog_sel/prog_row/...      : write one trit, prog_sel 0 = CIM
//                                        weight (row, column pair), 1 = CAM
//                                        centre (row = dimension, col = class);
//                                        wait for prog_ready between writes
//   in_we/in_pos/in_vec                : load one input position
//   start with num_layers/num_pos      : run one inference; done pulses with
//                                        result_class, result_layers (layers
//                                        run), early_exit and ops_count.
module dnn_top
  import dnn_pkg::*;
#(
  parameter int MAX_LAYERS  = 11,
  parameter int MAX_POS     = 784,
  parameter int MAX_CH      = 128,
  parameter int N_CLASS     = 10,
  parameter int ACT_W       = 8,
  parameter int XB_ROWS     = 512,
  parameter int XB_COLS     = 512,
  parameter int CAM_ROWS    = 512,
  parameter int CONV_CYCLES = 4,
  parameter int WRITE_NOISE_PCT = 0,
  localparam int LW  = $clog2(MAX_LAYERS + 1),
  localparam int PW  = $clog2(MAX_POS + 1),
  localparam int KW  = (N_CLASS > 1) ? $clog2(N_CLASS) : 1,
  localparam int CHW = $clog2(MAX_CH + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration
  input  logic                          cfg_we,
  input  logic [LW-1:0]                 cfg_layer,
  input  layer_cfg_t                    cfg_data,
  input  logic                          norm_we,
  input  logic [LW-1:0]                 norm_layer,
  input  logic [KW-1:0]                 norm_class,
  input  logic [7:0]                    norm_data,
  // memristor programming
  input  logic                          prog_en,
  input  logic                          prog_sel,
  input  logic [8:0]                    prog_row,
  input  logic [7:0]                    prog_col,
  input  trit_e                         prog_trit,
  output logic                          prog_ready,
  // input feature map
  input  logic                          in_we,
  input  logic [PW-1:0]                 in_pos,
  input  logic [MAX_CH-1:0][ACT_W-1:0]  in_vec,
  // run
  input  logic                          start,
  input  logic [LW-1:0]                 num_layers,
  input  logic [PW-1:0]                 num_pos,
  output logic                          busy,
  output logic                          done,
  output logic [KW-1:0]                 result_class,
  output logic [LW-1:0]                 result_layers,
  output logic                          early_exit,
  output logic [31:0]                   ops_count
);

  localparam int XRW  = $clog2(XB_ROWS);
  localparam int XCW  = $clog2(XB_COLS / 2);
  localparam int CRW  = $clog2(CAM_ROWS);
  localparam int CAM_COLS = 2 * N_CLASS;
  localparam int CCW  = $clog2(CAM_COLS / 2);

  // ---------------------------------------------------------------- tables
  layer_cfg_t cfg_tab  [MAX_LAYERS];
  logic [7:0] norm_tab [MAX_LAYERS][N_CLASS];

  always_ff @(posedge clk) begin
    if (cfg_we)  cfg_tab[cfg_layer] <= cfg_data;
    if (norm_we) norm_tab[norm_layer][norm_class] <= norm_data;
  end

  // ---------------------------------------------------- ping-pong buffers
  logic [MAX_CH-1:0][ACT_W-1:0] fbuf [2][MAX_POS];

  typedef enum logic [3:0] {
    S_IDLE, S_LSETUP, S_READ, S_VMM, S_VWAIT, S_FLUSH, S_GAPFIN, S_GAPWAIT,
    S_TQWAIT, S_CAM, S_CAMWAIT, S_SORTWAIT, S_DONE
  } state_e;
  state_e state;

  layer_cfg_t cfg;
  logic [LW-1:0] layer, nlayers;
  logic          src;
  logic [PW-1:0] pos, npos, wr_ptr;
  logic [MAX_CH-1:0][ACT_W:0] vin;

  // ---------------------------------------------------------------- CIM
  logic                           cim_start, cim_done, cim_busy, cim_prog_ready;
  logic [MAX_CH-1:0][ACC_W-1:0]   cim_out;
  logic [15:0]                    cim_groups;

  xbar_vmm #(
    .ROWS(XB_ROWS), .COLS(XB_COLS), .NOUT(MAX_CH), .MAX_IN(MAX_CH), .IN_W(ACT_W),
    .CONV_CYCLES(CONV_CYCLES), .WRITE_NOISE_PCT(WRITE_NOISE_PCT)
  ) u_cim (
    .clk        (clk),
    .rst_n      (rst_n),
    .prog_en    (prog_en && !prog_sel),
    .prog_row   (XRW'(prog_row)),
    .prog_col   (XCW'(prog_col)),
    .prog_trit  (prog_trit),
    .prog_ready (cim_prog_ready),
    .start      (cim_start),
    .signed_mode(1'b0),
    .n_in       (CHW'(cfg.c_in)),
    .n_out      (CHW'(cfg.c_out)),
    .row_base   (XRW'(cfg.cim_row_base)),
    .col_base   (XCW'(cfg.cim_col_base)),
    .in_vec     (vin),
    .busy       (cim_busy),
    .done       (cim_done),
    .out_vec    (cim_out),
    .groups_run (cim_groups)
  );

  // ------------------------------------------------- activation / pooling
  logic                         ap_clear, ap_in_valid, ap_in_last, ap_out_valid;
  logic [MAX_CH-1:0][ACT_W-1:0] ap_out;

  act_pool #(.NCH(MAX_CH), .ACT_W(ACT_W)) u_act (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (ap_clear),
    .pool_en  (cfg.pool_en),
    .shift    (cfg.act_shift),
    .in_valid (ap_in_valid),
    .in_last  (ap_in_last),
    .in_vec   (cim_out),
    .out_valid(ap_out_valid),
    .out_vec  (ap_out)
  );

  // ------------------------------------------------------------------ GAP
  logic                         gap_fin_start, gap_fin_busy, gap_fin_done;
  logic [MAX_CH-1:0][ACT_W-1:0] gap_mean;
  logic [PW-1:0]                gap_count;

  gap_unit #(.NCH(MAX_CH), .ACT_W(ACT_W), .CNT_W(PW)) u_gap (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (ap_clear),
    .in_valid (ap_out_valid),
    .in_vec   (ap_out),
    .fin_start(gap_fin_start),
    .fin_busy (gap_fin_busy),
    .fin_done (gap_fin_done),
    .mean     (gap_mean),
    .count    (gap_count)
  );

  // ------------------------------------------------- ternary search vector
  logic          tq_start, tq_done;
  trit_e         sv [MAX_CH];
  logic [CHW-1:0] sv_nnz;

  ternary_quant #(.N(MAX_CH), .W(ACT_W)) u_tq (
    .clk  (clk),
    .rst_n(rst_n),
    .start(tq_start),
    .n    (CHW'(cfg.c_out)),
    .vec  (gap_mean),
    .done (tq_done),
    .trits(sv),
    .nnz  (sv_nnz)
  );

  // ---------------------------------------------------------------- CAM
  logic                            cam_start, cam_done, cam_busy, cam_prog_ready;
  logic [MAX_CH-1:0][ACT_W:0]      cam_in;
  logic [N_CLASS-1:0][ACC_W-1:0]   cam_out;
  logic [15:0]                     cam_groups;

  // ternary search vector as signed word-line codes: +1 / -1 read voltage
  always_comb
    for (int i = 0; i < MAX_CH; i++)
      cam_in[i] = (ACT_W + 1)'(signed'(trit_val(sv[i])));

  xbar_vmm #(
    .ROWS(CAM_ROWS), .COLS(CAM_COLS), .NOUT(N_CLASS), .MAX_IN(MAX_CH), .IN_W(ACT_W),
    .CONV_CYCLES(CONV_CYCLES), .WRITE_NOISE_PCT(WRITE_NOISE_PCT)
  ) u_cam (
    .clk        (clk),
    .rst_n      (rst_n),
    .prog_en    (prog_en && prog_sel),
    .prog_row   (CRW'(prog_row)),
    .prog_col   (CCW'(prog_col)),
    .prog_trit  (prog_trit),
    .prog_ready (cam_prog_ready),
    .start      (cam_start),
    .signed_mode(1'b1),
    .n_in       (CHW'(cfg.c_out)),
    .n_out      ($clog2(N_CLASS + 1)'(N_CLASS)),
    .row_base   (CRW'(cfg.cam_row_base)),
    .col_base   ('0),
    .in_vec     (cam_in),
    .busy       (cam_busy),
    .done       (cam_done),
    .out_vec    (cam_out),
    .groups_run (cam_groups)
  );

  assign prog_ready = cim_prog_ready && cam_prog_ready;

  // ------------------------------------------------------------- sort
  logic                    sort_start, sort_done, sort_valid, sort_conf;
  logic [KW-1:0]           sort_best;
  logic [N_CLASS-1:0][7:0] nnz_c;

  always_comb
    for (int k = 0; k < N_CLASS; k++)
      nnz_c[k] = norm_tab[layer][k];

  cam_sort #(.N_CLASS(N_CLASS)) u_sort (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (sort_start),
    .dots      (cam_out),
    .nnz_c     (nnz_c),
    .nnz_s     (8'(sv_nnz)),
    .threshold (cfg.threshold),
    .done      (sort_done),
    .best      (sort_best),
    .best_valid(sort_valid),
    .confident (sort_conf)
  );

  // ------------------------------------------------------- control
  assign cim_start     = (state == S_VMM);
  assign ap_clear      = (state == S_LSETUP);
  assign ap_in_valid   = (state == S_VWAIT) && cim_done;
  assign ap_in_last    = (pos == npos - 1'b1);
  assign gap_fin_start = (state == S_GAPFIN);
  assign tq_start      = (state == S_GAPWAIT) && gap_fin_done;
  assign cam_start     = (state == S_CAM);
  assign sort_start    = (state == S_CAMWAIT) && cam_done;
  assign busy          = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (state == S_IDLE && in_we)
      fbuf[0][in_pos] <= in_vec;
    if (ap_out_valid)
      fbuf[~src][wr_ptr] <= ap_out;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      cfg           <= '0;
      layer         <= '0;
      nlayers       <= '0;
      src           <= 1'b0;
      pos           <= '0;
      npos          <= '0;
      wr_ptr        <= '0;
      vin           <= '0;
      done          <= 1'b0;
      result_class  <= '0;
      result_layers <= '0;
      early_exit    <= 1'b0;
      ops_count     <= '0;
    end else begin
      done <= 1'b0;
      if (ap_out_valid) wr_ptr <= wr_ptr + 1'b1;
      case (state)
        S_IDLE: if (start) begin
          layer     <= '0;
          nlayers   <= (num_layers == 0) ? LW'(1) : num_layers;
          src       <= 1'b0;
          npos      <= num_pos;
          ops_count <= '0;
          state     <= S_LSETUP;
        end
        S_LSETUP: begin
          cfg    <= cfg_tab[layer];
          pos    <= '0;
          wr_ptr <= '0;
          state  <= S_READ;
        end
        S_READ: begin
          for (int c = 0; c < MAX_CH; c++)
            vin[c] <= {1'b0, fbuf[src][pos][c]};
          state <= S_VMM;
        end
        S_VMM: state <= S_VWAIT;
        S_VWAIT: if (cim_done) begin
          ops_count <= ops_count + 32'(cfg.c_in) * 32'(cfg.c_out);
          if (ap_in_last) state <= S_FLUSH;
          else begin
            pos   <= pos + 1'b1;
            state <= S_READ;
          end
        end
        S_FLUSH:   state <= S_GAPFIN;
        S_GAPFIN:  state <= S_GAPWAIT;
        S_GAPWAIT: if (gap_fin_done) state <= S_TQWAIT;
        S_TQWAIT:  if (tq_done) state <= S_CAM;
        S_CAM:     state <= S_CAMWAIT;
        S_CAMWAIT: if (cam_done) state <= S_SORTWAIT;
        S_SORTWAIT: if (sort_done) begin
          if (sort_conf || layer == nlayers - 1'b1) begin
            result_class  <= sort_best;
            result_layers <= layer + 1'b1;
            early_exit    <= sort_conf && (layer != nlayers - 1'b1);
            state         <= S_DONE;
          end else begin
            layer <= layer + 1'b1;
            src   <= ~src;
            npos  <= wr_ptr;
            state <= S_LSETUP;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_prog_while_busy: assert property (@(posedge clk) disable iff (!rst_n) prog_en |-> !busy);
  a_pos_in_range: assert property (@(posedge clk) disable iff (!rst_n) start |-> num_pos <= PW'(MAX_POS) && num_pos != 0);

endmodule
