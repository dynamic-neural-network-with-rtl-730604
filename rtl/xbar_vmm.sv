// xbar_vmm: ternary vector-matrix multiplication on a memristor crossbar.
//
// This is the compute-in-memory (CIM) engine, and also the match-line engine
// of the content-addressable memory (CAM): both are a crossbar that stores
// ternary values as differential memristor pairs and multiplies them with
// an applied vector. The module contains the crossbar model, the read-out
// model (TIA + 14-bit ADC) and the digital sequencing around them.
//
// Storage: trit (r, j) is held by cell (r, j) of the first half of the
// columns and cell (r, j + COLS/2) of the second half; +1 = first cell LRS,
// -1 = second cell LRS, 0 = both HRS (the paper's pairing). A programming
// write therefore takes two cycles; prog_ready is low during the second.
//
// Multiply: the weights of one operation occupy rows row_base .. row_base +
// n_in - 1 and column pairs col_base .. col_base + n_out - 1. Only PAR_ROWS
// (64) word lines can be driven at once, so the input is applied in groups
// of 64 rows; for each group the two columns of every pair are digitised,
// subtracted, and the difference is added to a digital accumulator. Word-line
// voltages are unipolar (0..5 V in the paper), so a signed input vector
// (signed_mode = 1, used for ternary search vectors) is applied in two
// passes, first its positive entries and then the magnitudes of its negative
// entries, and the second pass is subtracted. Group tiling, digital
// subtraction and the two-pass scheme are this design's choices.
// WRITE_NOISE_PCT is handed to the crossbar model (programming spread in
// percent, 0 = ideal cells).
//
// Timing: start is accepted in idle; per group and pass the engine spends
// 1 cycle driving, 1 cycle starting the ADC, CONV_CYCLES cycles converting
// and 1 cycle accumulating. done pulses for one cycle with out_vec valid
// (held until the next start). Entries j >= n_out of out_vec are zero.
module xbar_vmm
  import dnn_pkg::*;
#(
  parameter int ROWS        = 512,
  parameter int COLS        = 512,
  parameter int NOUT        = 128,
  parameter int MAX_IN      = 128,
  parameter int IN_W        = 8,
  parameter int G_LRS       = 64,
  parameter int G_HRS       = 0,
  parameter int ADC_SHIFT   = 6,
  parameter int CONV_CYCLES = 4,
  parameter int WRITE_NOISE_PCT = 0,
  localparam int RW = $clog2(ROWS),
  localparam int CW = $clog2(COLS / 2),
  localparam int NW = $clog2(MAX_IN + 1),
  localparam int OW = $clog2(NOUT + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // trit programming
  input  logic                          prog_en,
  input  logic [RW-1:0]                 prog_row,
  input  logic [CW-1:0]                 prog_col,
  input  trit_e                         prog_trit,
  output logic                          prog_ready,
  // multiply
  input  logic                          start,
  input  logic                          signed_mode,
  input  logic [NW-1:0]                 n_in,
  input  logic [OW-1:0]                 n_out,
  input  logic [RW-1:0]                 row_base,
  input  logic [CW-1:0]                 col_base,
  input  logic [MAX_IN-1:0][IN_W:0]     in_vec,     // signed entries
  output logic                          busy,
  output logic                          done,
  output logic [NOUT-1:0][ACC_W-1:0]    out_vec,    // signed entries
  output logic [15:0]                   groups_run  // reads issued by the last operation
);

  localparam int HALF = COLS / 2;

  typedef enum logic [2:0] {S_IDLE, S_DRIVE, S_ADC, S_WAIT, S_ACC, S_DONE} state_e;
  state_e state;

  // latched operation
  logic [MAX_IN-1:0][IN_W:0] vin;
  logic [NW-1:0]             nin;
  logic [OW-1:0]             nout;
  logic [RW-1:0]             rbase;
  logic [CW-1:0]             cbase;
  logic                      sgn;
  logic                      phase;   // 0: positive entries, 1: negative entries
  logic [NW-1:0]             grp_off; // first input index of the current group

  // crossbar / ADC wiring
  logic                            xb_prog_en;
  logic [RW-1:0]                   xb_prog_row;
  logic [$clog2(COLS)-1:0]         xb_prog_col;
  logic                            xb_prog_lrs;
  logic                            xb_read;
  logic [RW-1:0]                   xb_wl_base;
  logic [PAR_ROWS-1:0][IN_W-1:0]   xb_code;
  logic [COLS-1:0][CUR_W-1:0]      xb_cur;
  logic                            xb_valid;
  logic                            adc_start, adc_busy, adc_done;
  logic [COLS-1:0][ADC_BITS-1:0]   adc_code;

  // second half of a pair write
  logic          pend;
  logic [RW-1:0] pend_row;
  logic [CW-1:0] pend_col;
  logic          pend_lrs;

  assign prog_ready = !pend;

  always_comb begin
    if (pend) begin
      xb_prog_en  = 1'b1;
      xb_prog_row = pend_row;
      xb_prog_col = $clog2(COLS)'(int'(pend_col) + HALF);
      xb_prog_lrs = pend_lrs;
    end else begin
      xb_prog_en  = prog_en;
      xb_prog_row = prog_row;
      xb_prog_col = $clog2(COLS)'(prog_col);
      xb_prog_lrs = (prog_trit == TRIT_POS);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend     <= 1'b0;
      pend_row <= '0;
      pend_col <= '0;
      pend_lrs <= 1'b0;
    end else if (pend) begin
      pend <= 1'b0;
    end else if (prog_en) begin
      pend     <= 1'b1;
      pend_row <= prog_row;
      pend_col <= prog_col;
      pend_lrs <= (prog_trit == TRIT_NEG);
    end
  end

  // word-line codes of the current group and pass
  always_comb begin
    for (int k = 0; k < PAR_ROWS; k++) begin
      int idx;
      logic signed [IN_W:0] v;
      idx = int'(grp_off) + k;
      v   = '0;
      if (idx < int'(nin) && idx < MAX_IN)
        v = $signed(vin[idx]);
      if (!phase)
        xb_code[k] = (v > 0) ? IN_W'(v) : '0;
      else
        xb_code[k] = (v < 0) ? IN_W'(-v) : '0;
    end
  end

  assign xb_wl_base = rbase + RW'(grp_off);
  assign xb_read    = (state == S_DRIVE);
  assign adc_start  = (state == S_ADC);

  memristor_crossbar #(
    .ROWS(ROWS), .COLS(COLS), .PAR_ROWS(PAR_ROWS), .IN_W(IN_W),
    .CUR_W(CUR_W), .G_LRS(G_LRS), .G_HRS(G_HRS),
    .WRITE_NOISE_PCT(WRITE_NOISE_PCT)
  ) u_xbar (
    .clk       (clk),
    .prog_en   (xb_prog_en),
    .prog_row  (xb_prog_row),
    .prog_col  (xb_prog_col),
    .prog_lrs  (xb_prog_lrs),
    .read_en   (xb_read),
    .wl_base   (xb_wl_base),
    .wl_code   (xb_code),
    .sl_current(xb_cur),
    .sl_valid  (xb_valid)
  );

  tia_adc #(
    .CH(COLS), .CUR_W(CUR_W), .ADC_BITS(ADC_BITS),
    .ADC_SHIFT(ADC_SHIFT), .CONV_CYCLES(CONV_CYCLES)
  ) u_adc (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (adc_start),
    .current(xb_cur),
    .busy   (adc_busy),
    .done   (adc_done),
    .code   (adc_code)
  );

  logic last_group;
  assign last_group = (int'(grp_off) + PAR_ROWS >= int'(nin));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      done       <= 1'b0;
      vin        <= '0;
      nin        <= '0;
      nout       <= '0;
      rbase      <= '0;
      cbase      <= '0;
      sgn        <= 1'b0;
      phase      <= 1'b0;
      grp_off    <= '0;
      out_vec    <= '0;
      groups_run <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          vin        <= in_vec;
          nin        <= n_in;
          nout       <= n_out;
          rbase      <= row_base;
          cbase      <= col_base;
          sgn        <= signed_mode;
          phase      <= 1'b0;
          grp_off    <= '0;
          out_vec    <= '0;
          groups_run <= '0;
          state      <= S_DRIVE;
        end
        S_DRIVE: state <= S_ADC;
        S_ADC:   state <= S_WAIT;
        S_WAIT:  if (adc_done) state <= S_ACC;
        S_ACC: begin
          for (int j = 0; j < NOUT; j++) begin
            if (j < int'(nout)) begin
              logic signed [ADC_BITS+1:0] d;
              d = $signed({2'b00, adc_code[int'(cbase) + j]})
                - $signed({2'b00, adc_code[int'(cbase) + j + HALF]});
              if (!phase) out_vec[j] <= $signed(out_vec[j]) + ACC_W'(d);
              else        out_vec[j] <= $signed(out_vec[j]) - ACC_W'(d);
            end
          end
          groups_run <= groups_run + 16'd1;
          if (!last_group) begin
            grp_off <= grp_off + NW'(PAR_ROWS);
            state   <= S_DRIVE;
          end else if (sgn && !phase) begin
            phase   <= 1'b1;
            grp_off <= '0;
            state   <= S_DRIVE;
          end else begin
            state <= S_DONE;
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

  assign busy = (state != S_IDLE);

  // Host rules: program only when ready, start only when idle.
  a_prog_ready: assert property (@(posedge clk) disable iff (!rst_n) prog_en |-> prog_ready);
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);

endmodule
