// memristor_crossbar: BEHAVIOURAL MODEL (not synthesizable hardware) of the
// 1T1R memristor crossbar array (512 x 512 cells in the paper's 40 nm macro).
//
// Each cell is either in the low-resistance state (LRS, conductance G_LRS)
// or the high-resistance state (HRS, conductance G_HRS). A read applies DAC
// codes (word-line voltages, unipolar) to a group of PAR_ROWS consecutive
// word lines starting at wl_base; every source line then carries the sum of
// code * conductance over the driven rows (Ohm's and Kirchhoff's laws).
// All quantities are integers in arbitrary units (conductance unit times
// DAC code). The array size and the 64 parallel word lines follow the
// paper; the conductance values are this design's choice (G_LRS = 64 units
// makes one ADC LSB equal to one unit product when the ADC divides by 64).
//
// Write noise: programming is stochastic, so the conductance a cell ends up
// with is its nominal value times (1 + e), where e is drawn once per write
// from an approximately normal distribution (sum of twelve uniform draws)
// with a standard deviation of WRITE_NOISE_PCT percent, clipped at zero
// conductance. The paper measures about 15 % for its devices; the default
// here is 0 (an ideal array) so that the digital periphery can be checked
// bit-exactly, and 15 reproduces the measured spread. Read noise (the
// cycle-to-cycle fluctuation of a programmed cell) is not modelled: a cell
// returns the same conductance on every read.
//
// Interface / timing:
//   prog_en, prog_row, prog_col, prog_lrs : program one cell at a rising edge
//                                            (1 = SET to LRS, 0 = RESET to HRS)
//   read_en, wl_base, wl_code             : sampled at a rising edge; the
//                                            currents are valid on sl_current
//                                            from the next cycle, with
//                                            sl_valid high for one cycle.
//   Rows past ROWS-1 are not driven.
module memristor_crossbar #(
  parameter int ROWS     = 512,
  parameter int COLS     = 512,
  parameter int PAR_ROWS = dnn_pkg::PAR_ROWS,
  parameter int IN_W     = 8,
  parameter int CUR_W    = dnn_pkg::CUR_W,
  parameter int G_LRS    = 64,
  parameter int G_HRS    = 0,
  parameter int WRITE_NOISE_PCT = 0
) (
  input  logic                              clk,
  input  logic                              prog_en,
  input  logic [$clog2(ROWS)-1:0]           prog_row,
  input  logic [$clog2(COLS)-1:0]           prog_col,
  input  logic                              prog_lrs,
  input  logic                              read_en,
  input  logic [$clog2(ROWS)-1:0]           wl_base,
  input  logic [PAR_ROWS-1:0][IN_W-1:0]     wl_code,
  output logic [COLS-1:0][CUR_W-1:0]        sl_current,
  output logic                              sl_valid
);

  // Cell state: the conductance each cell was programmed to. Cells start in
  // HRS (a freshly formed and reset array), without programming spread.
  int g [ROWS][COLS];

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        g[r][c] = G_HRS;
  end

  // Conductance reached by one programming pulse aimed at 'nominal'.
  // z has mean 0 and standard deviation 4096, so the relative error is
  // z / 4096 * WRITE_NOISE_PCT / 100.
  function automatic int programmed(int nominal);
    longint z, v;
    if (WRITE_NOISE_PCT == 0) return nominal;
    z = 0;
    for (int i = 0; i < 12; i++) z += longint'($urandom_range(4095, 0));
    z -= 24570;
    v = (longint'(nominal) * (409600 + z * WRITE_NOISE_PCT) + 204800) / 409600;
    return (v < 0) ? 0 : int'(v);
  endfunction

  always @(posedge clk) begin
    if (prog_en)
      g[prog_row][prog_col] <= programmed(prog_lrs ? G_LRS : G_HRS);
    sl_valid <= read_en;
    if (read_en) begin
      for (int c = 0; c < COLS; c++) begin
        int sum;
        sum = 0;
        for (int k = 0; k < PAR_ROWS; k++) begin
          int r;
          r = int'(wl_base) + k;
          if (r < ROWS)
            sum += int'(wl_code[k]) * g[r][c];
        end
        sl_current[c] <= CUR_W'(sum);
      end
    end
  end

endmodule
