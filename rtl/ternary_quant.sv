// ternary_quant: ternary quantisation of a vector (the CAM search vector).
//
// Uses the paper's ternary quantisation rule: with wmin and wmax the smallest
// and largest entry, two interval bounds l = wmin + (wmax - wmin)/3 and
// h = wmax - (wmax - wmin)/3 split the range in thirds; entries below l map
// to -1, entries above h to +1, the rest to 0. The paper states the rule for
// the weights and semantic centres; applying it in hardware to the averaged
// semantic vector of each query is this design's choice (the search vectors
// the paper draws are ternary). Only the first n entries take part; the
// others are 0. nnz is the number of non-zero trits, which for a ternary
// vector is its squared Euclidean norm and is used by the cosine test.
// Division by 3 truncates.
//
// Timing: combinational over all N entries, registered: trits, nnz and the
// done pulse appear one cycle after start.
module ternary_quant
  import dnn_pkg::*;
#(
  parameter int N = 128,
  parameter int W = 8,
  localparam int NW = $clog2(N + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [NW-1:0]         n,
  input  logic [N-1:0][W-1:0]   vec,
  output logic                  done,
  output trit_e                 trits [N],
  output logic [NW-1:0]         nnz
);

  logic [W-1:0] vmin, vmax, lin, hin, third;
  trit_e        t_c [N];
  logic [NW-1:0] nnz_c;

  always_comb begin
    vmin = '1;
    vmax = '0;
    for (int i = 0; i < N; i++) begin
      if (i < int'(n)) begin
        if (vec[i] < vmin) vmin = vec[i];
        if (vec[i] > vmax) vmax = vec[i];
      end
    end
    if (n == 0) vmin = '0;
    third = (vmax - vmin) / W'(3);
    lin   = vmin + third;
    hin   = vmax - third;
    nnz_c = '0;
    for (int i = 0; i < N; i++) begin
      t_c[i] = TRIT_ZERO;
      if (i < int'(n)) begin
        if (vec[i] < lin)      t_c[i] = TRIT_NEG;
        else if (vec[i] > hin) t_c[i] = TRIT_POS;
      end
      if (t_c[i] != TRIT_ZERO) nnz_c = nnz_c + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0;
      nnz  <= '0;
      for (int i = 0; i < N; i++) trits[i] <= TRIT_ZERO;
    end else begin
      done <= start;
      if (start) begin
        trits <= t_c;
        nnz   <= nnz_c;
      end
    end
  end

endmodule
