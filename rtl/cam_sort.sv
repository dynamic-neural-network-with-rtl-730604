// cam_sort: best-match search over the CAM match lines and the early-exit
// confidence test.
//
// The CAM returns, for every class k, the dot product dots[k] between the
// ternary search vector s and the stored ternary semantic centre c_k. The
// cosine similarity is dots[k] / sqrt(nnz_s * nnz_c[k]), where nnz is the
// count of non-zero trits (the squared norm of a ternary vector). The unit
// scans the classes one per cycle and keeps the one of largest cosine,
// comparing without square roots (d_a^2 * n_b against d_b^2 * n_a, with the
// signs handled separately). A class whose centre is all zero never wins.
// It then tests the winner against the layer's threshold T (Q1.8, so 256 is
// 1.0): confident = dot > 0 and dot^2 * 2^16 >= T^2 * nnz_s * nnz_c.
// Choosing the class of maximum cosine similarity and exiting above a
// per-layer threshold follow the paper; the arithmetic is this design's.
//
// Timing: start latches the inputs; done pulses N_CLASS + 2 cycles later
// with best, best_valid and confident.
module cam_sort
  import dnn_pkg::*;
#(
  parameter int N_CLASS = 10,
  localparam int KW = (N_CLASS > 1) ? $clog2(N_CLASS) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic [N_CLASS-1:0][ACC_W-1:0]     dots,    // signed entries
  input  logic [N_CLASS-1:0][7:0]           nnz_c,
  input  logic [7:0]                        nnz_s,
  input  logic [8:0]                        threshold,
  output logic                              done,
  output logic [KW-1:0]                     best,
  output logic                              best_valid,
  output logic                              confident
);

  logic [N_CLASS-1:0][ACC_W-1:0] d_r;
  logic [N_CLASS-1:0][7:0]       n_r;
  logic [7:0]                    ns_r;
  logic [8:0]                    th_r;
  logic                          run, decide;
  logic [KW:0]                   idx;
  logic signed [ACC_W-1:0]       bd;
  logic [7:0]                    bn;

  // cos(a) > cos(b) for dot products da, db and squared norms na, nb.
  function automatic logic better(logic signed [ACC_W-1:0] da, logic [7:0] na,
                                  logic signed [ACC_W-1:0] db, logic [7:0] nb);
    logic [63:0] lhs, rhs;
    if (na == 0) return 1'b0;
    if (nb == 0) return 1'b1;
    lhs = 64'(da * da) * 64'(nb);
    rhs = 64'(db * db) * 64'(na);
    if (da > 0 && db <= 0) return 1'b1;
    if (da <= 0 && db > 0) return 1'b0;
    if (da > 0) return lhs > rhs;   // both positive
    return lhs < rhs;               // both non-positive
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_r <= '0; n_r <= '0; ns_r <= '0; th_r <= '0;
      run <= 1'b0; decide <= 1'b0; idx <= '0;
      bd <= '0; bn <= '0;
      done <= 1'b0; best <= '0; best_valid <= 1'b0; confident <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !run && !decide) begin
        d_r  <= dots;
        n_r  <= nnz_c;
        ns_r <= nnz_s;
        th_r <= threshold;
        run  <= 1'b1;
        idx  <= '0;
        bd   <= '0;
        bn   <= '0;
        best <= '0;
        best_valid <= 1'b0;
      end else if (run) begin
        if (better($signed(d_r[idx]), n_r[idx], bd, bn)) begin
          bd   <= $signed(d_r[idx]);
          bn   <= n_r[idx];
          best <= KW'(idx);
          best_valid <= 1'b1;
        end
        if (int'(idx) == N_CLASS - 1) begin
          run    <= 1'b0;
          decide <= 1'b1;
        end
        idx <= idx + 1'b1;
      end else if (decide) begin
        logic [63:0] lhs, rhs;
        lhs = 64'(bd * bd) << 16;
        rhs = 64'(th_r) * 64'(th_r) * 64'(ns_r) * 64'(bn);
        confident <= best_valid && (bd > 0) && (ns_r != 0) && (lhs >= rhs);
        decide    <= 1'b0;
        done      <= 1'b1;
      end
    end
  end

endmodule
