// act_pool: digital activation and pooling of one layer's CIM outputs.
//
// After the crossbar results are digitised they are activated and pooled in
// the digital core before being written back as the next layer's input.
// For every position the module applies a rectifier (negative sums become
// zero), requantises by an arithmetic right shift of `shift` bits and
// saturates to an ACT_W-bit unsigned activation code, which is the word-line
// DAC code of the next layer. With pool_en set, two successive positions are
// merged by an element-wise maximum (2:1 max pooling); an odd last position
// (in_last with nothing held) is passed on alone. The paper states only that
// outputs are "activated and pooled"; ReLU, the shift requantisation and the
// 2:1 max window are this design's choices.
//
// Timing: one input per cycle at most; out_valid/out_vec follow one cycle
// after the input that completes an output. clear drops a held half pair.
module act_pool
  import dnn_pkg::*;
#(
  parameter int NCH   = 128,
  parameter int ACT_W = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          pool_en,
  input  logic [4:0]                    shift,
  input  logic                          in_valid,
  input  logic                          in_last,
  input  logic [NCH-1:0][ACC_W-1:0]     in_vec,    // signed entries
  output logic                          out_valid,
  output logic [NCH-1:0][ACT_W-1:0]     out_vec
);

  localparam int AMAX = (1 << ACT_W) - 1;

  logic [NCH-1:0][ACT_W-1:0] act;
  logic [NCH-1:0][ACT_W-1:0] held_vec;
  logic                      held;

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      logic signed [ACC_W-1:0] s;
      s = $signed(in_vec[c]) >>> shift;
      if (s <= 0)                     act[c] = '0;
      else if (s > ACC_W'(AMAX))      act[c] = ACT_W'(AMAX);
      else                            act[c] = s[ACT_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_vec   <= '0;
      held_vec  <= '0;
      held      <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (clear) begin
        held <= 1'b0;
      end else if (in_valid) begin
        if (!pool_en) begin
          out_vec   <= act;
          out_valid <= 1'b1;
        end else if (!held) begin
          if (in_last) begin
            out_vec   <= act;
            out_valid <= 1'b1;
          end else begin
            held_vec <= act;
            held     <= 1'b1;
          end
        end else begin
          for (int c = 0; c < NCH; c++)
            out_vec[c] <= (act[c] > held_vec[c]) ? act[c] : held_vec[c];
          out_valid <= 1'b1;
          held      <= 1'b0;
        end
      end
    end
  end

endmodule
