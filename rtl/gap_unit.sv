// gap_unit: global average pooling (GAP) of a layer's output feature map.
//
// Every layer's activated output map is reduced to one value per channel,
// the average over all positions; this vector is the layer's semantic
// vector, which is then ternary-quantised into the CAM search vector.
// The unit adds each incoming position vector into per-channel sums and
// counts the positions. fin_start then divides the sums by the count, one
// channel per cycle through a single divider (truncating), and pulses
// fin_done when mean holds all channels. A count of zero gives zero means.
// The sequential divide is this design's choice; the paper specifies only
// the averaging.
//
// Timing: clear (one cycle) resets the sums; in_valid adds in_vec that
// cycle; after fin_start, fin_done follows NCH + 1 cycles later.
module gap_unit #(
  parameter int NCH   = 128,
  parameter int ACT_W = 8,
  parameter int CNT_W = 10
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        in_valid,
  input  logic [NCH-1:0][ACT_W-1:0]   in_vec,
  input  logic                        fin_start,
  output logic                        fin_busy,
  output logic                        fin_done,
  output logic [NCH-1:0][ACT_W-1:0]   mean,
  output logic [CNT_W-1:0]            count
);

  localparam int SW = ACT_W + CNT_W;

  logic [NCH-1:0][SW-1:0]   sum;
  logic [$clog2(NCH+1)-1:0] ch;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum      <= '0;
      count    <= '0;
      mean     <= '0;
      ch       <= '0;
      fin_busy <= 1'b0;
      fin_done <= 1'b0;
    end else begin
      fin_done <= 1'b0;
      if (clear) begin
        sum   <= '0;
        count <= '0;
      end else if (in_valid) begin
        for (int c = 0; c < NCH; c++)
          sum[c] <= sum[c] + SW'(in_vec[c]);
        count <= count + 1'b1;
      end
      if (fin_start && !fin_busy) begin
        fin_busy <= 1'b1;
        ch       <= '0;
      end else if (fin_busy) begin
        if (int'(ch) == NCH) begin
          fin_busy <= 1'b0;
          fin_done <= 1'b1;
        end else begin
          mean[ch] <= (count == 0) ? '0 : ACT_W'(sum[ch] / SW'(count));
          ch       <= ch + 1'b1;
        end
      end
    end
  end

endmodule
