// tia_adc: BEHAVIOURAL MODEL (not synthesizable hardware) of the source-line
// read-out chain: a transimpedance amplifier turning each column current
// into a voltage, followed by a 14-bit analogue-to-digital converter.
//
// The paper's board uses an OPA4322 TIA and an ADS8324 14-bit ADC; this
// model only keeps their transfer function. The TIA gain and ADC reference
// are folded into one division by 2**ADC_SHIFT (a right shift), and the
// result saturates at full scale (2**ADC_BITS - 1). One converter per
// channel, all converting together, is this design's simplification of the
// board's multiplexed single ADC; the conversion time CONV_CYCLES is also
// assumed.
//
// Interface / timing: currents are sampled at the clock edge where start is
// high (cycle 0); code holds the result and done is high in cycle
// CONV_CYCLES (minimum 2). A start while busy is ignored.
module tia_adc #(
  parameter int CH          = 512,
  parameter int CUR_W       = dnn_pkg::CUR_W,
  parameter int ADC_BITS    = dnn_pkg::ADC_BITS,
  parameter int ADC_SHIFT   = 6,
  parameter int CONV_CYCLES = 4
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  logic [CH-1:0][CUR_W-1:0]       current,
  output logic                           busy,
  output logic                           done,
  output logic [CH-1:0][ADC_BITS-1:0]    code
);

  localparam int FULL = (1 << ADC_BITS) - 1;

  logic [CH-1:0][CUR_W-1:0] held;
  int unsigned              cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= 0;
    end else begin
      done <= 1'b0;
      if (!busy && start) begin
        busy <= 1'b1;
        cnt  <= CONV_CYCLES - 1;
      end else if (busy) begin
        if (cnt <= 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          cnt <= cnt - 1;
        end
      end
    end
  end

  // sample-and-hold and conversion result (no reset needed)
  always_ff @(posedge clk) begin
    if (!busy && start)
      held <= current;
    if (busy && cnt <= 1) begin
      for (int c = 0; c < CH; c++) begin
        int unsigned v;
        v = int'(held[c]) >> ADC_SHIFT;
        code[c] <= (v > FULL) ? ADC_BITS'(FULL) : ADC_BITS'(v);
      end
    end
  end

endmodule
