// tb_tia_adc: self-checking test of the TIA + ADC model. Applies random and
// corner currents (zero, exactly full scale, above full scale), checks the
// code of every channel against floor(I / 2^SHIFT) saturated at 2^14 - 1,
// and checks that done arrives exactly CONV_CYCLES cycles after start.
module tb_tia_adc;
  localparam int CH = 8, CUR_W = 22, AB = 14, SH = 6, CC = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                    start = 0, busy, done;
  logic [CH-1:0][CUR_W-1:0] current = '0;
  logic [CH-1:0][AB-1:0]   code;

  int checks = 0, failures = 0;

  tia_adc #(.CH(CH), .CUR_W(CUR_W), .ADC_BITS(AB), .ADC_SHIFT(SH), .CONV_CYCLES(CC)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic conv(input logic [CH-1:0][CUR_W-1:0] cur);
    int lat;
    logic [CH-1:0][CUR_W-1:0] applied;
    @(negedge clk);
    current = cur; applied = cur; start = 1;
    @(negedge clk);
    start = 0;
    current = '1;            // must not matter: sampled at start
    lat = 1;
    while (!done && lat < 50) begin @(negedge clk); lat++; end
    checks++;
    if (lat != CC) begin failures++; $display("latency %0d exp %0d", lat, CC); end
    for (int c = 0; c < CH; c++) begin
      int e;
      e = int'(applied[c]) >> SH;
      if (e > (1 << AB) - 1) e = (1 << AB) - 1;
      checks++;
      if (int'(code[c]) != e) begin failures++; $display("ch %0d got %0d exp %0d", c, code[c], e); end
    end
  endtask

  initial begin
    logic [CH-1:0][CUR_W-1:0] v;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      for (int c = 0; c < CH; c++) v[c] = CUR_W'($urandom % (1 << 21));
      v[0] = '0;
      v[1] = CUR_W'(((1 << AB) - 1) << SH);
      v[2] = CUR_W'((1 << AB) << SH);
      conv(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
