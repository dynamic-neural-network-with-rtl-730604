// tb_gap_unit: self-checking test of global average pooling. Feeds maps of
// several lengths (1 position, 7, 100, and a second map after clear) of
// random activations, then checks every channel mean against the truncated
// average computed here, the position count, and that fin_done arrives
// NCH + 1 cycles after fin_start.
module tb_gap_unit;
  localparam int NCH = 5, ACT_W = 8, CNT_W = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                      clear = 0, in_valid = 0, fin_start = 0, fin_busy, fin_done;
  logic [NCH-1:0][ACT_W-1:0] in_vec = '0, mean;
  logic [CNT_W-1:0]          count;

  int checks = 0, failures = 0;

  gap_unit #(.NCH(NCH), .ACT_W(ACT_W), .CNT_W(CNT_W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic map(int n);
    int sum [NCH];
    int lat;
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    for (int c = 0; c < NCH; c++) sum[c] = 0;
    for (int p = 0; p < n; p++) begin
      for (int c = 0; c < NCH; c++) begin
        in_vec[c] = ACT_W'($urandom);
        sum[c] += int'(in_vec[c]);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
    end
    fin_start = 1;
    @(negedge clk);
    fin_start = 0;
    lat = 1;
    while (!fin_done && lat < 1000) begin @(negedge clk); lat++; end
    checks++;
    if (lat != NCH + 2) begin failures++; $display("latency %0d", lat); end
    checks++;
    if (int'(count) != n) begin failures++; $display("count %0d exp %0d", count, n); end
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (int'(mean[c]) != sum[c] / n) begin
        failures++; $display("n %0d ch %0d got %0d exp %0d", n, c, mean[c], sum[c] / n);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    map(1);
    map(7);
    map(100);
    map(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
