// tb_cam_sort: self-checking test of the best-match search and the cosine
// threshold test. Uses random dot products (positive and negative), random
// centre norms (some zero) and thresholds, and compares the winning class
// and the confident flag with a floating-point cosine computed here (ties
// are avoided by construction of the check: a tie is accepted if the chosen
// class has the maximum cosine). Checks that done follows start by
// N_CLASS + 2 cycles.
module tb_cam_sort;
  import dnn_pkg::*;
  localparam int NC = 10, KW = $clog2(NC);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                       start = 0, done, best_valid, confident;
  logic [NC-1:0][ACC_W-1:0]   dots = '0;
  logic [NC-1:0][7:0]         nnz_c = '0;
  logic [7:0]                 nnz_s = 0;
  logic [8:0]                 threshold = 0;
  logic [KW-1:0]              best;

  int checks = 0, failures = 0;
  int n_conf = 0;

  cam_sort #(.N_CLASS(NC)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic trial(bit allneg);
    real cs [NC];
    real bestc, thr;
    int lat, ns;
    bit anyv;
    @(negedge clk);
    ns = 1 + $urandom % 60;
    nnz_s = 8'(ns);
    threshold = 9'(128 + $urandom % 129);
    thr = real'(threshold) / 256.0;
    bestc = -2.0; anyv = 0;
    for (int k = 0; k < NC; k++) begin
      int nc, d;
      nc = ($urandom % 5 == 0) ? 0 : 1 + $urandom % 60;
      d  = (nc == 0) ? 0 : int'($urandom % (2 * (nc < ns ? nc : ns) + 1)) - (nc < ns ? nc : ns);
      if (allneg && d > 0) d = -d;
      if (k == 3 && !allneg && nc != 0) d = (nc < ns ? nc : ns);   // a strong match
      nnz_c[k] = 8'(nc);
      dots[k]  = ACC_W'(d);
      cs[k] = (nc == 0) ? -3.0 : real'(d) / $sqrt(real'(nc) * real'(ns));
      if (nc != 0) anyv = 1;
      if (cs[k] > bestc) bestc = cs[k];
    end
    start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done && lat < 100) begin @(negedge clk); lat++; end
    checks++;
    if (lat != NC + 2) begin failures++; $display("latency %0d", lat); end
    checks++;
    if (best_valid != anyv) begin failures++; $display("best_valid"); end
    if (anyv) begin
      checks++;
      if (cs[best] < bestc - 1e-9) begin
        failures++; $display("best %0d cos %f, max %f", best, cs[best], bestc);
      end
      checks++;
      if (confident != (bestc > 0 && bestc >= thr - 1e-12)) begin
        failures++; $display("confident %0d cos %f thr %f", confident, bestc, thr);
      end
      if (confident) n_conf++;
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) trial(t % 7 == 0);
    checks++;
    if (n_conf == 0 || n_conf == 200) begin failures++; $display("no variety in confident"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
