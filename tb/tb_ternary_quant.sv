// tb_ternary_quant: self-checking test of ternary quantisation. Applies
// random vectors, vectors with all entries equal, a vector with a single
// entry and n below N (the tail must be 0), and compares every trit and the
// non-zero count with the thirds rule computed here. done must follow start
// by one cycle.
module tb_ternary_quant;
  import dnn_pkg::*;
  localparam int N = 12, W = 8, NW = $clog2(N + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                start = 0, done;
  logic [NW-1:0]       n = 0, nnz;
  logic [N-1:0][W-1:0] vec = '0;
  trit_e               trits [N];

  int checks = 0, failures = 0;

  ternary_quant #(.N(N), .W(W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int nn);
    int mn, mx, l, h, cnt;
    mn = 1 << 30; mx = -1; cnt = 0;
    for (int i = 0; i < nn; i++) begin
      if (int'(vec[i]) < mn) mn = vec[i];
      if (int'(vec[i]) > mx) mx = vec[i];
    end
    l = mn + (mx - mn) / 3;
    h = mx - (mx - mn) / 3;
    @(negedge clk);
    n = NW'(nn); start = 1;
    @(negedge clk);
    start = 0;
    checks++;
    if (!done) begin failures++; $display("done not after 1 cycle"); end
    for (int i = 0; i < N; i++) begin
      int e;
      e = 0;
      if (i < nn) e = (int'(vec[i]) < l) ? -1 : (int'(vec[i]) > h) ? 1 : 0;
      if (e != 0) cnt++;
      checks++;
      if (int'(trit_val(trits[i])) != e) begin
        failures++; $display("i %0d v %0d got %0d exp %0d", i, vec[i], trit_val(trits[i]), e);
      end
    end
    checks++;
    if (int'(nnz) != cnt) begin failures++; $display("nnz %0d exp %0d", nnz, cnt); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      for (int i = 0; i < N; i++) vec[i] = W'($urandom);
      check(N);
    end
    for (int i = 0; i < N; i++) vec[i] = W'(i * 20);   // evenly spread
    check(N);
    for (int i = 0; i < N; i++) vec[i] = 8'd77;        // all equal
    check(N);
    for (int i = 0; i < N; i++) vec[i] = W'($urandom);
    check(1);
    check(5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
