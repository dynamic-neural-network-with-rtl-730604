// tb_act_pool: self-checking test of activation and pooling. Streams random
// signed sums (with negatives and values that saturate) through the unit
// with pooling off and on, including an odd-length stream that ends with a
// lone position, and compares every output with ReLU, shift, saturation and
// pairwise maximum computed here. Checks the one-cycle output latency and
// the number of outputs produced.
module tb_act_pool;
  import dnn_pkg::*;
  localparam int NCH = 6, ACT_W = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                      clear = 0, pool_en = 0, in_valid = 0, in_last = 0, out_valid;
  logic [4:0]                shift = 0;
  logic [NCH-1:0][ACC_W-1:0] in_vec = '0;
  logic [NCH-1:0][ACT_W-1:0] out_vec;

  int checks = 0, failures = 0;
  typedef logic [NCH-1:0][ACT_W-1:0] vec_t;
  vec_t exp_q [$];
  int nout = 0;

  act_pool #(.NCH(NCH), .ACT_W(ACT_W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int act(int s, int sh);
    int a;
    a = s >>> sh;
    if (a < 0) a = 0;
    if (a > 255) a = 255;
    return a;
  endfunction

  // compare the output produced by the input of the previous cycle
  task automatic check_out();
    checks++;
    if (out_valid != (exp_q.size() != 0)) begin
      failures++; $display("out_valid %0d, expected %0d", out_valid, exp_q.size());
    end
    if (out_valid && exp_q.size() != 0) begin
      vec_t e;
      nout++;
      e = exp_q.pop_front();
      for (int c = 0; c < NCH; c++) begin
        checks++;
        if (out_vec[c] != e[c]) begin
          failures++; $display("ch %0d got %0d exp %0d", c, out_vec[c], e[c]);
        end
      end
    end
  endtask

  task automatic stream(int n, bit pe, int sh);
    vec_t held;
    bit have;
    @(negedge clk);
    clear = 1; pool_en = pe; shift = 5'(sh);
    @(negedge clk);
    clear = 0;
    have = 0;
    for (int p = 0; p < n; p++) begin
      vec_t a;
      for (int c = 0; c < NCH; c++) begin
        int s;
        s = int'($urandom % 20000) - 6000;
        in_vec[c] = ACC_W'(s);
        a[c] = ACT_W'(act(s, sh));
      end
      in_valid = 1; in_last = (p == n - 1);
      if (!pe) exp_q.push_back(a);
      else if (!have) begin
        if (p == n - 1) exp_q.push_back(a);
        else begin held = a; have = 1; end
      end else begin
        for (int c = 0; c < NCH; c++) if (held[c] > a[c]) a[c] = held[c];
        exp_q.push_back(a);
        have = 0;
      end
      @(negedge clk);
      in_valid = 0;
      check_out();
      if ($urandom % 3 == 0) @(negedge clk);   // gaps in the stream
    end
  endtask

  initial begin
    int n_before;
    repeat (2) @(negedge clk);
    rst_n = 1;
    n_before = nout; stream(9, 0, 4); checks++; if (nout - n_before != 9) failures++;
    n_before = nout; stream(10, 1, 3); checks++; if (nout - n_before != 5) failures++;
    n_before = nout; stream(7, 1, 0); checks++; if (nout - n_before != 4) failures++;
    n_before = nout; stream(12, 1, 6); checks++; if (nout - n_before != 6) failures++;
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
