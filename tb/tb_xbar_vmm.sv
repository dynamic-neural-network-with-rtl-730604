// tb_xbar_vmm: self-checking test of the ternary VMM engine. Programs a
// random ternary matrix (every trit of the region, so re-programming of
// cells is exercised), then runs unsigned and two-pass signed products with
// 1 to 3 groups of 64 rows at several row/column offsets. Each output is
// compared with the exact integer dot product computed here; outputs past
// n_out must be zero; the operation latency must be
// passes * groups * (CONV_CYCLES + 3) + 2 cycles and groups_run must equal
// passes * groups.
module tb_xbar_vmm;
  import dnn_pkg::*;
  localparam int ROWS = 200, COLS = 20, NOUT = 10, MAX_IN = 150, IN_W = 8, CC = 3;
  localparam int RW = $clog2(ROWS), CW = $clog2(COLS / 2);
  localparam int NW = $clog2(MAX_IN + 1), OW = $clog2(NOUT + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                       prog_en = 0, prog_ready, start = 0, signed_mode = 0, busy, done;
  logic [RW-1:0]              prog_row = 0, row_base = 0;
  logic [CW-1:0]              prog_col = 0, col_base = 0;
  trit_e                      prog_trit = TRIT_ZERO;
  logic [NW-1:0]              n_in = 0;
  logic [OW-1:0]              n_out = 0;
  logic [MAX_IN-1:0][IN_W:0]  in_vec = '0;
  logic [NOUT-1:0][ACC_W-1:0] out_vec;
  logic [15:0]                groups_run;

  int checks = 0, failures = 0;
  int w [ROWS][COLS/2];

  xbar_vmm #(.ROWS(ROWS), .COLS(COLS), .NOUT(NOUT), .MAX_IN(MAX_IN), .IN_W(IN_W),
             .CONV_CYCLES(CC)) dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic prog(int r, int c, int v);
    @(negedge clk);
    while (!prog_ready) @(negedge clk);
    prog_en = 1; prog_row = RW'(r); prog_col = CW'(c);
    prog_trit = (v > 0) ? TRIT_POS : (v < 0) ? TRIT_NEG : TRIT_ZERO;
    @(negedge clk);
    prog_en = 0;
    w[r][c] = v;
  endtask

  task automatic run(int nin, int nout, int rb, int cb, bit sgn);
    int v [MAX_IN];
    int lat, groups, passes;
    @(negedge clk);
    for (int i = 0; i < MAX_IN; i++) begin
      v[i] = sgn ? (int'($urandom % 511) - 255) : int'($urandom % 256);
      in_vec[i] = (IN_W + 1)'(v[i]);
    end
    n_in = NW'(nin); n_out = OW'(nout); row_base = RW'(rb); col_base = CW'(cb);
    signed_mode = sgn; start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done && lat < 5000) begin @(negedge clk); lat++; end
    groups = (nin + 63) / 64; if (groups == 0) groups = 1;
    passes = sgn ? 2 : 1;
    checks++;
    if (lat != passes * groups * (CC + 3) + 2) begin
      failures++; $display("latency %0d exp %0d", lat, passes * groups * (CC + 3) + 2);
    end
    checks++;
    if (int'(groups_run) != passes * groups) begin failures++; $display("groups_run %0d", groups_run); end
    for (int j = 0; j < NOUT; j++) begin
      int e;
      e = 0;
      if (j < nout)
        for (int i = 0; i < nin; i++) e += v[i] * w[rb + i][cb + j];
      checks++;
      if ($signed(out_vec[j]) != e) begin
        failures++;
        $display("nin %0d sgn %0d out %0d: got %0d exp %0d", nin, sgn, j, $signed(out_vec[j]), e);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS / 2; c++) prog(r, c, int'($urandom % 3) - 1);
    // re-program part of the matrix
    for (int i = 0; i < 200; i++) prog($urandom % ROWS, $urandom % (COLS / 2), int'($urandom % 3) - 1);
    run(10, 10, 0, 0, 0);
    run(64, 8, 0, 0, 0);
    run(65, 5, 3, 2, 0);
    run(150, 10, 40, 0, 0);
    run(20, 4, 7, 4, 1);
    run(130, 8, 60, 0, 1);
    for (int t = 0; t < 6; t++) run(1 + $urandom % 150, 1 + $urandom % 10, $urandom % 50, 0, t[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
