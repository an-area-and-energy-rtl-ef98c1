// tb_btanh: checks the Btanh counter against a reference saturating counter, and
// checks its transfer: strongly positive input -> output nearly all 1s and the
// upper saturation reached; strongly negative -> nearly all 0s; zero -> about half.
module tb_btanh;
  localparam int N = 25;
  localparam int STATES = 2 * N;
  logic clk = 0, rst_n = 0, start = 0, en = 0;
  logic [$clog2(N+1)-1:0] q;
  logic y, sat_hi, sat_lo;
  int checks = 0, failures = 0;
  int st;
  int hi_seen, lo_seen;

  btanh #(.N(N), .STATES(STATES)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // run T cycles with q drawn around mean m; return fraction of ones
  task automatic phase(input int m, input int T, output real frac);
    int ones;
    ones = 0;
    start <= 1; @(posedge clk); start <= 0; st = STATES / 2;
    en <= 1;
    for (int t = 0; t < T; t++) begin
      int v;
      v = m + (t % 2) + int'($urandom_range(0, 4)) - 2;
      if (v < 0) v = 0;
      if (v > N) v = N;
      q <= v[$clog2(N+1)-1:0];
      #1;
      check(y == (st >= STATES / 2), $sformatf("y at t=%0d st=%0d dut=%0d v=%0d", t, st, dut.state, v));
      check(sat_hi == (st == STATES - 1) && sat_lo == (st == 0), "saturation flags");
      if (sat_hi) hi_seen++;
      if (sat_lo) lo_seen++;
      ones += int'(y);
      @(posedge clk);
      st = st + 2 * v - N;
      if (st > STATES - 1) st = STATES - 1;
      if (st < 0) st = 0;
    end
    en <= 0;
    frac = real'(ones) / T;
  endtask

  initial begin
    real f;
    hi_seen = 0; lo_seen = 0;
    q = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    phase(20, 1000, f);
    check(f > 0.95, $sformatf("positive input gives %f", f));
    phase(5, 1000, f);
    check(f < 0.05, $sformatf("negative input gives %f", f));
    phase(12, 4000, f);
    check(f > 0.2 && f < 0.8, $sformatf("near-zero input gives %f", f));
    check(hi_seen > 0 && lo_seen > 0, "both saturations reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
