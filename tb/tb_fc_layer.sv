// tb_fc_layer: loads stochastic weights for 3 neurons through the layer's write
// interface, runs the layer twice (the second time after a reset and without
// reloading: the nanowires are non-volatile), and checks the group sequence, each
// neuron's final accumulator and Btanh stream against a reference, plus the
// documented latencies (load LEN, run LEN, rewind LEN-1 cycles).
module tb_fc_layer;
  localparam int N_IN = 10, N_OUT = 3, LANES = 4, WLEN = 8;
  localparam int G = (N_IN + LANES - 1) / LANES, LEN = G * WLEN;
  localparam int unsigned AW = $clog2(LEN * LANES + 1), GW = $clog2(G);
  localparam int STATES = 2 * LANES;

  logic clk = 0, rst_n = 0;
  logic load_start = 0, wr_valid = 0, run_start = 0;
  logic [N_OUT-1:0][LANES-1:0] wr_bits = '0;
  logic [N_IN-1:0] x = '0;
  logic busy, running, rewinding, done;
  logic [GW-1:0] grp;
  logic [N_OUT-1:0][AW-1:0] acc;
  logic [N_OUT-1:0] y, sat;
  logic wbits [N_OUT][G * LANES][WLEN];
  int checks = 0, failures = 0;

  fc_layer #(.N_IN(N_IN), .N_OUT(N_OUT), .LANES(LANES), .WLEN(WLEN)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic run_once(input string tag);
    int eacc [N_OUT];
    int st [N_OUT];
    int cyc;
    foreach (eacc[n]) begin eacc[n] = 0; st[n] = STATES / 2; end
    run_start <= 1; @(posedge clk); run_start <= 0;
    for (int t = 0; t < LEN; t++) begin
      x <= N_IN'($urandom);
      #1;
      check(running, $sformatf("%s running at t=%0d", tag, t));
      check(int'(grp) == t / WLEN, $sformatf("%s grp at t=%0d is %0d", tag, t, grp));
      for (int n = 0; n < N_OUT; n++) begin
        int e;
        e = 0;
        for (int k = 0; k < LANES; k++) begin
          int i;
          logic xi;
          i = (t / WLEN) * LANES + k;
          xi = (i < N_IN) ? x[i] : 1'b0;
          if (xi == wbits[n][i][t % WLEN]) e++;
        end
        check(y[n] == (st[n] >= STATES / 2), $sformatf("%s y[%0d] t=%0d", tag, n, t));
        eacc[n] += e;
        st[n] = st[n] + 2 * e - LANES;
        if (st[n] > STATES - 1) st[n] = STATES - 1;
        if (st[n] < 0) st[n] = 0;
      end
      @(posedge clk);
    end
    #1;
    check(done && !running, $sformatf("%s done right after LEN run cycles", tag));
    for (int n = 0; n < N_OUT; n++)
      check(int'(acc[n]) == eacc[n], $sformatf("%s acc[%0d]=%0d exp %0d", tag, n, acc[n], eacc[n]));
    cyc = 0;
    while (busy) begin @(posedge clk); #1; cyc++; end
    check(cyc == LEN - 1, $sformatf("%s rewind took %0d", tag, cyc));
  endtask

  initial begin
    int cyc;
    foreach (wbits[n, i, j]) wbits[n][i][j] = (i < N_IN) ? 1'($urandom) : 1'(j % 2);
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    load_start <= 1; @(posedge clk); load_start <= 0;
    for (int p = 0; p < LEN; p++) begin
      for (int n = 0; n < N_OUT; n++)
        for (int k = 0; k < LANES; k++)
          wr_bits[n][k] <= wbits[n][(p / WLEN) * LANES + k][p % WLEN];
      wr_valid <= 1;
      // one idle cycle in the middle of the load: the write must wait for it
      if (p == LEN / 2) begin wr_valid <= 0; @(posedge clk); wr_valid <= 1; end
      @(posedge clk);
    end
    wr_valid <= 0;
    #1;
    check(rewinding, "rewind follows load");
    cyc = 0;
    while (busy) begin @(posedge clk); #1; cyc++; end
    check(cyc == LEN - 1, $sformatf("rewind after load took %0d", cyc));
    run_once("run1");
    rst_n <= 0; @(posedge clk); rst_n <= 1; @(posedge clk);
    run_once("run2");
    // back-to-back run without reset: accumulators must restart
    run_once("run3");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10 * LEN + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
