// tb_fc_shared_neuron: drives the neuron's control pins directly. Writes stochastic
// weights into the LANES nanowires in the interleaved layout (wire k: w_k,
// w_{LANES+k}, ...), rewinds, then streams input groups and checks each cycle's APC
// count, the final accumulator and the Btanh output against a reference model.
module tb_fc_shared_neuron;
  localparam int N_IN = 10, LANES = 4, WLEN = 8, STATES = 2 * LANES;
  localparam int G = (N_IN + LANES - 1) / LANES, LEN = G * WLEN;
  localparam int unsigned CW = $clog2(LANES + 1), AW = $clog2(LEN * LANES + 1);

  logic clk = 0, rst_n = 0;
  logic shift_en = 0, shift_dir = 0, wr_en = 0, rd_en = 0, acc_clr = 0;
  logic [LANES-1:0] wr_bits = '0, x_sel = '0;
  logic [CW-1:0] count;
  logic [AW-1:0] acc;
  logic y, sat;
  logic wbits [N_IN + LANES][WLEN];   // weight i, bit j (padding weights included)
  int checks = 0, failures = 0;

  fc_shared_neuron #(.N_IN(N_IN), .LANES(LANES), .WLEN(WLEN), .STATES(STATES)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    int eacc, st;
    foreach (wbits[i, j]) wbits[i][j] = (i < N_IN) ? 1'($urandom) : 1'(j % 2);
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int p = 0; p < LEN; p++) begin
      for (int k = 0; k < LANES; k++) wr_bits[k] <= wbits[(p / WLEN) * LANES + k][p % WLEN];
      wr_en <= 1; shift_en <= (p != LEN - 1); shift_dir <= 0;
      @(posedge clk);
    end
    wr_en <= 0;
    for (int p = LEN - 1; p > 0; p--) begin
      shift_en <= 1; shift_dir <= 1; @(posedge clk);
    end
    shift_en <= 0;
    acc_clr <= 1; @(posedge clk); acc_clr <= 0;
    eacc = 0; st = STATES / 2;
    for (int t = 0; t < LEN; t++) begin
      int g, e;
      g = t / WLEN;
      for (int k = 0; k < LANES; k++) x_sel[k] <= (g * LANES + k < N_IN) ? 1'($urandom) : 1'b0;
      rd_en <= 1; shift_en <= (t != LEN - 1); shift_dir <= 0;
      #1;
      e = 0;
      for (int k = 0; k < LANES; k++) if (x_sel[k] == wbits[g * LANES + k][t % WLEN]) e++;
      check(int'(count) == e, $sformatf("count t=%0d got %0d exp %0d", t, count, e));
      check(y == (st >= STATES / 2), $sformatf("btanh t=%0d", t));
      check(int'(acc) == eacc, $sformatf("acc t=%0d dut=%0d exp=%0d st=%0d", t, acc, eacc, st));
      @(posedge clk);
      eacc += e;
      st = st + 2 * e - LANES;
      if (st > STATES - 1) st = STATES - 1;
      if (st < 0) st = 0;
    end
    rd_en <= 0; shift_en <= 0;
    @(posedge clk);
    check(int'(acc) == eacc, $sformatf("final acc %0d exp %0d", acc, eacc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10 * LEN + 50) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
