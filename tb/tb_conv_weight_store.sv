// tb_conv_weight_store: loads random 7-bit filter weights serially into the
// nanowire, checks the weight registers and the documented cycle count of
// load + rewind + fetch + rewind (4*LEN-2), then resets the chip (weights stay in
// the non-volatile wire, registers are cleared) and checks that fetch alone
// (2*LEN-1 cycles) restores them.
module tb_conv_weight_store;
  localparam int unsigned NF = 3, M = 4, WB = 7;
  localparam int unsigned LEN = NF * M * WB;
  logic clk = 0, rst_n = 0;
  logic load_start = 0, wr_valid = 0, wr_bit = 0, fetch_start = 0;
  logic busy, ready, rewinding;
  logic [NF-1:0][M-1:0][WB-1:0] weights;
  logic [WB-1:0] codes [NF][M];
  int checks = 0, failures = 0;
  int cyc;

  conv_weight_store #(.NF(NF), .M(M), .WB(WB)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare_all(input string when);
    for (int f = 0; f < NF; f++)
      for (int i = 0; i < M; i++)
        check(weights[f][i] == codes[f][i],
              $sformatf("%s f=%0d i=%0d got %0d exp %0d", when, f, i, weights[f][i], codes[f][i]));
  endtask

  initial begin
    int rw;
    foreach (codes[f, i]) codes[f][i] = WB'($urandom);
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    check(!ready && !busy, "idle after reset");
    load_start <= 1; @(posedge clk); load_start <= 0;
    cyc = 0; rw = 0;
    for (int f = 0; f < NF; f++)
      for (int i = 0; i < M; i++)
        for (int b = 0; b < WB; b++) begin
          wr_valid <= 1; wr_bit <= codes[f][i][b];
          @(posedge clk); cyc++;
        end
    wr_valid <= 0;
    while (!ready) begin @(posedge clk); #1; cyc++; if (rewinding) rw++; end
    check(cyc == 4 * LEN - 2, $sformatf("load+fetch took %0d cycles, expected %0d", cyc, 4 * LEN - 2));
    check(rw > 0, "rewind observed");
    compare_all("after load");
    // power cycle: registers cleared, wire keeps its bits
    rst_n <= 0; @(posedge clk); rst_n <= 1; @(posedge clk);
    check(weights == '0 && !ready, "registers cleared by reset");
    fetch_start <= 1; @(posedge clk); fetch_start <= 0;
    cyc = 0;
    while (!ready) begin @(posedge clk); #1; cyc++; end
    check(cyc == 2 * LEN - 1, $sformatf("fetch took %0d cycles, expected %0d", cyc, 2 * LEN - 1));
    compare_all("after fetch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * LEN) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
