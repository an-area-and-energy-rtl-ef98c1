// tb_sc_max_pool: checks the segment-based max pooling against a reference model:
// first segment uses the random choice, every later segment uses the input whose
// sum was largest over the previous segment (lowest index on ties), and the output
// is that input's value in the same cycle. Input means change halfway so the
// selection has to move.
module tb_sc_max_pool;
  localparam int unsigned N = 4, DW = 5, SEG = 8;
  logic clk = 0, rst_n = 0, start = 0, en = 0;
  logic [1:0] rnd_sel;
  logic [N-1:0][DW-1:0] in;
  logic [DW-1:0] out;
  logic [1:0] sel;
  logic seg_end, sel_change;
  int checks = 0, failures = 0;
  int sums [N];
  int rsel, pos, switches;
  int mean [N];

  sc_max_pool #(.N(N), .DW(DW), .SEG(SEG)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    switches = 0;
    in = '0;
    rnd_sel = 2'd2;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    start <= 1; @(posedge clk); start <= 0;
    rsel = 2; pos = 0; foreach (sums[i]) sums[i] = 0;
    mean[0] = 5; mean[1] = 20; mean[2] = 10; mean[3] = 12;
    en <= 1;
    for (int t = 0; t < 40 * SEG; t++) begin
      if (t == 20 * SEG) begin mean[0] = 25; mean[1] = 3; end
      for (int i = 0; i < N; i++) in[i] <= DW'(mean[i] + $urandom_range(0, 4) - 2);
      #1;
      check(int'(sel) == rsel, $sformatf("sel t=%0d dut=%0d ref=%0d", t, sel, rsel));
      check(out == in[rsel], $sformatf("out t=%0d", t));
      check(seg_end == (pos == SEG - 1), "seg_end");
      for (int i = 0; i < N; i++) sums[i] += int'(in[i]);
      @(posedge clk);
      if (pos == SEG - 1) begin
        int b;
        b = 0;
        for (int i = 1; i < N; i++) if (sums[i] > sums[b]) b = i;
        if (b != rsel) switches++;
        rsel = b; pos = 0;
        foreach (sums[i]) sums[i] = 0;
      end else pos++;
    end
    check(rsel == 0, "final selection follows the largest input");
    check(switches >= 2, "selection moved at least twice");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
