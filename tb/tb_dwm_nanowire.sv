// tb_dwm_nanowire: self-checking test of the domain-wall nanowire model.
// Writes a random pattern domain by domain while advancing, rewinds, reads it back
// forwards and backwards, then pulses reset and checks that the bits survived
// (non-volatility) while the port position returned to domain 0.
module tb_dwm_nanowire;
  localparam int unsigned LEN = 64;
  localparam int unsigned PW  = $clog2(LEN);

  logic clk = 0, rst_n = 0;
  logic shift_en = 0, shift_dir = 0, wr_en = 0, wr_bit = 0;
  logic rd_bit;
  logic [PW-1:0] pos;
  logic ref_bits [LEN];
  int checks = 0, failures = 0;

  dwm_nanowire #(.LEN(LEN)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    check(pos == 0, "position after reset");
    // write, advancing after each bit (no shift after the last one)
    for (int i = 0; i < LEN; i++) begin
      ref_bits[i] = 1'($urandom);
      wr_en <= 1; wr_bit <= ref_bits[i];
      shift_en <= (i != LEN - 1); shift_dir <= 0;
      @(posedge clk);
    end
    wr_en <= 0; shift_en <= 0;
    @(posedge clk);
    check(pos == PW'(LEN - 1), "position after writing");
    // read backwards while rewinding
    for (int i = LEN - 1; i >= 0; i--) begin
      #1;
      check(rd_bit == ref_bits[i], $sformatf("backward read %0d", i));
      check(pos == PW'(i), $sformatf("backward pos %0d", i));
      shift_en <= (i != 0); shift_dir <= 1;
      @(posedge clk);
    end
    shift_en <= 0;
    // reset: position tracker back at 0, data kept
    rst_n <= 0;
    @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < LEN; i++) begin
      #1;
      check(rd_bit == ref_bits[i], $sformatf("forward read after reset %0d", i));
      shift_en <= (i != LEN - 1); shift_dir <= 0;
      @(posedge clk);
    end
    shift_en <= 0;
    // overwrite one domain in the middle and check neighbours untouched
    for (int i = LEN - 1; i > LEN / 2; i--) begin
      shift_en <= 1; shift_dir <= 1; @(posedge clk);
    end
    shift_en <= 0; wr_en <= 1; wr_bit <= ~ref_bits[LEN/2];
    @(posedge clk);
    wr_en <= 0;
    ref_bits[LEN/2] = ~ref_bits[LEN/2];
    #1 check(rd_bit == ref_bits[LEN/2], "overwritten domain");
    shift_en <= 1; shift_dir <= 1; @(posedge clk); shift_en <= 0;
    #1 check(rd_bit == ref_bits[LEN/2-1], "neighbour below");
    shift_en <= 1; shift_dir <= 0; @(posedge clk);
    @(posedge clk); shift_en <= 0;
    #1 check(rd_bit == ref_bits[LEN/2+1], "neighbour above");
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
