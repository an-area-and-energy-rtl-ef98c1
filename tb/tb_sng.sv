// tb_sng: checks the stochastic number generator bit by bit against an independent
// LFSR/comparator model, and checks that each stream's density approaches code/128.
module tb_sng;
  localparam int unsigned M  = 6;
  localparam int unsigned WB = 7;
  localparam logic [15:0] SEED = 16'h5A3C;

  logic clk = 0, rst_n = 0, en = 0;
  logic [M-1:0][WB-1:0] code;
  logic [M-1:0] bits;
  int checks = 0, failures = 0;
  int ones [M];
  logic [15:0] model;

  sng #(.M(M), .WB(WB), .SEED(SEED)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [15:0] step(input logic [15:0] s);
    logic fb;
    fb = s[0];
    s = {1'b0, s[15:1]};
    if (fb) s = s ^ 16'b1011_0100_0000_0000;
    return s;
  endfunction

  function automatic logic [WB-1:0] rnd(input logic [15:0] s, input int i);
    logic [31:0] d;
    int r;
    r = (5 * i) % 16;
    d = {s, s} << r;
    return d[16 +: WB];
  endfunction

  localparam int unsigned NCYC = 8192;

  initial begin
    code[0] = 7'd0; code[1] = 7'd127; code[2] = 7'd64;
    code[3] = 7'd32; code[4] = 7'd100; code[5] = 7'd7;
    foreach (ones[i]) ones[i] = 0;
    model = SEED;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    en <= 1;
    for (int t = 0; t < NCYC; t++) begin
      #1;
      for (int i = 0; i < M; i++) begin
        logic expb;
        expb = (rnd(model, i) < code[i]);
        checks++;
        if (bits[i] !== expb) begin
          failures++;
          if (failures < 10) $display("FAIL: t=%0d i=%0d bit=%b exp=%b", t, i, bits[i], expb);
        end
        ones[i] += int'(bits[i]);
      end
      @(posedge clk);
      model = step(model);
    end
    for (int i = 0; i < M; i++) begin
      real p, e;
      p = real'(ones[i]) / NCYC;
      e = real'(code[i]) / 128.0;
      checks++;
      if (p < e - 0.03 || p > e + 0.03) begin
        failures++;
        $display("FAIL: density %0d = %f expected %f", i, p, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCYC + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
