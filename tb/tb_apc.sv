// tb_apc: compares the parallel counter with a bit-by-bit count on random and
// corner-case vectors (25 inputs, as in the shared fully-connected APC).
module tb_apc;
  localparam int unsigned N = 25;
  logic [N-1:0] in;
  logic [$clog2(N+1)-1:0] count;
  int checks = 0, failures = 0;

  apc #(.N(N)) dut (.*);

  task automatic try(input logic [N-1:0] v);
    int e;
    in = v;
    #1;
    e = 0;
    for (int i = 0; i < N; i++) if (v[i]) e++;
    checks++;
    if (int'(count) != e) begin
      failures++;
      $display("FAIL: in=%h count=%0d exp=%0d", v, count, e);
    end
  endtask

  initial begin
    try('0);
    try('1);
    for (int i = 0; i < N; i++) try(N'(1) << i);
    for (int i = 0; i < 2000; i++) try(N'({$urandom, $urandom}));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
