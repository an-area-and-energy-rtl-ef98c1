// tb_sc_inner_product: checks the XNOR/APC inner product cycle by cycle against a
// direct count of agreeing bits, and checks that over a long stream the bipolar
// estimate approaches the real inner product of the encoded values.
module tb_sc_inner_product;
  localparam int unsigned N = 25;
  localparam int unsigned T = 4096;
  logic [N-1:0] x, w;
  logic [$clog2(N+1)-1:0] count;
  int checks = 0, failures = 0;
  real px [N], pw [N];
  longint sum;

  sc_inner_product #(.N(N)) dut (.*);

  initial begin
    real exact, est;
    for (int i = 0; i < N; i++) begin
      px[i] = real'($urandom_range(0, 1000)) / 1000.0;
      pw[i] = real'($urandom_range(0, 1000)) / 1000.0;
    end
    sum = 0;
    for (int t = 0; t < T; t++) begin
      int e;
      for (int i = 0; i < N; i++) begin
        x[i] = (real'($urandom_range(0, 999999)) / 1.0e6) < px[i];
        w[i] = (real'($urandom_range(0, 999999)) / 1.0e6) < pw[i];
      end
      #1;
      e = 0;
      for (int i = 0; i < N; i++) if (x[i] == w[i]) e++;
      checks++;
      if (int'(count) != e) begin
        failures++;
        $display("FAIL: t=%0d count=%0d exp=%0d", t, count, e);
      end
      sum += count;
    end
    exact = 0.0;
    for (int i = 0; i < N; i++) exact += (2.0 * px[i] - 1.0) * (2.0 * pw[i] - 1.0);
    est = (2.0 * real'(sum) - real'(N) * T) / T;
    checks++;
    if (est < exact - 0.5 || est > exact + 0.5) begin
      failures++;
      $display("FAIL: estimate %f exact %f", est, exact);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
