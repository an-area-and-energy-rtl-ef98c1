// tb_fc_group_mux: checks that group g puts inputs g*LANES..g*LANES+LANES-1 on the
// lanes and that lanes beyond the last input read 0.
module tb_fc_group_mux;
  localparam int unsigned N_IN = 60, LANES = 25, G = 3;
  logic [N_IN-1:0] x;
  logic [1:0] grp;
  logic [LANES-1:0] y;
  int checks = 0, failures = 0;

  fc_group_mux #(.N_IN(N_IN), .LANES(LANES)) dut (.*);

  initial begin
    for (int r = 0; r < 50; r++) begin
      x = N_IN'({$urandom, $urandom});
      for (int g = 0; g < G; g++) begin
        grp = 2'(g);
        #1;
        for (int k = 0; k < LANES; k++) begin
          logic e;
          e = (g * LANES + k < N_IN) ? x[g * LANES + k] : 1'b0;
          checks++;
          if (y[k] !== e) begin
            failures++;
            $display("FAIL: g=%0d k=%0d", g, k);
          end
        end
      end
    end
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
