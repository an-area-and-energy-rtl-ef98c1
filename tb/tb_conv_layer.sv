// tb_conv_layer: loads two 2-channel 3x3 filters into the shared weight nanowire,
// streams random input bits, and checks every output count of every feature map
// each cycle against an independent model of the SNGs (LFSR + comparator) and of
// the sliding-window XNOR/count. Also checks that all pixels of one map use the
// same weight streams (weight sharing) by construction of the model.
module tb_conv_layer;
  import dwcnn_pkg::seed_for;
  localparam int unsigned IN_CH = 2, IH = 6, IW = 6, K = 3, NF = 2, WB = 7;
  localparam int unsigned M = IN_CH * K * K, OH = IH - K + 1, OW = IW - K + 1;
  localparam int unsigned CW = $clog2(M + 1);
  localparam int unsigned T = 300;

  logic clk = 0, rst_n = 0;
  logic load_start = 0, wr_valid = 0, wr_bit = 0, fetch_start = 0;
  logic busy, ready, rewinding, en = 0;
  logic [IN_CH*IH*IW-1:0] x;
  logic [NF-1:0][OH-1:0][OW-1:0][CW-1:0] count;
  logic [WB-1:0] codes [NF][M];
  logic [15:0] lf [NF];
  int checks = 0, failures = 0;

  conv_layer #(.IN_CH(IN_CH), .IH(IH), .IW(IW), .K(K), .NF(NF), .WB(WB)) dut (.*);

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
    d = {s, s} << ((5 * i) % 16);
    return d[16 +: WB];
  endfunction

  initial begin
    foreach (codes[f, i]) codes[f][i] = WB'($urandom);
    x = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    load_start <= 1; @(posedge clk); load_start <= 0;
    for (int f = 0; f < NF; f++)
      for (int i = 0; i < M; i++)
        for (int b = 0; b < WB; b++) begin
          wr_valid <= 1; wr_bit <= codes[f][i][b]; @(posedge clk);
        end
    wr_valid <= 0;
    while (!ready) @(posedge clk);
    for (int f = 0; f < NF; f++) lf[f] = seed_for(f);
    en <= 1;
    for (int t = 0; t < T; t++) begin
      x <= {IN_CH*IH*IW/32+1{$urandom}};
      #1;
      for (int f = 0; f < NF; f++) begin
        logic [M-1:0] w;
        for (int i = 0; i < M; i++) w[i] = (rnd(lf[f], i) < codes[f][i]);
        for (int oy = 0; oy < OH; oy++)
          for (int ox = 0; ox < OW; ox++) begin
            int e;
            e = 0;
            for (int ch = 0; ch < IN_CH; ch++)
              for (int ky = 0; ky < K; ky++)
                for (int kx = 0; kx < K; kx++)
                  if (x[(ch*IH + oy + ky)*IW + ox + kx] == w[(ch*K + ky)*K + kx]) e++;
            checks++;
            if (int'(count[f][oy][ox]) != e) begin
              failures++;
              if (failures < 10) $display("FAIL: t=%0d f=%0d (%0d,%0d) got %0d exp %0d",
                                          t, f, oy, ox, count[f][oy][ox], e);
            end
          end
      end
      @(posedge clk);
      for (int f = 0; f < NF; f++) lf[f] = step(lf[f]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * NF * M * WB + T + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
