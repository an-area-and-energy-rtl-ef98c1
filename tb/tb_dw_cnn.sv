// tb_dw_cnn: end-to-end test of the whole datapath at a reduced size (12x12 input
// streams, 2 filters of 5x5, 2x2 pooling, 32 -> 3 shared FC layer with 25 lanes, so
// two groups of which the second is padded, 32-bit stochastic FC weights). The same
// checks run at the default size in tb_dw_cnn_full.
//
// Sequence: reset; load the conv filter nanowire and the FC nanowires at the same
// time; check the fetched filter codes; run one inference on a synthetic image;
// then reset again (a power cycle), restore the conv weights with a fetch only,
// and run a second image without reloading the FC weights (non-volatile storage).
// During the runs it checks, against models written here:
//   - sampled conv inner-product counts (from the probed weight streams and x),
//   - pool window (0,0,0): selection and output, and its Btanh activation stream,
//   - every FC neuron's accumulator, recomputed from the FC input streams and the
//     weight bits this bench wrote, and the run latency.
// It counts each mechanism (weight load, fetch-only restore, nanowire rewind,
// pool selection switch, activation saturation, FC group switch, padded last FC
// group, second run on retained weights) and fails any that never happened.
module tb_dw_cnn;
  import dwcnn_pkg::*;
  localparam int IMG = 12, K = 5, NF = 2, M = K * K, OH = IMG - K + 1, PH = OH / 2;
  localparam int N_FC = NF * PH * PH;          // 2880
  localparam int LANES = 25, WLEN = 32, NOUT = 3;
  localparam int G = (N_FC + LANES - 1) / LANES; // 116
  localparam int LEN = G * WLEN;
  localparam int CONV_LEN = NF * M * W_PREC;
  localparam int AW = $clog2(LEN * LANES + 1);
  localparam int GW = $clog2(G);
  localparam int CW = $clog2(M + 1);
  localparam int SEG = 16, BT_STATES = 2 * M;

  logic clk = 0, rst_n = 0;
  logic conv_load_start = 0, conv_wr_valid = 0, conv_wr_bit = 0, conv_fetch_start = 0;
  logic conv_busy, conv_ready;
  logic fc_load_start = 0, fc_wr_valid = 0;
  logic [NOUT-1:0][LANES-1:0] fc_wr_bits = '0;
  logic fc_busy;
  logic run_start = 0;
  logic [IMG*IMG-1:0] x = '0;
  logic running, done;
  logic [GW-1:0] fc_grp;
  logic [NOUT-1:0][AW-1:0] fc_acc;
  logic [NOUT-1:0] fc_y;
  logic ev_pool_switch, ev_act_sat;

  dw_cnn #(.IMG(IMG), .K(K), .NF(NF), .FC_OUT(NOUT), .FC_WLEN(WLEN)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [W_PREC-1:0] codes [NF][M];
  int pix [IMG*IMG];
  int n_load = 0, n_fetch_only = 0, n_rewind = 0, n_pool_switch = 0, n_act_sat = 0;
  int n_grp_switch = 0, n_pad_group = 0, n_retained_run = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic int unsigned hash3(input int unsigned a, b, c);
    int unsigned h;
    h = a * 32'h9E3779B1 ^ (b + 32'h7F4A7C15) * 32'h85EBCA6B ^ (c + 1) * 32'hC2B2AE35;
    h ^= h >> 15; h *= 32'h2C1B3C6D; h ^= h >> 12;
    return h;
  endfunction

  // Stochastic FC weight: weight (n,i) has density code/128, bit j drawn by hash.
  // Padding weights (i >= N_FC) are a bipolar zero: alternating bits.
  function automatic logic fcw(input int n, i, j);
    int unsigned c;
    if (i >= N_FC) return 1'(j % 2);
    c = hash3(n, i, 4096) % 128;
    return (hash3(n, i, j) % 128) < c;
  endfunction

  always @(posedge clk) begin
    if (dut.conv_rewinding || dut.fc_rewinding) n_rewind++;
  end

  task automatic make_image(input int seed);
    for (int r = 0; r < IMG; r++)
      for (int c = 0; c < IMG; c++) begin
        int d;
        d = (r - IMG / 2) * (r - IMG / 2) + (c - IMG / 2 - seed) * (c - IMG / 2 - seed);
        pix[r * IMG + c] = (d < IMG + 10 * seed) ? 230 : 20;
      end
  endtask

  task automatic run_image(input string tag);
    int eacc [NOUT];
    int ps [4];
    int psel, ppos, bst, cyc;
    logic [GW-1:0] last_grp;
    for (int n = 0; n < NOUT; n++) eacc[n] = 0;
    run_start <= 1;
    @(posedge clk);
    run_start <= 0;
    #1;
    check(running, {tag, ": run accepted"});
    psel = int'(dut.g_map[0].g_py[0].g_px[0].u_pool.sel);
    ppos = 0; bst = BT_STATES / 2;
    foreach (ps[i]) ps[i] = 0;
    last_grp = '0;
    cyc = 0;
    while (!done) begin
      logic [IMG*IMG-1:0] xv;
      for (int p = 0; p < IMG * IMG; p++) xv[p] = int'($urandom_range(0, 255)) < pix[p];
      x <= xv;
      #2;
      // FC reference from the probed FC inputs
      for (int n = 0; n < NOUT; n++)
        for (int k = 0; k < LANES; k++) begin
          int i;
          logic xi;
          i = int'(fc_grp) * LANES + k;
          xi = (i < N_FC) ? dut.act[i] : 1'b0;
          if (xi == fcw(n, i, cyc % WLEN)) eacc[n]++;
        end
      if (fc_grp != last_grp) n_grp_switch++;
      if (int'(fc_grp) == G - 1) n_pad_group++;
      last_grp = fc_grp;
      // sampled conv inner products
      for (int s = 0; s < 3; s++) begin
        int f, oy, ox, e;
        f = $urandom_range(0, NF - 1); oy = $urandom_range(0, OH - 1); ox = $urandom_range(0, OH - 1);
        e = 0;
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++)
            if (xv[(oy + ky) * IMG + ox + kx] == dut.u_conv.wstream[f][ky * K + kx]) e++;
        check(int'(dut.conv_count[f][oy][ox]) == e, $sformatf("%s: conv count f=%0d (%0d,%0d)", tag, f, oy, ox));
      end
      // pool window 0 of map 0 and its activation
      begin
        int v [4];
        v[0] = int'(dut.conv_count[0][0][0]); v[1] = int'(dut.conv_count[0][0][1]);
        v[2] = int'(dut.conv_count[0][1][0]); v[3] = int'(dut.conv_count[0][1][1]);
        check(int'(dut.g_map[0].g_py[0].g_px[0].pooled) == v[psel], {tag, ": pool output"});
        check(dut.act[0] == (bst >= BT_STATES / 2), {tag, ": activation stream"});
        if (ev_pool_switch) n_pool_switch++;
        if (ev_act_sat) n_act_sat++;
        @(posedge clk);
        cyc++;
        bst = bst + 2 * v[psel] - M;
        if (bst > BT_STATES - 1) bst = BT_STATES - 1;
        if (bst < 0) bst = 0;
        for (int i = 0; i < 4; i++) ps[i] += v[i];
        if (ppos == SEG - 1) begin
          int b;
          b = 0;
          for (int i = 1; i < 4; i++) if (ps[i] > ps[b]) b = i;
          psel = b; ppos = 0;
          foreach (ps[i]) ps[i] = 0;
        end else ppos++;
      end
      #1;
    end
    check(cyc == LEN, $sformatf("%s: run took %0d cycles, expected %0d", tag, cyc, LEN));
    for (int n = 0; n < NOUT; n++)
      check(int'(fc_acc[n]) == eacc[n], $sformatf("%s: fc_acc[%0d]=%0d expected %0d", tag, n, fc_acc[n], eacc[n]));
    begin
      int best;
      best = 0;
      for (int n = 1; n < NOUT; n++) if (fc_acc[n] > fc_acc[best]) best = n;
      $display("%s: class scores (bipolar x WLEN):", tag);
      for (int n = 0; n < NOUT; n++)
        $display("  neuron %0d: %0d", n, 2 * int'(fc_acc[n]) - LANES * LEN);
      $display("%s: winning neuron %0d", tag, best);
    end
    while (fc_busy) @(posedge clk);
  endtask

  initial begin
    foreach (codes[f, i]) codes[f][i] = W_PREC'($urandom);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // 1. load both weight stores at once
    conv_load_start <= 1; fc_load_start <= 1;
    @(posedge clk);
    conv_load_start <= 0; fc_load_start <= 0;
    for (int p = 0; p < ((LEN > CONV_LEN) ? LEN : CONV_LEN); p++) begin
      if (p < CONV_LEN) begin
        int f, i, b;
        f = p / (M * W_PREC); i = (p / W_PREC) % M; b = p % W_PREC;
        conv_wr_valid <= 1; conv_wr_bit <= codes[f][i][b];
      end else conv_wr_valid <= 0;
      begin
        // whole vector built first, then one nonblocking write
        logic [NOUT-1:0][LANES-1:0] wv;
        for (int n = 0; n < NOUT; n++)
          for (int k = 0; k < LANES; k++)
            wv[n][k] = fcw(n, (p / WLEN) * LANES + k, p % WLEN);
        fc_wr_bits <= wv;
      end
      fc_wr_valid <= (p < LEN);
      @(posedge clk);
    end
    conv_wr_valid <= 0; fc_wr_valid <= 0;
    while (!conv_ready || fc_busy) @(posedge clk);
    n_load++;
    #1;
    for (int f = 0; f < NF; f++) begin
      bit ok;
      ok = 1;
      for (int i = 0; i < M; i++) if (dut.u_conv.u_store.weights[f][i] != codes[f][i]) ok = 0;
      check(ok, $sformatf("filter %0d codes after load", f));
    end
    // 2. first image
    make_image(0);
    run_image("image A");
    // 3. power cycle: conv weights restored by fetch only, FC weights kept
    rst_n <= 0; @(posedge clk); rst_n <= 1; @(posedge clk);
    #1 check(!conv_ready, "conv weights not ready after reset");
    conv_fetch_start <= 1; @(posedge clk); conv_fetch_start <= 0;
    while (!conv_ready) @(posedge clk);
    n_fetch_only++;
    #1;
    for (int f = 0; f < NF; f++) begin
      bit ok;
      ok = 1;
      for (int i = 0; i < M; i++) if (dut.u_conv.u_store.weights[f][i] != codes[f][i]) ok = 0;
      check(ok, $sformatf("filter %0d codes after fetch", f));
    end
    make_image(2);
    run_image("image B");
    n_retained_run++;
    // mechanisms
    $display("mechanisms: load=%0d fetch_only=%0d rewind_cycles=%0d pool_switch=%0d act_sat=%0d grp_switch=%0d pad_group_cycles=%0d retained_run=%0d",
             n_load, n_fetch_only, n_rewind, n_pool_switch, n_act_sat, n_grp_switch, n_pad_group, n_retained_run);
    check(n_load > 0, "weight load happened");
    check(n_fetch_only > 0, "fetch-only restore happened");
    check(n_rewind > 0, "nanowire rewind happened");
    check(n_pool_switch > 0, "pool selection switch happened");
    check(n_act_sat > 0, "activation saturation happened");
    check(n_grp_switch == 2 * (G - 1), $sformatf("FC group switches %0d", n_grp_switch));
    check(n_pad_group == 2 * WLEN, "padded last FC group ran");
    check(n_retained_run > 0, "run on retained weights happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
