// dw_cnn: stochastic-computing DCNN datapath with domain-wall-memory weight storage.
//
// Data flow (one stochastic bit per stream per clock):
//   x (IMG*IMG pixel bit-streams)
//     -> conv_layer: NF filters held as 7-bit codes in one DWM nanowire, one SNG per
//        filter, weight streams shared by all OH*OW inner-product blocks of a map
//     -> sc_max_pool per 2x2 window (segment counters + comparator + MUX)
//     -> btanh per pooled pixel (binary count in, bit-stream out)
//     -> fc_layer: NF*PH*PW inputs, FC_OUT neurons, each with FC_APC_IN DWM
//        nanowires of stochastic weights and one FC_APC_IN-input shared APC.
// This is the paper's set of operations and storage schemes chained as one conv
// stage and one fully-connected stage. Its LeNet-5 example has a second conv/pool
// stage and an 800->500 layer in between; those are the same modules with other
// parameters and are not instantiated here, so the fully-connected stage reads the
// 2880 pooled features of the first stage directly (this design's choice).
//
// Operation:
//   1. Weights: conv_load_start + NF*25*7 bits on conv_wr_bit (wr_valid), and
//      fc_load_start + LEN cycles of fc_wr_bits, can run at the same time. Being
//      non-volatile, they only need conv_fetch_start after a reset.
//   2. run_start (accepted when conv weights are ready and both stores are idle)
//      clears pools, activations and accumulators; the FC layer then runs for
//      LEN = ceil(N_FC/FC_APC_IN)*FC_WLEN cycles, during which x must carry a new
//      bit per stream per cycle (running = 1). done pulses when fc_acc is final.
// The pools' random first-segment choice comes from a free-running LFSR here.
// ev_pool_switch and ev_act_sat report, per cycle, that some pool moved its
// selection and that some activation counter sits at an end of its range.
module dw_cnn
  import dwcnn_pkg::*;
#(
  parameter int unsigned IMG       = IMG_SIZE,
  parameter int unsigned K         = KSIZE,
  parameter int unsigned NF        = CONV_NF,
  parameter int unsigned POOL_SEG  = 16,
  parameter int unsigned FC_OUT  = 10,
  parameter int unsigned FC_APC_IN  = dwcnn_pkg::FC_LANES,
  parameter int unsigned FC_WLEN   = W_SN_LEN,
  localparam int unsigned M        = K * K,
  localparam int unsigned OH       = IMG - K + 1,
  localparam int unsigned PH       = OH / 2,
  localparam int unsigned CW       = $clog2(M + 1),
  localparam int unsigned N_FC     = NF * PH * PH,
  localparam int unsigned G        = (N_FC + FC_APC_IN - 1) / FC_APC_IN,
  localparam int unsigned GW       = (G > 1) ? $clog2(G) : 1,
  localparam int unsigned LEN      = G * FC_WLEN,
  localparam int unsigned AW       = $clog2(LEN * FC_APC_IN + 1)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // conv weight nanowire
  input  logic                              conv_load_start,
  input  logic                              conv_wr_valid,
  input  logic                              conv_wr_bit,
  input  logic                              conv_fetch_start,
  output logic                              conv_busy,
  output logic                              conv_ready,
  // fully-connected weight nanowires
  input  logic                              fc_load_start,
  input  logic                              fc_wr_valid,
  input  logic [FC_OUT-1:0][FC_APC_IN-1:0] fc_wr_bits,
  output logic                              fc_busy,
  // inference
  input  logic                              run_start,
  input  logic [IMG*IMG-1:0]                x,
  output logic                              running,
  output logic                              done,
  output logic [GW-1:0]                     fc_grp,
  output logic [FC_OUT-1:0][AW-1:0]       fc_acc,
  output logic [FC_OUT-1:0]               fc_y,
  output logic                              ev_pool_switch,
  output logic                              ev_act_sat
);

  logic                               run_go;
  logic                               conv_rewinding, fc_rewinding;
  logic [NF-1:0][OH-1:0][OH-1:0][CW-1:0] conv_count;
  logic [N_FC-1:0]                    act;
  logic [N_FC-1:0]                    pool_switch, act_sat;
  logic [15:0]                        rng;

  assign run_go = run_start && conv_ready && !conv_busy && !fc_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rng <= 16'h1D0F;
    else        rng <= lfsr16_next(rng);
  end

  conv_layer #(.IN_CH(1), .IH(IMG), .IW(IMG), .K(K), .NF(NF), .WB(W_PREC)) u_conv (
    .clk         (clk),
    .rst_n       (rst_n),
    .load_start  (conv_load_start),
    .wr_valid    (conv_wr_valid),
    .wr_bit      (conv_wr_bit),
    .fetch_start (conv_fetch_start),
    .busy        (conv_busy),
    .ready       (conv_ready),
    .rewinding   (conv_rewinding),
    .en          (running),
    .x           (x),
    .count       (conv_count)
  );

  for (genvar f = 0; f < NF; f++) begin : g_map
    for (genvar py = 0; py < PH; py++) begin : g_py
      for (genvar px = 0; px < PH; px++) begin : g_px
        localparam int unsigned P = (f * PH + py) * PH + px;
        logic [POOL_IN-1:0][CW-1:0] win;
        logic [CW-1:0]              pooled;
        logic [15:0]                r;
        logic                       sat_hi, sat_lo;

        assign win[0] = conv_count[f][2*py][2*px];
        assign win[1] = conv_count[f][2*py][2*px+1];
        assign win[2] = conv_count[f][2*py+1][2*px];
        assign win[3] = conv_count[f][2*py+1][2*px+1];
        assign r      = rotl16(rng, P);

        sc_max_pool #(.N(POOL_IN), .DW(CW), .SEG(POOL_SEG)) u_pool (
          .clk        (clk),
          .rst_n      (rst_n),
          .start      (run_go),
          .en         (running),
          .rnd_sel    (r[1:0]),
          .in         (win),
          .out        (pooled),
          .sel        (),
          .seg_end    (),
          .sel_change (pool_switch[P])
        );

        btanh #(.N(M)) u_act (
          .clk    (clk),
          .rst_n  (rst_n),
          .start  (run_go),
          .en     (running),
          .q      (pooled),
          .y      (act[P]),
          .sat_hi (sat_hi),
          .sat_lo (sat_lo)
        );
        assign act_sat[P] = sat_hi | sat_lo;
      end
    end
  end

  fc_layer #(
    .N_IN(N_FC), .N_OUT(FC_OUT), .LANES(FC_APC_IN), .WLEN(FC_WLEN)
  ) u_fc (
    .clk        (clk),
    .rst_n      (rst_n),
    .load_start (fc_load_start),
    .wr_valid   (fc_wr_valid),
    .wr_bits    (fc_wr_bits),
    .run_start  (run_go),
    .x          (act),
    .busy       (fc_busy),
    .running    (running),
    .rewinding  (fc_rewinding),
    .done       (done),
    .grp        (fc_grp),
    .acc        (fc_acc),
    .y          (fc_y),
    .sat        ()
  );

  assign ev_pool_switch = |pool_switch;
  assign ev_act_sat     = running && (|act_sat);

endmodule
