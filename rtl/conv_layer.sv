// conv_layer: stochastic convolutional layer with DWM filter-weight sharing.
//
// The filter weights of all NF feature maps sit in one domain-wall nanowire
// (conv_weight_store). Each filter block drives one SNG, and the resulting M weight
// streams are broadcast to every inner-product block that computes a pixel of that
// feature map, because the same filter is applied to the whole input map. Each
// inner-product block is M XNOR multipliers plus a parallel counter, so the layer
// outputs, every cycle, one binary count (0..M) per output pixel. Stride 1, no
// padding: OH = IH-K+1. This sharing structure is the paper's; the geometry
// defaults are LeNet-5's first layer (28x28 input, 5x5 kernels, 20 maps, giving the
// 11520 neurons the paper lists) and the weight index order is this design's:
// weight i = (ch*K + ky)*K + kx, input pixel index (ch*IH + y)*IW + x.
//
// Timing: x is one bit per input stream per cycle; with en = 1 the SNGs advance.
// count is combinational from x and the SNG state of the same cycle. The weight
// store interface (load/fetch) is passed through; see conv_weight_store.
module conv_layer
  import dwcnn_pkg::*;
#(
  parameter int unsigned IN_CH = 1,
  parameter int unsigned IH    = IMG_SIZE,
  parameter int unsigned IW    = IMG_SIZE,
  parameter int unsigned K     = KSIZE,
  parameter int unsigned NF    = CONV_NF,
  parameter int unsigned WB    = W_PREC,
  localparam int unsigned M    = IN_CH * K * K,
  localparam int unsigned OH   = IH - K + 1,
  localparam int unsigned OW   = IW - K + 1,
  localparam int unsigned CW   = $clog2(M + 1)
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  load_start,
  input  logic                                  wr_valid,
  input  logic                                  wr_bit,
  input  logic                                  fetch_start,
  output logic                                  busy,
  output logic                                  ready,
  output logic                                  rewinding,
  input  logic                                  en,
  input  logic [IN_CH*IH*IW-1:0]                x,
  output logic [NF-1:0][OH-1:0][OW-1:0][CW-1:0] count
);

  logic [NF-1:0][M-1:0][WB-1:0] weights;
  logic [NF-1:0][M-1:0]         wstream;

  conv_weight_store #(.NF(NF), .M(M), .WB(WB)) u_store (
    .clk         (clk),
    .rst_n       (rst_n),
    .load_start  (load_start),
    .wr_valid    (wr_valid),
    .wr_bit      (wr_bit),
    .fetch_start (fetch_start),
    .busy        (busy),
    .ready       (ready),
    .rewinding   (rewinding),
    .weights     (weights)
  );

  for (genvar f = 0; f < NF; f++) begin : g_filter
    sng #(.M(M), .WB(WB), .SEED(seed_for(f))) u_sng (
      .clk   (clk),
      .rst_n (rst_n),
      .en    (en),
      .code  (weights[f]),
      .bits  (wstream[f])
    );

    for (genvar oy = 0; oy < OH; oy++) begin : g_row
      for (genvar ox = 0; ox < OW; ox++) begin : g_col
        logic [M-1:0] win;
        always_comb begin
          for (int unsigned ch = 0; ch < IN_CH; ch++)
            for (int unsigned ky = 0; ky < K; ky++)
              for (int unsigned kx = 0; kx < K; kx++)
                win[(ch*K + ky)*K + kx] = x[(ch*IH + oy + ky)*IW + ox + kx];
        end
        sc_inner_product #(.N(M)) u_ip (
          .x     (win),
          .w     (wstream[f]),
          .count (count[f][oy][ox])
        );
      end
    end
  end

endmodule
