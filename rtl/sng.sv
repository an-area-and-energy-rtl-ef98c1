// sng: stochastic number generator for one filter block.
//
// Converts M binary weight codes into M bipolar stochastic bit-streams. A weight
// code c (WB bits) stands for the probability c / 2^WB, i.e. the bipolar value
// 2c/2^WB - 1, which is how the paper's mapping y = int((x+1)/2 * 2^w)/2^w stores a
// real weight x. Each cycle a bit is 1 when a random number is below the code:
//   bits[i] = (r_i < code[i]),  r_i = low WB bits of rotl(lfsr, 5*i).
// The paper gives the function (binary-to-stochastic conversion with "RNGs and
// comparators", one SNG block per filter in its weight-sharing figure). Sharing one
// 16-bit LFSR among the M comparators, with a different rotation per weight, is
// this design's choice.
//
// Timing: bits is combinational from the LFSR state and the codes; the LFSR steps
// at each clock edge with en = 1 and returns to SEED on reset.
module sng
  import dwcnn_pkg::*;
#(
  parameter int unsigned M    = 25,
  parameter int unsigned WB   = W_PREC,
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic [M-1:0][WB-1:0]  code,
  output logic [M-1:0]          bits
);

  logic [15:0] lfsr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  lfsr <= SEED;
    else if (en) lfsr <= lfsr16_next(lfsr);
  end

  always_comb begin
    for (int unsigned i = 0; i < M; i++) begin
      logic [15:0] r;
      r = rotl16(lfsr, 5 * i);
      bits[i] = (r[WB-1:0] < code[i]);
    end
  end

endmodule
