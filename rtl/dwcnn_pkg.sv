// dwcnn_pkg: constants, types and small functions shared by the stochastic-computing
// DCNN with domain-wall-memory (DWM) weight storage.
//
// Numbers that come from the paper: 7-bit weight precision, weights stored as
// 2^7 = 128-bit stochastic numbers, a 25-input shared APC in the fully-connected
// layer (800 inputs for the LeNet-5 layer it is described on) and an input stream
// length of 1024. The LeNet-5 geometry (28x28 image, 5x5 kernels, 20 feature maps,
// 2x2 pooling) follows from the layer sizes 784-11520-2880-... quoted for LeNet-5.
// The random number generator (a 16-bit Galois LFSR) is this design's choice.
package dwcnn_pkg;

  // Weight precision in bits (paper: "the weight precision is seven bits").
  localparam int unsigned W_PREC      = 7;
  // Length of a stored stochastic weight, 2^W_PREC bits.
  localparam int unsigned W_SN_LEN    = 2 ** W_PREC;
  // Input bit-stream length assumed in the paper's experiments.
  localparam int unsigned STREAM_LEN  = 1024;
  // Shared-APC width of the fully-connected layer (25 DWM nanowires).
  localparam int unsigned FC_LANES    = 25;
  // LeNet-5 fully-connected layer sizes used in the paper's example.
  localparam int unsigned FC_N_IN     = 800;
  localparam int unsigned FC_N_OUT    = 500;
  // LeNet-5 first convolutional layer.
  localparam int unsigned IMG_SIZE    = 28;
  localparam int unsigned KSIZE       = 5;
  localparam int unsigned CONV_NF     = 20;
  localparam int unsigned POOL_IN     = 4;   // 2x2 max-pooling window

  // States of the DWM read/write sequencers.
  typedef enum logic [2:0] {
    DWM_IDLE,
    DWM_LOAD,     // write port: one bit written and the wire advanced per cycle
    DWM_REWIND,   // shift back until the first domain is under the port
    DWM_FETCH,    // read port: one bit read and the wire advanced per cycle
    DWM_RUN       // streaming read used as a stochastic weight stream
  } dwm_state_e;

  // One step of a 16-bit maximal-length Galois LFSR (x^16 + x^14 + x^13 + x^11 + 1).
  function automatic logic [15:0] lfsr16_next(input logic [15:0] s);
    return s[0] ? ((s >> 1) ^ 16'hB400) : (s >> 1);
  endfunction

  // Rotate a 16-bit word left by r positions.
  function automatic logic [15:0] rotl16(input logic [15:0] s, input int unsigned r);
    int unsigned k;
    k = r % 16;
    return (k == 0) ? s : ((s << k) | (s >> (16 - k)));
  endfunction

  // A non-zero LFSR seed derived from an index, so that parallel generators differ.
  function automatic logic [15:0] seed_for(input int unsigned idx);
    logic [15:0] s;
    s = 16'hACE1 ^ 16'((idx * 40503) + (idx >> 3) * 977);
    return (s == 16'h0) ? 16'h1 : s;
  endfunction

endpackage
