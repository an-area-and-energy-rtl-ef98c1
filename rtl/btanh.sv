// btanh: stochastic tanh activation with a binary input (Btanh).
//
// A saturating up/down counter with STATES states. Each enabled cycle it adds the
// bipolar value of the binary input, 2*q - N, where q (0..N) is the number of 1s an
// N-input parallel counter saw; the output bit is 1 while the counter is in the upper
// half of its range. Over a stream the output's bipolar value approximates
// tanh(gain * input). The paper adopts Btanh for the APC outputs and says only that
// it is an up/down counter; the state count (default 2*N), the saturating update and
// the mid-range start are this design's choices.
//
// Timing: start (one cycle) puts the counter at STATES/2; each cycle with en = 1
// updates it at the clock edge. y is registered: it reflects inputs up to the
// previous enabled cycle. sat_hi/sat_lo flag a counter resting at an end.
module btanh #(
  parameter int unsigned N      = 25,
  parameter int unsigned STATES = 2 * N,
  localparam int unsigned CW    = $clog2(N + 1),
  localparam int unsigned SW    = $clog2(STATES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          en,
  input  logic [CW-1:0] q,
  output logic          y,
  output logic          sat_hi,
  output logic          sat_lo
);

  localparam int signed SMAX = STATES - 1;

  logic [SW-1:0] state;
  int signed     nxt;

  always_comb begin
    nxt = int'(state) + 2 * int'(q) - int'(N);
    if (nxt > SMAX) nxt = SMAX;
    if (nxt < 0)    nxt = 0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     state <= SW'(STATES / 2);
    else if (start) state <= SW'(STATES / 2);
    else if (en)    state <= SW'(nxt);
  end

  assign y      = (state >= SW'(STATES / 2));
  assign sat_hi = (state == SW'(SMAX));
  assign sat_lo = (state == '0);

endmodule
