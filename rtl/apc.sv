// apc: parallel counter used as the adder of a stochastic inner product.
//
// Each cycle it counts the 1s among N input bits and outputs the count as a binary
// number, which is what the paper asks of its approximate parallel counter (APC):
// "count the total number of 1's among all input bit-streams and output a binary
// number". The paper does not give the APC's gate structure, so this counter is
// exact (a balanced adder tree written as a loop); an approximate APC that drops
// low-order logic would be a drop-in replacement with the same ports.
// Purely combinational.
module apc #(
  parameter int unsigned N  = 25,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic [N-1:0]  in,
  output logic [CW-1:0] count
);

  always_comb begin
    count = '0;
    for (int unsigned i = 0; i < N; i++) count += CW'(in[i]);
  end

endmodule
