// sc_inner_product: APC-based stochastic inner product block.
//
// N bipolar multiplications, each an XNOR of an input stream bit and a weight
// stream bit (P(xnor) gives the product of the two bipolar values), feed a parallel
// counter. The output is, each cycle, the number of 1s among the N products; summed
// over a stream of T cycles, (2*sum - N*T)/T estimates sum_i x_i*w_i. This structure
// is the paper's (XNOR multiplication plus APC addition).
// Purely combinational; the count of a cycle belongs to that cycle's stream bits.
module sc_inner_product #(
  parameter int unsigned N  = 25,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic [N-1:0]  x,
  input  logic [N-1:0]  w,
  output logic [CW-1:0] count
);

  logic [N-1:0] prod;

  assign prod = ~(x ^ w);

  apc #(.N(N)) u_apc (
    .in    (prod),
    .count (count)
  );

endmodule
