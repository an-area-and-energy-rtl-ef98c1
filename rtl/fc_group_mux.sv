// fc_group_mux: input-group selector of the resource-shared fully-connected layer.
//
// The N_IN input bit-streams are split into G = ceil(N_IN/LANES) groups of LANES
// consecutive streams; group g holds inputs g*LANES .. g*LANES+LANES-1, matching the
// nanowire layout in which wire k stores w_k, w_{LANES+k}, w_{2*LANES+k}, ...
// The MUX hands the selected group to the LANES multipliers of every neuron. Lanes
// past N_IN in the last group output 0 (their stored weights must then be bipolar
// zero, see fc_layer). The paper describes the grouping and the multiplexers; the
// padding rule is this design's. Purely combinational.
module fc_group_mux #(
  parameter int unsigned N_IN  = 800,
  parameter int unsigned LANES = 25,
  localparam int unsigned G    = (N_IN + LANES - 1) / LANES,
  localparam int unsigned GW   = (G > 1) ? $clog2(G) : 1
) (
  input  logic [N_IN-1:0]  x,
  input  logic [GW-1:0]    grp,
  output logic [LANES-1:0] y
);

  always_comb begin
    for (int unsigned k = 0; k < LANES; k++) begin
      int unsigned idx;
      idx  = int'(grp) * LANES + k;
      y[k] = (idx < N_IN) ? x[idx] : 1'b0;
    end
  end

endmodule
