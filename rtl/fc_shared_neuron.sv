// fc_shared_neuron: one fully-connected neuron with a shared inner-product block.
//
// Instead of one XNOR and one APC input per network input (800 for the LeNet-5
// layer), the neuron has LANES multipliers and a LANES-input APC that are reused
// for every group of inputs. Its weights are stored as stochastic numbers of WLEN
// bits in LANES domain-wall nanowires: wire k holds weights w_k, w_{LANES+k},
// w_{2*LANES+k}, ... one after the other, so domain g*WLEN + j of wire k is bit j of
// weight g*LANES+k. Reading the wires sequentially, one domain per cycle, therefore
// yields exactly the weight bits of group g = t / WLEN at cycle t, aligned with the
// input group the shared MUX selects. All of this is the paper's scheme; the
// accumulator output is this design's addition so that the neuron's value can be
// read as a binary number as well as a Btanh stream.
//
// Control comes from fc_layer and is common to all neurons: shift/write commands for
// the wires, rd_en for each streaming cycle and acc_clr before a run.
// count is combinational for the current cycle; acc adds count at each rd_en edge,
// so after a run of G*WLEN cycles acc = sum of all counts; y is the Btanh output
// (registered). The bipolar inner-product estimate is
//   (2*acc - LANES*G*WLEN) / WLEN   (sum over all inputs of x_i*w_i, sampled).
module fc_shared_neuron
  import dwcnn_pkg::*;
#(
  parameter int unsigned N_IN   = FC_N_IN,
  parameter int unsigned LANES  = FC_LANES,
  parameter int unsigned WLEN   = W_SN_LEN,
  parameter int unsigned STATES = 2 * LANES,
  localparam int unsigned G     = (N_IN + LANES - 1) / LANES,
  localparam int unsigned LEN   = G * WLEN,
  localparam int unsigned CW    = $clog2(LANES + 1),
  localparam int unsigned AW    = $clog2(LEN * LANES + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             shift_en,
  input  logic             shift_dir,
  input  logic             wr_en,
  input  logic [LANES-1:0] wr_bits,
  input  logic             rd_en,
  input  logic             acc_clr,
  input  logic [LANES-1:0] x_sel,
  output logic [CW-1:0]    count,
  output logic [AW-1:0]    acc,
  output logic             y,
  output logic             sat
);

  logic [LANES-1:0] wbit;
  logic             sat_hi, sat_lo;

  for (genvar k = 0; k < LANES; k++) begin : g_wire
    dwm_nanowire #(.LEN(LEN)) u_wire (
      .clk       (clk),
      .rst_n     (rst_n),
      .shift_en  (shift_en),
      .shift_dir (shift_dir),
      .wr_en     (wr_en),
      .wr_bit    (wr_bits[k]),
      .rd_bit    (wbit[k]),
      .pos       ()
    );
  end

  sc_inner_product #(.N(LANES)) u_ip (
    .x     (x_sel),
    .w     (wbit),
    .count (count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       acc <= '0;
    else if (acc_clr) acc <= '0;
    else if (rd_en)   acc <= acc + AW'(count);
  end

  btanh #(.N(LANES), .STATES(STATES)) u_act (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (acc_clr),
    .en     (rd_en),
    .q      (count),
    .y      (y),
    .sat_hi (sat_hi),
    .sat_lo (sat_lo)
  );

  assign sat = sat_hi | sat_lo;

endmodule
