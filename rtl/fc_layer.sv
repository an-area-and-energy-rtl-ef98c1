// fc_layer: resource-shared fully-connected layer with DWM stochastic weights.
//
// N_OUT neurons (fc_shared_neuron) share one input-group MUX and one controller.
// Each neuron has LANES nanowires of LEN = G*WLEN domains, G = ceil(N_IN/LANES).
// The controller sequences the nanowires of all neurons in lock-step:
//   load_start -> LOAD: each cycle with wr_valid writes wr_bits[n][k] into wire k of
//                 neuron n at the current domain and advances; LEN cycles with
//                 wr_valid, then REWIND. Stored bit order: domain g*WLEN + j of wire
//                 k = bit j of weight g*LANES+k. Weights of the padding lanes of the
//                 last group should be written as a bipolar zero (half ones).
//   run_start  -> RUN: LEN cycles; in cycle t the MUX selects group t / WLEN, every
//                 wire presents domain t, each neuron adds its APC count, and the
//                 wires advance. Then REWIND; done pulses once acc is final.
//   REWIND     -> shift back until domain 0 is under the port (LEN-1 cycles).
// The weights are non-volatile, so a run needs no reload after power-up.
// Input streams x are sampled in the RUN cycles (running = 1); each input is used
// only during the WLEN cycles of its group, which is the sampling loss the paper
// accepts for fully-connected layers. The sharing scheme is the paper's; the
// controller, its handshake and the rewind step are this design's choices.
// Run latency: 1 cycle (start) + LEN cycles, then LEN-1 rewind cycles.
module fc_layer
  import dwcnn_pkg::*;
#(
  parameter int unsigned N_IN   = FC_N_IN,
  parameter int unsigned N_OUT  = FC_N_OUT,
  parameter int unsigned LANES  = FC_LANES,
  parameter int unsigned WLEN   = W_SN_LEN,
  parameter int unsigned STATES = 2 * LANES,
  localparam int unsigned G     = (N_IN + LANES - 1) / LANES,
  localparam int unsigned GW    = (G > 1) ? $clog2(G) : 1,
  localparam int unsigned LEN   = G * WLEN,
  localparam int unsigned PW    = (LEN > 1) ? $clog2(LEN) : 1,
  localparam int unsigned BW    = (WLEN > 1) ? $clog2(WLEN) : 1,
  localparam int unsigned CW    = $clog2(LANES + 1),
  localparam int unsigned AW    = $clog2(LEN * LANES + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        load_start,
  input  logic                        wr_valid,
  input  logic [N_OUT-1:0][LANES-1:0] wr_bits,
  input  logic                        run_start,
  input  logic [N_IN-1:0]             x,
  output logic                        busy,
  output logic                        running,
  output logic                        rewinding,
  output logic                        done,
  output logic [GW-1:0]               grp,
  output logic [N_OUT-1:0][AW-1:0]    acc,
  output logic [N_OUT-1:0]            y,
  output logic [N_OUT-1:0]            sat
);

  dwm_state_e       state;
  logic [PW-1:0]    pos;       // domain under the ports (same for every wire)
  logic [BW-1:0]    bitpos;    // bit of the current weight
  logic             last;
  logic             shift_en, shift_dir, wr_en, rd_en, acc_clr;
  logic [LANES-1:0] x_sel;

  assign last = (pos == PW'(LEN - 1));

  always_comb begin
    shift_en  = 1'b0;
    shift_dir = 1'b0;
    wr_en     = 1'b0;
    rd_en     = 1'b0;
    unique case (state)
      DWM_LOAD:   begin wr_en = wr_valid; shift_en = wr_valid && !last; end
      DWM_RUN:    begin rd_en = 1'b1; shift_en = !last; end
      DWM_REWIND: begin shift_en = (pos != '0); shift_dir = 1'b1; end
      default: ;
    endcase
  end

  assign acc_clr = (state == DWM_IDLE) && run_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= DWM_IDLE;
      pos    <= '0;
      bitpos <= '0;
      grp    <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (shift_en) pos <= shift_dir ? pos - 1'b1 : pos + 1'b1;
      unique case (state)
        DWM_IDLE: begin
          bitpos <= '0;
          grp    <= '0;
          if (load_start)     state <= DWM_LOAD;
          else if (run_start) state <= DWM_RUN;
        end
        DWM_LOAD: if (wr_valid && last) state <= DWM_REWIND;
        DWM_RUN: begin
          if (bitpos == BW'(WLEN - 1)) begin
            bitpos <= '0;
            grp    <= grp + 1'b1;
          end else begin
            bitpos <= bitpos + 1'b1;
          end
          if (last) begin
            state <= DWM_REWIND;
            done  <= 1'b1;
          end
        end
        DWM_REWIND: if (pos == PW'(1) || pos == '0) state <= DWM_IDLE;
        default: state <= DWM_IDLE;
      endcase
    end
  end

  assign busy      = (state != DWM_IDLE);
  assign running   = (state == DWM_RUN);
  assign rewinding = (state == DWM_REWIND);

  fc_group_mux #(.N_IN(N_IN), .LANES(LANES)) u_mux (
    .x   (x),
    .grp (grp),
    .y   (x_sel)
  );

  for (genvar n = 0; n < N_OUT; n++) begin : g_neuron
    fc_shared_neuron #(
      .N_IN(N_IN), .LANES(LANES), .WLEN(WLEN), .STATES(STATES)
    ) u_neuron (
      .clk       (clk),
      .rst_n     (rst_n),
      .shift_en  (shift_en),
      .shift_dir (shift_dir),
      .wr_en     (wr_en),
      .wr_bits   (wr_bits[n]),
      .rd_en     (rd_en),
      .acc_clr   (acc_clr),
      .x_sel     (x_sel),
      .count     (),
      .acc       (acc[n]),
      .y         (y[n]),
      .sat       (sat[n])
    );
  end

  a_run_grp_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    running |-> (int'(grp) < G));

endmodule
