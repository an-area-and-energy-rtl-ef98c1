// conv_weight_store: shared filter-weight storage of a convolutional layer in one
// domain-wall nanowire.
//
// The nanowire is divided into NF filter blocks F1..Fn of M binary weights of WB
// bits (the paper's weight-sharing figure). Each block is read once into the weight
// registers that drive that filter's SNG, and from there it is shared by every
// inner-product block of the feature map. Binary storage with an SNG is the case the
// paper draws for convolutional layers. Layout on the wire (this design's choice):
// domain (f*M + i)*WB + b holds bit b (LSB first) of weight i of filter f.
//
// Because a nanowire has one port, all accesses are serial, one domain per cycle:
//   load_start  -> LOAD: each cycle with wr_valid writes wr_bit and advances; after
//                  LEN bits the wire is rewound and the weights fetched.
//   fetch_start -> FETCH: read LEN bits into the weight registers (a shift chain),
//                  then REWIND the wire to its first domain.
// As the wire is non-volatile, a powered-up chip only needs fetch_start (no reload).
// ready is high once a fetch has completed and no operation is in progress.
// Load costs LEN + (LEN-1) + LEN + (LEN-1) cycles, a fetch alone 2*LEN-1 cycles.
module conv_weight_store
  import dwcnn_pkg::*;
#(
  parameter int unsigned NF = CONV_NF,
  parameter int unsigned M  = KSIZE * KSIZE,
  parameter int unsigned WB = W_PREC,
  localparam int unsigned LEN = NF * M * WB,
  localparam int unsigned PW  = (LEN > 1) ? $clog2(LEN) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         load_start,
  input  logic                         wr_valid,
  input  logic                         wr_bit,
  input  logic                         fetch_start,
  output logic                         busy,
  output logic                         ready,
  output logic                         rewinding,
  output logic [NF-1:0][M-1:0][WB-1:0] weights
);

  dwm_state_e    state, after_rewind;
  logic [PW-1:0] cnt;
  logic [PW-1:0] pos;
  logic          rd_bit;
  logic          shift_en, shift_dir, wr_en;
  logic [LEN-1:0] wreg;
  logic          last;

  assign last = (cnt == PW'(LEN - 1));

  always_comb begin
    shift_en  = 1'b0;
    shift_dir = 1'b0;
    wr_en     = 1'b0;
    unique case (state)
      DWM_LOAD:   begin wr_en = wr_valid; shift_en = wr_valid && !last; end
      DWM_FETCH:  begin shift_en = !last; end
      DWM_REWIND: begin shift_en = (pos != '0); shift_dir = 1'b1; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= DWM_IDLE;
      after_rewind <= DWM_IDLE;
      cnt          <= '0;
      ready        <= 1'b0;
    end else begin
      unique case (state)
        DWM_IDLE: begin
          cnt <= '0;
          if (load_start) begin
            state <= DWM_LOAD;
            ready <= 1'b0;
          end else if (fetch_start) begin
            state <= DWM_FETCH;
            ready <= 1'b0;
          end
        end
        DWM_LOAD: if (wr_valid) begin
          cnt <= cnt + 1'b1;
          if (last) begin
            state        <= DWM_REWIND;
            after_rewind <= DWM_FETCH;
          end
        end
        DWM_FETCH: begin
          cnt <= cnt + 1'b1;
          if (last) begin
            state        <= DWM_REWIND;
            after_rewind <= DWM_IDLE;
          end
        end
        DWM_REWIND: if (pos == PW'(1) || pos == '0) begin
          state <= after_rewind;
          cnt   <= '0;
          if (after_rewind == DWM_IDLE) ready <= 1'b1;
        end
        default: state <= DWM_IDLE;
      endcase
    end
  end

  // Weight registers: the first bit read ends up in wreg[0].
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  wreg <= '0;
    else if (state == DWM_FETCH) wreg <= {rd_bit, wreg[LEN-1:1]};
  end

  assign weights   = wreg;
  assign busy      = (state != DWM_IDLE);
  assign rewinding = (state == DWM_REWIND);

  dwm_nanowire #(.LEN(LEN)) u_wire (
    .clk       (clk),
    .rst_n     (rst_n),
    .shift_en  (shift_en),
    .shift_dir (shift_dir),
    .wr_en     (wr_en),
    .wr_bit    (wr_bit),
    .rd_bit    (rd_bit),
    .pos       (pos)
  );

endmodule
