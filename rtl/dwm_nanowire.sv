// dwm_nanowire: behavioural model of one domain-wall memory (racetrack) nanowire.
//
// Physically this is a spintronic device, not logic: bits are magnetic domains in
// a ferromagnetic wire, a spin-coherent current pulse on the shift port moves every
// domain one position left or right without disturbing them, and a single MTJ
// read port and write port act on the domain aligned with the fixed layer. The
// model keeps the domains in an array and tracks which one sits under the access
// port; it is written in synthesizable style so that the surrounding read/write
// circuitry can be simulated and linted, but it stands for a process-specific part.
//
// Interface and timing (one clock):
//   rd_bit       domain under the port, combinational from the current position.
//   wr_en/wr_bit write the domain under the port at the clock edge.
//   shift_en     at the clock edge move the wire one position; shift_dir = 0
//                brings the next domain (pos+1) under the port, 1 the previous one.
//   A write and a shift in the same cycle write the current domain, then move.
// The stored bits are non-volatile: they have no reset and survive rst_n. Only the
// position tracker is reset, which models a wire left parked at its first domain
// (the sequencers always rewind it there). Shifting beyond either end is a usage
// error, flagged by an assertion; the wire's spare length (the U-shape of the
// device) is what lets it move LEN-1 positions in each direction.
// Everything here except the shift/read/write behaviour is this design's choice.
module dwm_nanowire #(
  parameter int unsigned LEN = 4096,
  localparam int unsigned PW = (LEN > 1) ? $clog2(LEN) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          shift_en,
  input  logic          shift_dir,
  input  logic          wr_en,
  input  logic          wr_bit,
  output logic          rd_bit,
  output logic [PW-1:0] pos
);

  logic domains [LEN];

  always_ff @(posedge clk) begin
    if (wr_en) domains[pos] <= wr_bit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos <= '0;
    end else if (shift_en) begin
      if (!shift_dir) pos <= (pos == PW'(LEN - 1)) ? pos : pos + 1'b1;
      else            pos <= (pos == '0) ? pos : pos - 1'b1;
    end
  end

  assign rd_bit = domains[pos];

  // The sequencers never push the wire beyond its ends.
  a_no_overshift: assert property (@(posedge clk) disable iff (!rst_n)
    shift_en |-> (shift_dir ? (pos != '0) : (pos != PW'(LEN - 1))));

endmodule
