// sc_max_pool: hardware-oriented max pooling without extra latency.
//
// The streams to be pooled (here the per-cycle binary counts of N inner-product
// blocks; DW = 1 gives plain bit-streams) are cut into segments of SEG cycles.
// A segment counter per input sums its values over the current segment; at the end
// of the segment a comparator picks the input with the largest sum, and the
// output MUX passes that input during the whole next segment (it is predicted to be
// the maximum). The input used in the first segment is chosen at random (rnd_sel,
// sampled on start), so no cycle is spent waiting. This scheme is the paper's;
// the segment length, the tie rule (lowest index wins) and taking the random
// choice from an external RNG are this design's choices.
//
// Timing: start (one cycle, no data) clears the counters and loads the random
// choice. Each cycle with en = 1 is one stream position: out is the selected input
// of that same cycle (combinational MUX); counters and selection update at the
// clock edge. seg_end is high in the last cycle of a segment; sel_change pulses
// for one cycle after a segment boundary that moved the selection.
module sc_max_pool #(
  parameter int unsigned N   = 4,
  parameter int unsigned DW  = 5,
  parameter int unsigned SEG = 16,
  localparam int unsigned SLW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned AW  = $clog2((2 ** DW - 1) * SEG + 1),
  localparam int unsigned PW  = (SEG > 1) ? $clog2(SEG) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 en,
  input  logic [SLW-1:0]       rnd_sel,
  input  logic [N-1:0][DW-1:0] in,
  output logic [DW-1:0]        out,
  output logic [SLW-1:0]       sel,
  output logic                 seg_end,
  output logic                 sel_change
);

  logic [N-1:0][AW-1:0] seg_cnt;
  logic [PW-1:0]        seg_pos;
  logic [AW-1:0]        sum_now [N];
  logic [SLW-1:0]       best;

  assign seg_end = en && (seg_pos == PW'(SEG - 1));

  // Comparator over this segment's totals, including the current cycle.
  always_comb begin
    for (int unsigned i = 0; i < N; i++) sum_now[i] = seg_cnt[i] + AW'(in[i]);
    best = '0;
    for (int unsigned i = 1; i < N; i++)
      if (sum_now[i] > sum_now[best]) best = SLW'(i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seg_cnt    <= '0;
      seg_pos    <= '0;
      sel        <= '0;
      sel_change <= 1'b0;
    end else begin
      sel_change <= 1'b0;
      if (start) begin
        seg_cnt <= '0;
        seg_pos <= '0;
        sel     <= SLW'(int'(rnd_sel) % N);
      end else if (en) begin
        if (seg_end) begin
          seg_cnt    <= '0;
          seg_pos    <= '0;
          sel        <= best;
          sel_change <= (best != sel);
        end else begin
          for (int unsigned i = 0; i < N; i++) seg_cnt[i] <= sum_now[i];
          seg_pos <= seg_pos + 1'b1;
        end
      end
    end
  end

  assign out = in[sel];

endmodule
