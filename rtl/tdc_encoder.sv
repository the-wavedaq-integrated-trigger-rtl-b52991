// tdc_encoder: leading-edge encoder of the shift-register TDC.
//
// Takes, once per system clock, the SAMPLES comparator samples collected by
// tdc_deser (bit 0 oldest) and looks for the first 0->1 transition.  The
// bit before bit 0 is the newest bit of the previous word, so an edge that
// falls exactly on a word boundary is still seen once.  The result is a
// hit flag, the fine time (index of the first sample that is high, in
// units of one clk_fast period) and the coarse time (a free-running count
// of system clocks).  Only the first edge of a word is reported, which is
// this design's choice: at 12.5 ns per word a second edge is unlikely for
// a detector pulse.
//
// Timing: outputs are registered, valid one clock after `word`; `coarse`
// is the count of the clock in which `word` was presented.
module tdc_encoder #(
  parameter int SAMPLES = 28,
  parameter int TS_W    = 32,
  localparam int FINE_W = $clog2(SAMPLES)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [SAMPLES-1:0] word,
  output logic               hit,
  output logic [FINE_W-1:0]  fine,
  output logic [TS_W-1:0]    coarse
);
  logic              prev_last;
  logic [TS_W-1:0]   count;
  logic [SAMPLES-1:0] edges;
  logic              any_edge;
  logic [FINE_W-1:0] first;

  always_comb begin
    edges    = word & ~{word[SAMPLES-2:0], prev_last};
    any_edge = |edges;
    first    = '0;
    for (int i = SAMPLES - 1; i >= 0; i--)
      if (edges[i]) first = FINE_W'(i);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      prev_last <= 1'b0;
      count     <= '0;
      hit       <= 1'b0;
      fine      <= '0;
      coarse    <= '0;
    end else begin
      prev_last <= word[SAMPLES-1];
      count     <= count + 1'b1;
      hit       <= any_edge;
      fine      <= first;
      coarse    <= count;
    end
  end
endmodule
