// tdc_deser: fast shift register front end of the shift-register TDC.
//
// The comparator output of one channel is sampled on every edge of the
// fastest clock available in the FPGA (clk_fast, SAMPLES times the 80 MHz
// system clock) and shifted into a register.  Once per system clock the
// register is copied into `word`, where bit 0 is the oldest sample and bit
// SAMPLES-1 the newest.  The bin width is therefore one clk_fast period;
// with the default SAMPLES = 28 it is 12.5 ns / 28 = 446 ps, the ~450 ps
// resolution of the WaveDREAM TDC.  A real FPGA does this with its I/O
// serdes; the plain shift register here is the same function.
//
// Timing: clk_fast is edge-aligned with the system clock and the phase
// counter restarts on rst.  `word` is copied at phase SAMPLES/2-1, half a
// system period before the system-clock edge that reads it, so it crosses
// to the system domain without a synchroniser.  word_stb marks the copy
// (fast domain).  Latching phase and the copy scheme are this design's
// choice.
module tdc_deser #(
  parameter int SAMPLES = 28
) (
  input  logic               clk_fast,
  input  logic               rst,
  input  logic               comp,
  output logic [SAMPLES-1:0] word,
  output logic               word_stb
);
  localparam int PH_W = $clog2(SAMPLES);
  localparam logic [PH_W-1:0] LATCH_PHASE = PH_W'(SAMPLES / 2 - 1);

  logic [SAMPLES-1:0] sr;
  logic [SAMPLES-1:0] sr_next;
  logic [PH_W-1:0]    phase;

  assign sr_next = {comp, sr[SAMPLES-1:1]};

  always_ff @(posedge clk_fast) begin
    if (rst) begin
      sr       <= '0;
      phase    <= '0;
      word     <= '0;
      word_stb <= 1'b0;
    end else begin
      sr       <= sr_next;
      phase    <= (phase == PH_W'(SAMPLES - 1)) ? '0 : phase + 1'b1;
      word_stb <= (phase == LATCH_PHASE);
      if (phase == LATCH_PHASE) word <= sr_next;
    end
  end
endmodule
