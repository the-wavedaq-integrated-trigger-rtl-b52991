// pedestal_sub: pedestal subtraction for one trigger channel.
//
// First step of the board-level trigger: the ADC, which samples the input
// continuously while the DRS4 is recording, delivers one unsigned sample
// per 80 MHz clock.  This block removes the channel's pedestal (baseline)
// and, when `invert` is set, flips the sign so that negative-going detector
// pulses become positive.  The pedestal is a register written by slow
// control (this design's choice; the pedestal is not estimated on line).
//
// Timing: one register stage, y is valid one clock after adc.
module pedestal_sub #(
  parameter int ADC_W = 12
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [ADC_W-1:0]        adc,
  input  logic [ADC_W-1:0]        pedestal,
  input  logic                    invert,
  output logic signed [ADC_W:0]   y
);
  logic signed [ADC_W:0] diff;

  always_comb begin
    diff = $signed({1'b0, adc}) - $signed({1'b0, pedestal});
    if (invert) diff = -diff;
  end

  always_ff @(posedge clk) begin
    if (rst) y <= '0;
    else     y <= diff;
  end
endmodule
