// drs4_adc_model: behavioural model of the two DRS4 chips and the 80 MSPS
// ADCs of one WaveDREAM board, for simulation only.
//
// While drs_stop is low the model writes the present input value of every
// channel (`analog`, already in ADC counts) into a circular memory of
// CELLS cells, one cell per clock (the real DRS4 samples at GHz rates; one
// cell per clock is enough to check the readout logic).  When drs_stop is
// high, writing stops; the oldest cell is the one at the write pointer.
// The ADC output is the input value while sampling, or the cell asked for
// by (drs_rd, drs_cell) counted from the oldest, and it appears ADC_LAT
// clocks after the request, like a pipelined ADC.
module drs4_adc_model #(
  parameter int N_CH    = 16,
  parameter int ADC_W   = 12,
  parameter int CELLS   = 1024,
  parameter int ADC_LAT = 16
) (
  input  logic                       clk,
  input  logic [N_CH-1:0][ADC_W-1:0] analog,
  input  logic                       drs_stop,
  input  logic                       drs_rd,
  input  logic [$clog2(CELLS)-1:0]   drs_cell,
  output logic [N_CH-1:0][ADC_W-1:0] adc
);
  logic [N_CH-1:0][ADC_W-1:0] mem  [CELLS];
  logic [N_CH-1:0][ADC_W-1:0] pipe [ADC_LAT];
  int wp = 0;

  initial begin
    for (int i = 0; i < CELLS; i++) mem[i] = '0;
    for (int i = 0; i < ADC_LAT; i++) pipe[i] = '0;
  end

  always @(posedge clk) begin
    logic [N_CH-1:0][ADC_W-1:0] v;
    if (!drs_stop) begin
      mem[wp] <= analog;
      wp <= (wp + 1) % CELLS;
      v = analog;
    end else begin
      v = drs_rd ? mem[(wp + int'(drs_cell)) % CELLS] : '0;
    end
    pipe[0] <= v;
    for (int i = 1; i < ADC_LAT; i++) pipe[i] <= pipe[i-1];
  end

  assign adc = pipe[ADC_LAT-1];
endmodule
