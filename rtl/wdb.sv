// wdb: the FPGA logic of one WaveDREAM digitizer board.
//
// A WaveDREAM has 16 input channels recorded by two DRS4 analog memories
// and digitized by one 80 MSPS ADC per channel; each channel also has a
// fast comparator.  This module puts together, per channel, the
// shift-register TDC (tdc_deser + tdc_encoder) on the comparator, the
// board-level trigger pre-processing (wdb_trigger) that produces the word
// sent every clock to the trigger concentrator, and the DRS4 readout
// controller (drs4_readout) that answers the trigger bus and sends event
// packets toward the data concentrator.  The board is busy from the
// trigger until its packet has left and its ADC carries live samples
// again, and says so in its trigger word.
//
// The TDC results are also brought out (hit flag and fine time per
// channel, one shared coarse time stamp) for monitoring.
//
// Timing: see the sub-blocks.  clk_fast is TDC_S times clk and
// edge-aligned with it; rst is synchronous to clk and held for at least
// one clk period.
module wdb
  import wavedaq_pkg::*;
#(
  parameter int CELLS   = DRS_CELLS,
  parameter int ADC_LAT = ADC_LATENCY,
  parameter int TDC_S   = TDC_SAMPLES,
  localparam int CW     = $clog2(CELLS),
  localparam int FW     = $clog2(TDC_S)
) (
  input  logic                       clk,
  input  logic                       clk_fast,
  input  logic                       rst,
  input  logic [BOARD_ID_W-1:0]      board_id,
  // analog front end
  input  logic [N_CH-1:0]            comp,
  input  logic [N_CH-1:0][ADC_W-1:0] adc,
  output logic                       drs_stop,
  output logic                       drs_rd,
  output logic [CW-1:0]              drs_cell,
  // configuration
  input  logic [N_CH-1:0][ADC_W-1:0] pedestal,
  input  logic [N_CH-1:0][WGT_W-1:0] weight,
  input  logic                       invert,
  input  logic [15:0]                stop_delay,
  // trigger serial link out, trigger bus in
  output trig_word_t                 trig_word,
  input  trig_bus_t                  trig_bus,
  // readout serial link out
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic                       out_last,
  output logic [DATA_W-1:0]          out_data,
  // TDC monitoring
  output logic [N_CH-1:0]            tdc_hit,
  output logic [N_CH-1:0][FW-1:0]    tdc_fine,
  output logic [TS_W-1:0]            tdc_coarse
);
  logic [N_CH-1:0][TDC_S-1:0] tdc_word;
  logic [N_CH-1:0]            tdc_stb;
  logic [TS_W-1:0]            coarse [N_CH];
  logic                       busy;

  for (genvar c = 0; c < N_CH; c++) begin : g_tdc
    tdc_deser #(.SAMPLES(TDC_S)) u_deser (
      .clk_fast, .rst, .comp(comp[c]), .word(tdc_word[c]), .word_stb(tdc_stb[c])
    );
    tdc_encoder #(.SAMPLES(TDC_S), .TS_W(TS_W)) u_enc (
      .clk, .rst, .word(tdc_word[c]), .hit(tdc_hit[c]), .fine(tdc_fine[c]), .coarse(coarse[c])
    );
  end
  assign tdc_coarse = coarse[0];

  wdb_trigger #(.HIT_DELAY(ADC_LAT + 1)) u_trig (
    .clk, .rst, .adc, .pedestal, .weight, .invert, .tdc_hit, .busy, .trig_word
  );

  drs4_readout #(.CELLS(CELLS), .ADC_LAT(ADC_LAT)) u_ro (
    .clk, .rst, .board_id, .trig_bus, .stop_delay,
    .drs_stop, .drs_rd, .drs_cell, .adc,
    .out_valid, .out_ready, .out_last, .out_data, .busy
  );
endmodule
