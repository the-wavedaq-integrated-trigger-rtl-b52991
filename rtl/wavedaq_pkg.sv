// wavedaq_pkg: constants and types shared by the WaveDAQ crate logic.
//
// A crate holds N_BOARDS WaveDREAM digitizer boards of N_CH channels each
// (16 x 16 = 256 channels, as in the system description).  Every board
// samples its channels with an 80 MSPS ADC; the system clock of all logic
// here is that sample clock.  The ADC word width, the trigger and readout
// word layouts and the DRS4 cell count are choices of this design (the
// DRS4 figure of 1024 cells comes from the chip's datasheet).
package wavedaq_pkg;

  localparam int N_BOARDS    = 16;    // WaveDREAM slots per crate
  localparam int N_CH        = 16;    // channels per WaveDREAM board
  localparam int ADC_W       = 12;    // ADC sample width
  localparam int SMP_W       = ADC_W + 1;  // signed pedestal-subtracted sample
  localparam int WGT_W       = 8;     // unsigned channel weight
  localparam int BSUM_W      = SMP_W + WGT_W + 1 + $clog2(N_CH);  // board sum
  localparam int CSUM_W      = BSUM_W + $clog2(N_BOARDS);      // crate sum
  localparam int TDC_SAMPLES = 28;    // 12.5 ns / 450 ps, rounded
  localparam int FINE_W      = $clog2(TDC_SAMPLES);
  localparam int HC_W        = $clog2(N_CH + 1);               // hit count per board
  localparam int CHC_W       = HC_W + $clog2(N_BOARDS);        // hit count per crate
  localparam int TS_W        = 32;    // coarse time stamp (clock counter)
  localparam int EVT_W       = 16;    // event number on the trigger bus
  localparam int DRS_CELLS   = 1024;  // DRS4 analog memory depth
  localparam int CELL_W      = $clog2(DRS_CELLS);
  localparam int ADC_LATENCY = 16;    // ADC pipeline, 200 ns at 80 MHz
  localparam int DATA_W      = N_CH * ADC_W;  // one readout beat: one cell, all channels
  localparam int BOARD_ID_W  = 8;

  // Word sent by every board to the trigger concentrator each clock.
  typedef struct packed {
    logic                     busy;   // board is reading out its DRS4
    logic [HC_W-1:0]          nhit;   // channels whose comparator fired
    logic signed [BSUM_W-1:0] sum;    // weighted, pedestal-subtracted sum
  } trig_word_t;

  // Trigger bus, distributed from the concentrator back to every board.
  typedef struct packed {
    logic             trigger;        // one-clock pulse
    logic [EVT_W-1:0] event_num;      // number of this trigger
  } trig_bus_t;

  // Header beat of an event packet (low bits of a DATA_W beat).
  typedef struct packed {
    logic [15:0]           magic;     // HDR_MAGIC
    logic [BOARD_ID_W-1:0] board_id;
    logic [EVT_W-1:0]      event_num;
    logic [15:0]           n_cells;   // data beats that follow
  } evt_header_t;

  localparam logic [15:0] HDR_MAGIC = 16'hA5D4;

endpackage
