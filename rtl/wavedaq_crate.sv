// wavedaq_crate: one WaveDAQ crate, the top of this design.
//
// A 3U crate holds N_BOARDS WaveDREAM boards around two central slots.
// Over a custom backplane every board sends its trigger word each clock
// to the Trigger Concentrator Board (TCB) on a dedicated serial link; the
// TCB decides and sends the trigger back to all boards on the shared
// trigger bus; each triggered board stops its DRS4, reads it out and sends
// its event packet on a second serial link to the Data Concentrator Board
// (DCB), which merges all packets into the crate's single output stream.
// In a system of several crates the crate TCB instead forwards its sums
// and busy (crate_sum, crate_nhit, crate_busy) to a master TCB, and with
// ext_trig_sel set the boards take their trigger from ext_trig_bus, the
// master's trigger as distributed to every crate.
// Here the serial links are plain registered words, the DCB's Gigabit
// Ethernet, the clock distribution and slow control are outside: the
// merged stream, the clocks and all configuration registers are ports.
// The DRS4 chips and ADCs are outside too: each board exposes its DRS4
// stop/read signals and takes the ADC samples and comparator outputs.
//
// Timing: all logic on clk (the 80 MHz sample clock); clk_fast
// (TDC_SAMPLES x clk, edge-aligned) only drives the TDC shift registers.
// An ADC sample above threshold at the board inputs in clock t produces
// the trigger pulse in clock t+6 (the ADC adds its own ADC_LATENCY
// clocks before that) and the trigger bus reaches the boards
// in the same clock.  Board b has board id b.
module wavedaq_crate
  import wavedaq_pkg::*;
#(
  parameter int NB      = N_BOARDS,
  parameter int CELLS   = DRS_CELLS,
  parameter int ADC_LAT = ADC_LATENCY,
  localparam int CW     = $clog2(CELLS),
  localparam int SW     = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic                                 clk,
  input  logic                                 clk_fast,
  input  logic                                 rst,
  // analog front ends of all boards
  input  logic [NB-1:0][N_CH-1:0]              comp,
  input  logic [NB-1:0][N_CH-1:0][ADC_W-1:0]   adc,
  output logic [NB-1:0]                        drs_stop,
  output logic [NB-1:0]                        drs_rd,
  output logic [NB-1:0][CW-1:0]                drs_cell,
  // board configuration
  input  logic [NB-1:0][N_CH-1:0][ADC_W-1:0]   pedestal,
  input  logic [NB-1:0][N_CH-1:0][WGT_W-1:0]   weight,
  input  logic                                 invert,
  input  logic [15:0]                          stop_delay,
  // trigger configuration
  input  logic                                 trig_enable,
  input  logic signed [BSUM_W+SW-1:0]          threshold,
  input  logic [HC_W+SW-1:0]                   min_hits,
  input  logic [15:0]                          dead_time,
  input  logic                                 veto,
  // trigger bus (also to a master concentrator)
  output trig_bus_t                            trig_bus,
  input  logic                                 ext_trig_sel,  // 1: boards follow ext_trig_bus
  input  trig_bus_t                            ext_trig_bus,  // from a master concentrator
  output logic signed [BSUM_W+SW-1:0]          crate_sum,
  output logic [HC_W+SW-1:0]                   crate_nhit,
  output logic                                 crate_busy,
  output logic [31:0]                          n_vetoed,
  output logic [31:0]                          n_inhibited,
  // merged event stream of the data concentrator
  output logic                                 out_valid,
  input  logic                                 out_ready,
  output logic                                 out_last,
  output logic [DATA_W-1:0]                    out_data,
  output logic [SW-1:0]                        out_src,
  // TDC monitoring
  output logic [NB-1:0][N_CH-1:0]              tdc_hit,
  output logic [NB-1:0][N_CH-1:0][FINE_W-1:0]  tdc_fine,
  output logic [TS_W-1:0]                      tdc_coarse   // common time stamp (board 0)
);
  trig_word_t                     tw [NB];
  logic signed [NB-1:0][BSUM_W-1:0] t_sum;
  logic [NB-1:0][HC_W-1:0]        t_nhit;
  logic [NB-1:0]                  t_busy;
  logic [NB-1:0]                  ro_valid, ro_ready, ro_last;
  logic [NB-1:0][DATA_W-1:0]      ro_data;
  logic [TS_W-1:0]                coarse [NB];
  trig_bus_t                      board_bus;

  // Trigger source of the boards: this crate's TCB, or the trigger
  // distributed by the master of a multi-crate system.
  assign board_bus = ext_trig_sel ? ext_trig_bus : trig_bus;

  assign tdc_coarse = coarse[0];

  for (genvar b = 0; b < NB; b++) begin : g_wdb
    wdb #(.CELLS(CELLS), .ADC_LAT(ADC_LAT), .TDC_S(TDC_SAMPLES)) u_wdb (
      .clk, .clk_fast, .rst,
      .board_id(BOARD_ID_W'(b)),
      .comp(comp[b]), .adc(adc[b]),
      .drs_stop(drs_stop[b]), .drs_rd(drs_rd[b]), .drs_cell(drs_cell[b]),
      .pedestal(pedestal[b]), .weight(weight[b]), .invert, .stop_delay,
      .trig_word(tw[b]), .trig_bus(board_bus),
      .out_valid(ro_valid[b]), .out_ready(ro_ready[b]), .out_last(ro_last[b]), .out_data(ro_data[b]),
      .tdc_hit(tdc_hit[b]), .tdc_fine(tdc_fine[b]), .tdc_coarse(coarse[b])
    );
    assign t_sum[b]  = tw[b].sum;
    assign t_nhit[b] = tw[b].nhit;
    assign t_busy[b] = tw[b].busy;
  end

  tcb_trigger #(.N_IN(NB), .IN_W(BSUM_W), .HC_IN(HC_W), .EVT_W(EVT_W)) u_tcb (
    .clk, .rst,
    .in_sum(t_sum), .in_nhit(t_nhit), .in_busy(t_busy),
    .enable(trig_enable), .threshold, .min_hits, .dead_time, .veto,
    .trigger(trig_bus.trigger), .event_num(trig_bus.event_num),
    .sum_out(crate_sum), .nhit_out(crate_nhit), .busy_out(crate_busy),
    .n_vetoed, .n_inhibited
  );

  dcb_merger #(.N_IN(NB), .DATA_W(DATA_W)) u_dcb (
    .clk, .rst,
    .in_valid(ro_valid), .in_ready(ro_ready), .in_last(ro_last), .in_data(ro_data),
    .out_valid, .out_ready, .out_last, .out_data, .out_src
  );
endmodule
