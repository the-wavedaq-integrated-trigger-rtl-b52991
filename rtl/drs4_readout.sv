// drs4_readout: DRS4 acquisition and readout controller of one WaveDREAM.
//
// While idle the two DRS4 chips record the 16 inputs into their circular
// analog memories and the ADC samples the same inputs for the trigger.
// When the trigger bus carries a trigger, the controller waits a
// programmable stop delay (so the pulse that caused the trigger sits inside
// the analog memory window, whose depth the short trigger latency keeps
// small), then stops the DRS4 and raises busy.  It then reads the CELLS
// cells, oldest first, through the same ADC and sends one event packet:
// a header beat (evt_header_t: magic, board id, event number, cell count)
// followed by CELLS data beats, each holding one cell of all 16 channels
// (channel 0 in the low bits).  When the last beat has been accepted the
// DRS4 is restarted; busy drops ADC_LAT+5 clocks later, once the ADC and
// the trigger pipeline carry live samples again (while the DRS4 is read,
// the ADC digitizes stored cells, which the trigger must not act on).
//
// DRS4/ADC contract (this design's choice): drs_cell is counted from the
// stop position, 0 being the oldest sample; the sample asked for by a
// read request (drs_rd, drs_cell) in clock t is on `adc` in clock
// t+ADC_LATENCY.  Read requests are issued only while the output FIFO has
// room for every request in flight, so downstream back-pressure
// (out_ready low) stalls the readout without losing data.  The output is a
// valid/ready stream; out_last marks the last beat of a packet.
//
// Timing: drs_stop rises stop_delay+1 clocks after the trigger pulse; with
// no back-pressure the packet takes about CELLS+ADC_LATENCY+3 clocks.
// Triggers that arrive while busy are ignored.
module drs4_readout
  import wavedaq_pkg::*;
#(
  parameter int CELLS       = DRS_CELLS,
  parameter int ADC_LAT     = ADC_LATENCY,
  parameter int FIFO_DEPTH  = 64,
  localparam int CW         = $clog2(CELLS)
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [BOARD_ID_W-1:0]      board_id,
  input  trig_bus_t                  trig_bus,
  input  logic [15:0]                stop_delay,
  // DRS4 + ADC
  output logic                       drs_stop,
  output logic                       drs_rd,
  output logic [CW-1:0]              drs_cell,
  input  logic [N_CH-1:0][ADC_W-1:0] adc,
  // event packet stream toward the data concentrator
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic                       out_last,
  output logic [DATA_W-1:0]          out_data,
  output logic                       busy
);
  typedef enum logic [2:0] {S_IDLE, S_DELAY, S_HEADER, S_READ, S_DRAIN, S_REARM} state_t;
  localparam int FAW = $clog2(FIFO_DEPTH);
  // Clocks busy stays up after the DRS4 restarts: the ADC pipeline and the
  // 4-clock trigger pipeline must hold live samples again before the
  // concentrator may trust this board's trigger word.
  localparam int REARM = ADC_LAT + 4;

  state_t            state;
  logic [15:0]       delay_cnt;
  logic [EVT_W-1:0]  evt;
  logic [CW:0]       rd_cnt;        // read requests issued
  logic [CW:0]       out_cnt;       // beats of this packet accepted downstream
  logic [ADC_LAT-1:0] rd_pipe;       // requests in flight through the ADC
  logic [FAW:0]      inflight;
  logic              issue, capture;
  logic              f_push, f_pop, f_empty, f_full;
  logic [DATA_W-1:0] f_wdata;
  logic [FAW:0]      f_count;
  evt_header_t       hdr;

  assign hdr = '{magic: HDR_MAGIC, board_id: board_id, event_num: evt, n_cells: 16'(CELLS)};

  // Room for one more request: words held + requests in flight + this one.
  assign issue   = (state == S_READ) && (rd_cnt < (CW+1)'(CELLS)) &&
                   ((FAW+1)'(f_count) + inflight < (FAW+1)'(FIFO_DEPTH));
  assign capture = rd_pipe[ADC_LAT-1];

  assign drs_rd   = issue;
  assign drs_cell = rd_cnt[CW-1:0];

  always_comb begin
    f_push  = 1'b0;
    f_wdata = adc;
    if (state == S_HEADER) begin
      f_push  = 1'b1;
      f_wdata = DATA_W'(hdr);
    end else if (capture) begin
      f_push  = 1'b1;
    end
  end

  sync_fifo #(.W(DATA_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .push(f_push), .wdata(f_wdata), .pop(f_pop),
    .rdata(out_data), .empty(f_empty), .full(f_full), .count(f_count)
  );

  assign out_valid = !f_empty;
  assign f_pop     = out_valid && out_ready;
  assign out_last  = (out_cnt == (CW+1)'(CELLS));

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      delay_cnt <= '0;
      evt       <= '0;
      rd_cnt    <= '0;
      out_cnt   <= '0;
      rd_pipe   <= '0;
      inflight  <= '0;
      drs_stop  <= 1'b0;
      busy      <= 1'b0;
    end else begin
      rd_pipe  <= {rd_pipe[ADC_LAT-2:0], issue};
      inflight <= inflight + (FAW+1)'(issue) - (FAW+1)'(capture);
      if (issue) rd_cnt <= rd_cnt + 1'b1;
      if (f_pop) out_cnt <= out_last ? '0 : out_cnt + 1'b1;

      case (state)
        S_IDLE: if (trig_bus.trigger) begin
          evt       <= trig_bus.event_num;
          delay_cnt <= stop_delay;
          busy      <= 1'b1;
          state     <= S_DELAY;
        end
        S_DELAY: begin
          if (delay_cnt == '0) begin
            drs_stop <= 1'b1;
            state    <= S_HEADER;
          end else begin
            delay_cnt <= delay_cnt - 1'b1;
          end
        end
        S_HEADER: begin
          rd_cnt <= '0;
          state  <= S_READ;
        end
        S_READ: if (rd_cnt == (CW+1)'(CELLS)) state <= S_DRAIN;
        S_DRAIN: if (f_pop && out_last) begin
          drs_stop  <= 1'b0;
          delay_cnt <= 16'(REARM);
          state     <= S_REARM;
        end
        S_REARM: begin
          if (delay_cnt == '0) begin
            busy  <= 1'b0;
            state <= S_IDLE;
          end else begin
            delay_cnt <= delay_cnt - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The FIFO must never overflow thanks to the request credit.
  always_ff @(posedge clk) begin
    if (!rst) assert (!(f_push && f_full)) else $error("drs4_readout: FIFO overflow");
  end
endmodule
