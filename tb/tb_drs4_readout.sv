// tb_drs4_readout: self-checking test of the DRS4 readout controller with
// a behavioural DRS4/ADC model.  The input of channel c in clock t is a
// known function f(c, t), so the expected content of every cell after the
// stop is computed here.  Checks: stop delay, busy, header fields, beat
// count, every sample, `last` on the final beat, that random output
// back-pressure loses nothing, and that a trigger during busy is ignored.
module tb_drs4_readout;
  import wavedaq_pkg::*;
  localparam int CELLS = 64;
  localparam int LAT   = 16;
  logic clk = 0, rst = 1;
  trig_bus_t tb_bus;
  logic [15:0] stop_delay;
  logic drs_stop, drs_rd;
  logic [5:0] drs_cell;
  logic [N_CH-1:0][ADC_W-1:0] adc, analog;
  logic out_valid, out_ready, out_last, busy;
  logic [DATA_W-1:0] out_data;
  int checks = 0, failures = 0;
  int cyc = 0, stop_cyc, trig_cyc, stalls = 0;

  drs4_readout #(.CELLS(CELLS), .ADC_LAT(LAT)) dut (
    .clk, .rst, .board_id(8'd5), .trig_bus(tb_bus), .stop_delay,
    .drs_stop, .drs_rd, .drs_cell, .adc,
    .out_valid, .out_ready, .out_last, .out_data, .busy);

  drs4_adc_model #(.N_CH(N_CH), .ADC_W(ADC_W), .CELLS(CELLS), .ADC_LAT(LAT)) u_model (
    .clk, .analog, .drs_stop, .drs_rd, .drs_cell, .adc);

  function automatic logic [ADC_W-1:0] f(int c, int t);
    return ADC_W'(t * 7 + c * 131);
  endfunction

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always_comb for (int c = 0; c < N_CH; c++) analog[c] = f(c, cyc);

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_event(input int evn, input int delay, input int ready_pct);
    int beats;
    evt_header_t h;
    tb_bus = '{trigger: 1'b1, event_num: 16'(evn)};
    stop_delay = 16'(delay);
    @(negedge clk);
    trig_cyc = cyc - 1;
    tb_bus.trigger = 1'b0;
    checks++; if (!busy) failures++;
    while (!drs_stop) @(negedge clk);
    stop_cyc = cyc;
    checks++;
    if (stop_cyc - trig_cyc != delay + 2) begin
      failures++; $display("stop delay %0d exp %0d", stop_cyc - trig_cyc, delay + 2);
    end
    beats = 0;
    // a second trigger while busy must be ignored
    tb_bus = '{trigger: 1'b1, event_num: 16'hBEEF};
    @(negedge clk); tb_bus.trigger = 1'b0;
    forever begin
      out_ready = ($urandom_range(0, 99) < ready_pct);
      #1;
      if (out_valid && !out_ready) stalls++;
      @(posedge clk);
      if (out_valid && out_ready) begin
        if (beats == 0) begin
          h = evt_header_t'(out_data[$bits(evt_header_t)-1:0]);
          checks++;
          if (h.magic != HDR_MAGIC || h.board_id != 8'd5 || h.event_num != 16'(evn) || h.n_cells != 16'(CELLS)) begin
            failures++; $display("bad header %h", h);
          end
        end else begin
          checks++;
          // cells hold the inputs of the CELLS clocks before the stop
          for (int c = 0; c < N_CH; c++)
            if (out_data[c*ADC_W +: ADC_W] != f(c, stop_cyc - CELLS - 1 + beats)) begin
              failures++;
              if (failures < 5) $display("beat %0d ch %0d got %0d exp %0d", beats, c, out_data[c*ADC_W +: ADC_W], f(c, stop_cyc - CELLS - 1 + beats));
              break;
            end
        end
        checks++;
        if (out_last != (beats == CELLS)) failures++;
        beats++;
        if (out_last) break;
      end
      @(negedge clk);
    end
    @(negedge clk);
    out_ready = 0;
    checks++;
    if (!busy || drs_stop || beats != CELLS + 1) begin failures++; $display("end: busy=%0d beats=%0d", busy, beats); end
    repeat (LAT + 4) @(negedge clk);
    checks++; if (!busy) failures++;       // still re-arming
    @(negedge clk);
    checks++; if (busy) failures++;
    repeat (CELLS + 5) @(negedge clk);   // refill the analog memory
    checks++;
    if (out_valid) failures++;            // the ignored trigger produced nothing
  endtask

  initial begin
    tb_bus = '0; stop_delay = 0; out_ready = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (CELLS + 10) @(negedge clk);
    run_event(1, 0, 100);
    run_event(2, 5, 50);
    run_event(3, 20, 20);
    checks++;
    if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
