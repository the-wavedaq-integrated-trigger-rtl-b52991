// tb_wdb: self-checking test of one WaveDREAM board's logic with a
// behavioural DRS4/ADC model.  A detector pulse on some channels must
// show up in the board's trigger word as the weighted sum of the
// pedestal-subtracted amplitudes, with the comparator hit count in the
// same word (both ADC_LATENCY+4 clocks after the pulse), the TDC fine time
// must equal the pulse's fast-clock bin, and a trigger on the bus must
// produce one event packet whose cells match the input history, with busy
// reported in the trigger word meanwhile.
module tb_wdb;
  import wavedaq_pkg::*;
  localparam int CELLS = 64, LAT = ADC_LATENCY, PED = 1500, AMP = 250, NCH_P = 5, OFF = 17;
  logic clk = 0, clk_fast = 0, rst = 1;
  logic [N_CH-1:0] comp = '0;
  logic [N_CH-1:0][ADC_W-1:0] adc, analog, pedestal;
  logic [N_CH-1:0][WGT_W-1:0] weight;
  logic drs_stop, drs_rd;
  logic [5:0] drs_cell;
  trig_word_t tw;
  trig_bus_t tbus;
  logic out_valid, out_ready, out_last;
  logic [DATA_W-1:0] out_data;
  logic [N_CH-1:0] tdc_hit;
  logic [N_CH-1:0][FINE_W-1:0] tdc_fine;
  logic [TS_W-1:0] tdc_coarse;
  int checks = 0, failures = 0, cyc = 0, fcyc = 0, p0 = -1000;

  wdb #(.CELLS(CELLS)) dut (.clk, .clk_fast, .rst, .board_id(8'd9), .comp, .adc, .drs_stop, .drs_rd, .drs_cell,
    .pedestal, .weight, .invert(1'b1), .stop_delay(16'd3), .trig_word(tw), .trig_bus(tbus),
    .out_valid, .out_ready, .out_last, .out_data, .tdc_hit, .tdc_fine, .tdc_coarse);
  drs4_adc_model #(.N_CH(N_CH), .ADC_W(ADC_W), .CELLS(CELLS), .ADC_LAT(LAT)) u_m (
    .clk, .analog, .drs_stop, .drs_rd, .drs_cell, .adc);

  function automatic int f(int c, int t);
    return PED - ((c < NCH_P && t >= p0 && t < p0 + 6) ? AMP : 0);
  endfunction

  initial forever begin #1 clk_fast = ~clk_fast; end
  initial begin #1; forever begin clk = 1; #(TDC_SAMPLES); clk = 0; #(TDC_SAMPLES); end end
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk_fast) fcyc <= fcyc + 1;
  always_comb for (int c = 0; c < N_CH; c++) analog[c] = ADC_W'(f(c, cyc));
  always @(negedge clk_fast)
    for (int c = 0; c < N_CH; c++)
      comp[c] <= (c < NCH_P) && fcyc >= p0 * TDC_SAMPLES + OFF && fcyc < (p0 + 6) * TDC_SAMPLES;

  initial begin
    #(64'd56 * 64'd100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int beats, stop_cyc, seen_hit;
    for (int c = 0; c < N_CH; c++) begin pedestal[c] = 12'(PED); weight[c] = 8'(c + 1); end
    tbus = '0; out_ready = 1;
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (CELLS + 10) @(negedge clk);
    p0 = cyc + 2;
    seen_hit = 0;
    repeat (40) begin
      @(negedge clk);
      if (tdc_hit != '0) begin
        checks++; seen_hit++;
        if (tdc_hit != N_CH'((1 << NCH_P) - 1) || cyc - p0 != 2) begin failures++; $display("hit at %0d", cyc - p0); end
        for (int c = 0; c < NCH_P; c++) begin checks++; if (int'(tdc_fine[c]) != OFF) failures++; end
      end
      // trigger word: the pulse amplitude x weights, hits in the same clock
      checks++;
      if (cyc - p0 >= LAT + 4 && cyc - p0 < LAT + 10) begin
        int e; e = 0;
        for (int c = 0; c < NCH_P; c++) e += AMP * (c + 1);
        if (int'(tw.sum) != e || int'(tw.nhit) != ((cyc - p0 == LAT + 4) ? NCH_P : 0)) begin
          failures++; $display("cyc-p0=%0d sum %0d exp %0d nhit %0d", cyc - p0, int'(tw.sum), e, tw.nhit);
        end
      end else if (tw.sum != 0 || tw.nhit != 0) begin
        failures++; $display("cyc-p0=%0d sum %0d nhit %0d", cyc - p0, tw.sum, tw.nhit);
      end
    end
    checks++; if (seen_hit != 1) failures++;
    // trigger and readout
    tbus = '{trigger: 1'b1, event_num: 16'd77};
    @(negedge clk); tbus = '0;
    while (!drs_stop) @(negedge clk);
    stop_cyc = cyc;
    beats = 0;
    forever begin
      out_ready = 1'($urandom);
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (beats == 0) begin
          evt_header_t h;
          h = evt_header_t'(out_data[$bits(evt_header_t)-1:0]);
          if (h.board_id != 8'd9 || h.event_num != 16'd77 || h.n_cells != 16'(CELLS)) failures++;
        end else begin
          for (int c = 0; c < N_CH; c++)
            if (int'(out_data[c*ADC_W +: ADC_W]) != f(c, stop_cyc - CELLS - 1 + beats)) begin failures++; break; end
        end
        beats++;
        if (out_last) break;
      end
      @(negedge clk);
      checks++; if (!tw.busy) failures++;
    end
    checks++; if (beats != CELLS + 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
