// tb_two_crates: a two-crate system like the prototype of the paper's
// beam tests: two WaveDREAM crates whose concentrators forward their sums,
// hit counts and busy to a master concentrator (a tcb_trigger over two
// inputs), whose trigger is distributed back to both crates (ext_trig_bus).
// Size reduced to 4 boards per crate and 128 DRS4 cells to keep the run
// short.  Checks: a pulse shared by the two crates, below threshold in
// each crate alone, triggers the master; both crates then read out with
// the master's event number and correct data; the master's latency is one
// clock more than a single crate's; a second pulse during the readout is
// inhibited by the forwarded busy.
module tb_two_crates;
  import wavedaq_pkg::*;
  localparam int NC = 2, NB = 4, CELLS = 128, ADC_LAT = ADC_LATENCY, PED = 2000, WGT = 2;
  localparam int SWB = $clog2(NB);
  localparam int CS_W = BSUM_W + SWB, CH_W = HC_W + SWB;

  logic clk = 0, clk_fast = 0, rst = 1;
  logic [NC-1:0][NB-1:0][N_CH-1:0]            comp;
  logic [NC-1:0][NB-1:0][N_CH-1:0][ADC_W-1:0] adc, analog;
  logic [NC-1:0][NB-1:0]                      drs_stop, drs_rd;
  logic [NC-1:0][NB-1:0][$clog2(CELLS)-1:0]   drs_cell;
  logic [NB-1:0][N_CH-1:0][ADC_W-1:0]         pedestal;
  logic [NB-1:0][N_CH-1:0][WGT_W-1:0]         weight;
  trig_bus_t                                  c_bus [NC];
  trig_bus_t                                  m_bus;
  logic signed [NC-1:0][CS_W-1:0]             c_sum;
  logic [NC-1:0][CH_W-1:0]                    c_nhit;
  logic [NC-1:0]                              c_busy;
  logic [NC-1:0]                              o_valid, o_last;
  logic [NC-1:0]                              o_ready = '1;
  logic [NC-1:0][DATA_W-1:0]                  o_data;
  logic [NC-1:0][SWB-1:0]                     o_src;
  logic [31:0]                                m_vetoed, m_inhibited;
  logic signed [CS_W:0]                       m_sum;
  logic [CH_W:0]                              m_nhit;
  logic                                       m_busy;
  int checks = 0, failures = 0, cyc = 0;
  int p_n = 0, p_start [8], p_amp [8];
  logic [NC-1:0][NB-1:0][N_CH-1:0] p_mask [8];

  function automatic int f(int k, int b, int c, int t);
    int v;
    v = PED + ((t * 3 + c * 11 + b * 5 + k) % 8);
    for (int i = 0; i < p_n; i++)
      if (p_mask[i][k][b][c] && t >= p_start[i] && t < p_start[i] + 8) v -= p_amp[i];
    return v;
  endfunction

  initial forever begin #1 clk_fast = ~clk_fast; end
  initial begin #1; forever begin clk = 1; #(TDC_SAMPLES); clk = 0; #(TDC_SAMPLES); end end
  always @(posedge clk) cyc <= cyc + 1;
  always_comb
    for (int k = 0; k < NC; k++)
      for (int b = 0; b < NB; b++)
        for (int c = 0; c < N_CH; c++) analog[k][b][c] = ADC_W'(f(k, b, c, cyc));
  // comparators fire with the pulses, five TDC bins into their first clock
  int fcyc = 0;
  always @(posedge clk_fast) fcyc <= fcyc + 1;
  always @(negedge clk_fast)
    for (int k = 0; k < NC; k++)
      for (int b = 0; b < NB; b++)
        for (int c = 0; c < N_CH; c++) begin
          logic v; v = 1'b0;
          for (int i = 0; i < p_n; i++)
            if (p_mask[i][k][b][c] && fcyc >= p_start[i] * TDC_SAMPLES + 5 && fcyc < (p_start[i] + 8) * TDC_SAMPLES) v = 1'b1;
          comp[k][b][c] <= v;
        end

  for (genvar k = 0; k < NC; k++) begin : g_crate
    for (genvar b = 0; b < NB; b++) begin : g_m
      drs4_adc_model #(.N_CH(N_CH), .ADC_W(ADC_W), .CELLS(CELLS), .ADC_LAT(ADC_LAT)) u_m (
        .clk, .analog(analog[k][b]), .drs_stop(drs_stop[k][b]), .drs_rd(drs_rd[k][b]),
        .drs_cell(drs_cell[k][b]), .adc(adc[k][b]));
    end
    logic [31:0] nv, ni;
    logic [NB-1:0][N_CH-1:0] th;
    logic [NB-1:0][N_CH-1:0][FINE_W-1:0] tf;
    logic [TS_W-1:0] tc;
    wavedaq_crate #(.NB(NB), .CELLS(CELLS)) u_crate (
      .clk, .clk_fast, .rst, .comp(comp[k]), .adc(adc[k]),
      .drs_stop(drs_stop[k]), .drs_rd(drs_rd[k]), .drs_cell(drs_cell[k]),
      .pedestal, .weight, .invert(1'b1), .stop_delay(16'd6),
      .trig_enable(1'b1), .threshold(CS_W'(3000)), .min_hits('0), .dead_time(16'd8), .veto(1'b0),
      .trig_bus(c_bus[k]), .ext_trig_sel(1'b1), .ext_trig_bus(m_bus),
      .crate_sum(c_sum[k]), .crate_nhit(c_nhit[k]), .crate_busy(c_busy[k]),
      .n_vetoed(nv), .n_inhibited(ni),
      .out_valid(o_valid[k]), .out_ready(o_ready[k]), .out_last(o_last[k]), .out_data(o_data[k]), .out_src(o_src[k]),
      .tdc_hit(th), .tdc_fine(tf), .tdc_coarse(tc));
  end

  tcb_trigger #(.N_IN(NC), .IN_W(CS_W), .HC_IN(CH_W), .EVT_W(EVT_W)) u_master (
    .clk, .rst, .in_sum(c_sum), .in_nhit(c_nhit), .in_busy(c_busy),
    .enable(1'b1), .threshold((CS_W+1)'(3000)), .min_hits((CH_W+1)'(4)), .dead_time(16'd8), .veto(1'b0),
    .trigger(m_bus.trigger), .event_num(m_bus.event_num),
    .sum_out(m_sum), .nhit_out(m_nhit), .busy_out(m_busy),
    .n_vetoed(m_vetoed), .n_inhibited(m_inhibited));

  initial begin
    #(64'd56 * 64'd200000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // read one crate's event: NB packets, all with event number evn
  task automatic collect(input int k, input int evn, input int stop_cyc, output int npk);
    int beats;
    evt_header_t h;
    npk = 0;
    for (int p = 0; p < NB; p++) begin
      beats = 0;
      forever begin
        @(posedge clk);
        if (o_valid[k] && o_ready[k]) begin
          if (beats == 0) begin
            h = evt_header_t'(o_data[k][$bits(evt_header_t)-1:0]);
            checks++;
            if (h.magic != HDR_MAGIC || h.event_num != 16'(evn) || int'(h.board_id) != int'(o_src[k])) failures++;
          end else begin
            checks++;
            for (int c = 0; c < N_CH; c++)
              if (int'(o_data[k][c*ADC_W +: ADC_W]) != f(k, int'(o_src[k]), c, stop_cyc - CELLS - 1 + beats)) begin
                failures++; break;
              end
          end
          beats++;
          if (o_last[k]) break;
        end
      end
      checks++; if (beats != CELLS + 1) failures++;
      npk++;
    end
  endtask

  task automatic shared_event(input int evn, input int amp_a, input int amp_b, input bit second);
    int t0, at, stop_cyc, npk0, npk1, i0;
    logic [NC-1:0][NB-1:0][N_CH-1:0] m;
    t0 = cyc + 5;
    m = '0;
    for (int c = 0; c < 4; c++) begin m[0][0][c] = (amp_a != 0); m[1][1][c] = (amp_b != 0); end
    // crate 0 gets amp_a on 4 channels, crate 1 amp_b on 4 channels
    p_start[p_n] = t0; p_amp[p_n] = amp_a; p_mask[p_n] = '0;
    for (int c = 0; c < 4; c++) p_mask[p_n][0][0][c] = (amp_a != 0);
    p_n++;
    p_start[p_n] = t0; p_amp[p_n] = amp_b; p_mask[p_n] = '0;
    for (int c = 0; c < 4; c++) p_mask[p_n][1][1][c] = (amp_b != 0);
    p_n++;
    at = -1;
    repeat (100) begin @(negedge clk); if (m_bus.trigger) begin at = cyc; break; end end
    checks++;
    if (at < 0) begin failures++; $display("master did not trigger"); return; end
    checks++;
    if (at - t0 != ADC_LAT + 7) begin failures++; $display("master latency %0d", at - t0); end
    checks++;
    if (int'(m_bus.event_num) != evn) failures++;
    // each crate alone stays below threshold when the pulse is shared
    checks++;
    if (amp_a != 0 && amp_b != 0 && (c_bus[0].trigger || c_bus[1].trigger)) failures++;
    i0 = int'(m_inhibited);
    if (second) begin
      p_start[p_n] = cyc + 1; p_amp[p_n] = amp_a + amp_b; p_mask[p_n] = m; p_n++;
    end
    while (!drs_stop[0][0]) @(negedge clk);
    stop_cyc = cyc;
    checks++;
    if (drs_stop != '1) failures++;       // every board of both crates stopped
    fork
      collect(0, evn, stop_cyc, npk0);
      collect(1, evn, stop_cyc, npk1);
    join
    checks++;
    if (npk0 != NB || npk1 != NB) failures++;
    if (second) begin
      checks++;
      if (int'(m_inhibited) == i0) begin failures++; $display("second pulse not inhibited"); end
    end
    repeat (CELLS + 40) @(negedge clk);
  endtask

  initial begin
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < N_CH; c++) begin pedestal[b][c] = 12'(PED); weight[b][c] = 8'(WGT); end
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (CELLS + 20) @(negedge clk);
    shared_event(0, 300, 300, 0);   // 2400 + 2400 counts: each crate below 3000, together above
    shared_event(1, 0, 600, 1);     // one crate alone, plus a pulse during busy
    shared_event(2, 350, 250, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
