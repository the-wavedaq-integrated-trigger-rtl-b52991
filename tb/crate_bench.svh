// crate_bench.svh: body shared by the crate testbenches.  The including
// module declares NB and CELLS and instantiates the crate as `dut`.
//
// The bench models every board's DRS4 and ADCs (drs4_adc_model) and
// drives detector pulses: a pulse lowers the input of chosen channels by
// a fixed amplitude for PULSE_LEN clocks (negative-going, as detector
// signals are) and raises their comparators at a chosen fast-clock bin.
// Each scenario checks the trigger (or its absence), its latency, the TDC
// fine time, and every event packet that comes out of the data
// concentrator against the pulse history.

  localparam int ADC_LAT   = 16;
  localparam int PULSE_LEN = 8;
  localparam int PED       = 2000;
  localparam int WGT       = 2;
  localparam int MAXP      = 64;
  localparam int SWB       = (NB > 1) ? $clog2(NB) : 1;

  logic clk = 0, clk_fast = 0, rst = 1;
  logic [NB-1:0][N_CH-1:0]            comp;
  logic [NB-1:0][N_CH-1:0][ADC_W-1:0] adc, analog;
  logic [NB-1:0]                      drs_stop, drs_rd;
  logic [NB-1:0][$clog2(CELLS)-1:0]   drs_cell;
  logic [NB-1:0][N_CH-1:0][ADC_W-1:0] pedestal;
  logic [NB-1:0][N_CH-1:0][WGT_W-1:0] weight;
  logic [15:0]                        stop_delay, dead_time;
  logic                               trig_enable, veto, out_ready;
  logic                               invert = 1'b1;   // pulses are negative-going
  logic signed [BSUM_W+SWB-1:0]       threshold;
  logic [HC_W+SWB-1:0]                min_hits;
  trig_bus_t                          trig_bus, ext_trig_bus;
  logic                               ext_trig_sel;
  logic signed [BSUM_W+SWB-1:0]       crate_sum;
  logic [HC_W+SWB-1:0]                crate_nhit;
  logic                               crate_busy, out_valid, out_last;
  logic [31:0]                        n_vetoed, n_inhibited;
  logic [DATA_W-1:0]                  out_data;
  logic [SWB-1:0]                     out_src;
  logic [NB-1:0][N_CH-1:0]            tdc_hit;
  logic [NB-1:0][N_CH-1:0][FINE_W-1:0] tdc_fine;
  logic [TS_W-1:0]                    tdc_coarse;

  for (genvar b = 0; b < NB; b++) begin : g_model
    drs4_adc_model #(.N_CH(N_CH), .ADC_W(ADC_W), .CELLS(CELLS), .ADC_LAT(ADC_LAT)) u_m (
      .clk, .analog(analog[b]), .drs_stop(drs_stop[b]), .drs_rd(drs_rd[b]),
      .drs_cell(drs_cell[b]), .adc(adc[b]));
  end

  // pulse history
  int p_n = 0;
  int p_start [MAXP], p_amp [MAXP], p_off [MAXP];
  logic [NB-1:0][N_CH-1:0] p_mask [MAXP];

  int checks = 0, failures = 0;
  int cyc = 0, fcyc = 0;
  int n_trig = 0, n_veto_seen = 0, n_busy_seen = 0, n_hits_seen = 0, n_stall = 0,
      n_below = 0, n_packets = 0, n_arb = 0, n_tdc = 0, n_ext = 0;

  function automatic int f(int b, int c, int t);
    int v;
    v = PED + ((t * 7 + c * 13 + b * 5) % 8);
    for (int i = 0; i < p_n; i++)
      if (p_mask[i][b][c] && t >= p_start[i] && t < p_start[i] + PULSE_LEN) v -= p_amp[i];
    return v;
  endfunction

  // the two clocks: clk_fast = TDC_SAMPLES x clk, rising edges aligned
  initial forever begin #1 clk_fast = ~clk_fast; end
  initial begin
    #1;
    forever begin clk = 1; #(TDC_SAMPLES); clk = 0; #(TDC_SAMPLES); end
  end
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk_fast) fcyc <= fcyc + 1;

  always_comb
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < N_CH; c++) analog[b][c] = ADC_W'(f(b, c, cyc));

  // comparators follow the pulses at fast-clock resolution
  always @(negedge clk_fast) begin
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < N_CH; c++) begin
        logic v;
        v = 1'b0;
        for (int i = 0; i < p_n; i++)
          if (p_mask[i][b][c] && fcyc >= p_start[i] * TDC_SAMPLES + p_off[i] &&
              fcyc < (p_start[i] + PULSE_LEN) * TDC_SAMPLES) v = 1'b1;
        comp[b][c] <= v;
      end
  end

  // back-pressure on the concentrator output
  int ready_pct = 100;
  always @(negedge clk) out_ready <= ($urandom_range(0, 99) < ready_pct);
  always @(posedge clk) if (!rst && out_valid && !out_ready) n_stall++;

  // TDC: every hit must carry the fine time of the pulse that caused it
  always @(negedge clk) if (!rst)
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < N_CH; c++)
        if (tdc_hit[b][c] && p_n > 0) begin
          checks++; n_tdc++;
          if (int'(tdc_fine[b][c]) != p_off[p_n-1]) begin
            failures++;
            if (failures < 8) $display("tdc b%0d c%0d fine %0d off %0d", b, c, tdc_fine[b][c], p_off[p_n-1]);
          end
        end

  // add a pulse starting at clock `start` (absolute cycle number)
  task automatic add_pulse(input int start, input int amp, input int off,
                           input logic [NB-1:0][N_CH-1:0] mask);
    p_start[p_n] = start; p_amp[p_n] = amp; p_off[p_n] = off; p_mask[p_n] = mask;
    p_n++;
  endtask

  function automatic logic [NB-1:0][N_CH-1:0] pmask(int nboards, int nch);
    logic [NB-1:0][N_CH-1:0] m;
    m = '0;
    for (int b = 0; b < nboards && b < NB; b++)
      for (int c = 0; c < nch; c++) m[b][c] = 1'b1;
    return m;
  endfunction

  // wait up to `window` clocks for a trigger; returns its clock or -1
  task automatic wait_trigger(input int window, output int at);
    at = -1;
    repeat (window) begin
      @(negedge clk);
      if (trig_bus.trigger) begin at = cyc; return; end
    end
  endtask

  // collect the NB packets of one event and check them
  task automatic collect_event(input int evn, input int stop_cyc);
    logic [NB-1:0] seen;
    int beats, src, last_src;
    evt_header_t h;
    seen = '0; last_src = -1;
    for (int p = 0; p < NB; p++) begin
      beats = 0;
      forever begin
        @(posedge clk);
        if (out_valid && out_ready) begin
          src = int'(out_src);
          if (beats == 0) begin
            h = evt_header_t'(out_data[$bits(evt_header_t)-1:0]);
            checks++;
            if (h.magic != HDR_MAGIC || int'(h.board_id) != src || h.event_num != 16'(evn) ||
                h.n_cells != 16'(CELLS) || seen[src]) begin
              failures++; $display("bad header %h from %0d", h, src);
            end
            seen[src] = 1'b1;
            if (last_src != -1 && src != last_src) n_arb++;
            last_src = src;
          end else begin
            checks++;
            for (int c = 0; c < N_CH; c++)
              if (int'(out_data[c*ADC_W +: ADC_W]) != f(src, c, stop_cyc - CELLS - 1 + beats)) begin
                failures++;
                if (failures < 8) $display("board %0d beat %0d ch %0d: %0d exp %0d", src, beats, c,
                    out_data[c*ADC_W +: ADC_W], f(src, c, stop_cyc - CELLS - 1 + beats));
                break;
              end
          end
          beats++;
          if (out_last) break;
        end
      end
      checks++;
      if (beats != CELLS + 1) begin failures++; $display("packet of %0d beats", beats); end
      n_packets++;
    end
    checks++;
    if (seen != '1) failures++;
  endtask


  // one triggered event; returns after its packets are checked
  task automatic triggered_event(input int amp, input int off, input int nb, input int nch,
                                 input int delay, input int rdy, input bit busy_pulse);
    int t0, at, stop_cyc, i0;
    stop_delay = 16'(delay);
    ready_pct = rdy;
    t0 = cyc + 5;
    add_pulse(t0, amp, off, pmask(nb, nch));
    wait_trigger(200, at);
    checks++;
    if (at < 0) begin failures++; $display("no trigger"); return; end
    n_trig++;
    // latency: analog pulse at t0, ADC pipeline, 4 board clocks, 2 TCB clocks
    checks++;
    if (at - t0 != ADC_LAT + 6) begin failures++; $display("trigger latency %0d", at - t0); end
    checks++;
    if ((at - t0) * 12.5 > 700.0) failures++;
    checks++;
    if (int'(trig_bus.event_num) != n_trig - 1) failures++;
    i0 = int'(n_inhibited);
    // a second pulse right after the trigger: the boards are already busy
    // (stop delay running), so it must be counted as inhibited, not
    // triggered; it is recorded in the analog memory like any signal
    if (busy_pulse) add_pulse(cyc + 1, amp, off, pmask(nb, nch));
    while (!drs_stop[0]) @(negedge clk);
    stop_cyc = cyc;
    checks++;
    if (stop_cyc - at != delay + 2) begin failures++; $display("stop after %0d", stop_cyc - at); end
    collect_event(n_trig - 1, stop_cyc);
    // conditions seen while busy (the stored pulse replayed through the
    // ADC, or the new one) were inhibited, not triggered
    if (busy_pulse) begin
      checks++;
      if (int'(n_inhibited) == i0) begin failures++; $display("not inhibited %0d", i0); end else n_busy_seen++;
    end
    repeat (CELLS + 40) @(negedge clk);
    checks++;
    if (crate_busy || drs_stop != '0) failures++;
  endtask

  // a pulse that must not trigger
  task automatic quiet_pulse(input int amp, input int off, input int nb, input int nch, output bit ok);
    int at;
    add_pulse(cyc + 5, amp, off, pmask(nb, nch));
    wait_trigger(60, at);
    ok = (at < 0);
    checks++;
    if (!ok) failures++;
    repeat (CELLS + 40) @(negedge clk);
  endtask

  // external-trigger mode: the crate's own decision must not start a
  // readout, the trigger from ext_trig_bus must
  task automatic ext_event(input int evn);
    int at, stop_cyc;
    ext_trig_sel = 1'b1;
    ready_pct = 100;
    add_pulse(cyc + 5, 400, 9, pmask(2, 4));
    wait_trigger(60, at);
    checks++;
    if (at < 0) failures++;               // the local TCB still decides
    n_trig++;
    repeat (10) @(negedge clk);
    checks++;
    if (drs_stop != '0 || crate_busy) failures++;   // but the boards ignore it
    repeat (CELLS + 40) @(negedge clk);
    ext_trig_bus = '{trigger: 1'b1, event_num: 16'(evn)};
    @(negedge clk);
    ext_trig_bus = '0;
    while (!drs_stop[0]) @(negedge clk);
    stop_cyc = cyc;
    collect_event(evn, stop_cyc);
    n_ext++;
    repeat (CELLS + 40) @(negedge clk);
    ext_trig_sel = 1'b0;
  endtask

  initial begin
    #(64'd56 * 64'd3000000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok;
    int v0;
    comp = '0;
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < N_CH; c++) begin pedestal[b][c] = 12'(PED); weight[b][c] = 8'(WGT); end
    ext_trig_sel = 1'b0; ext_trig_bus = '0;
    stop_delay = 16'd4; dead_time = 16'd8; trig_enable = 1; veto = 0;
    threshold = 3000; min_hits = 4;
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (CELLS + 20) @(negedge clk);   // fill the analog memories

    // 1. plain event, no back-pressure
    triggered_event(400, 3, 2, 4, 4, 100, 0);
    // 2. veto: same pulse, no trigger, vetoed counter moves
    veto = 1; v0 = int'(n_vetoed);
    quiet_pulse(400, 5, 2, 4, ok);
    veto = 0;
    checks++;
    if (int'(n_vetoed) == v0) failures++; else n_veto_seen++;
    // 3. too few comparator hits for min_hits
    min_hits = 12;
    quiet_pulse(900, 7, 1, 3, ok);
    if (ok) n_hits_seen++;
    min_hits = 4;
    // 4. below threshold
    quiet_pulse(50, 2, 2, 4, ok);
    if (ok) n_below++;
    // 5. event with back-pressure and a pulse during busy
    triggered_event(300, 11, NB, 2, 10, 40, 1);
    // 6. another plain event with a different fine time
    triggered_event(500, 20, 1, 8, 0, 80, 0);
    // 7. boards driven by an external (master) trigger
    ext_event(16'h1234);

    $display("triggers=%0d vetoed=%0d busy_inhibit=%0d min_hits_reject=%0d below=%0d stalls=%0d packets=%0d arbitration_switches=%0d tdc_hits=%0d external=%0d",
             n_trig, n_veto_seen, n_busy_seen, n_hits_seen, n_below, n_stall, n_packets, n_arb, n_tdc, n_ext);
    checks++; if (n_trig != 4) failures++;
    checks++; if (n_ext != 1) failures++;
    checks++; if (n_veto_seen == 0) failures++;
    checks++; if (n_busy_seen == 0) failures++;
    checks++; if (n_hits_seen == 0) failures++;
    checks++; if (n_below == 0) failures++;
    checks++; if (n_stall == 0) failures++;
    checks++; if (n_packets != 4 * NB) failures++;
    checks++; if (NB > 1 && n_arb == 0) failures++;
    checks++; if (n_tdc == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
