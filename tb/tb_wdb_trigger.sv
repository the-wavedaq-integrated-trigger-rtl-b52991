// tb_wdb_trigger: self-checking test of the board trigger pre-processing.
// Random ADC samples, pedestals, weights, polarity, hit masks and busy
// are applied; the expected trigger word (weighted pedestal-subtracted
// sum four clocks later, hit count HIT_DELAY+1 clocks later, busy one
// clock later) is computed here from the stimulus history.
module tb_wdb_trigger;
  import wavedaq_pkg::*;
  localparam int HD = ADC_LATENCY + 1;
  logic clk = 0, rst = 1;
  logic [N_CH-1:0][ADC_W-1:0] adc, ped;
  logic [N_CH-1:0][WGT_W-1:0] wgt;
  logic inv, busy;
  logic [N_CH-1:0] hits;
  trig_word_t tw;
  int checks = 0, failures = 0;
  longint sum_h [int];
  int nhit_h [int], busy_h [int];

  wdb_trigger #(.HIT_DELAY(HD)) dut (.clk, .rst, .adc, .pedestal(ped), .weight(wgt), .invert(inv),
    .tdc_hit(hits), .busy, .trig_word(tw));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    adc = '0; ped = '0; wgt = '0; inv = 0; busy = 0; hits = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 600; t++) begin
      longint s;
      if (t % 100 == 0) begin
        inv = 1'($urandom);
        for (int c = 0; c < N_CH; c++) begin ped[c] = 12'($urandom_range(100, 3000)); wgt[c] = 8'($urandom); end
      end
      s = 0;
      for (int c = 0; c < N_CH; c++) begin
        adc[c] = 12'($urandom);
        s += (inv ? longint'(ped[c]) - longint'(adc[c]) : longint'(adc[c]) - longint'(ped[c])) * longint'(wgt[c]);
      end
      hits = 16'($urandom) & 16'($urandom);
      busy = 1'($urandom);
      sum_h[t] = s; nhit_h[t] = $countones(hits); busy_h[t] = busy;
      // a weight or polarity change takes effect on the samples already in flight
      @(negedge clk);
      if (t >= 4 && (t % 100) >= 4) begin
        checks++;
        if (longint'(tw.sum) != sum_h[t-3]) begin
          failures++; if (failures < 5) $display("t=%0d sum %0d exp %0d", t, tw.sum, sum_h[t-3]);
        end
      end
      if (t >= HD) begin
        checks++;
        if (int'(tw.nhit) != nhit_h[t-HD]) begin failures++; if (failures < 5) $display("t=%0d nhit %0d exp %0d", t, tw.nhit, nhit_h[t-HD]); end
      end
      checks++;
      if (int'(tw.busy) != busy_h[t]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
