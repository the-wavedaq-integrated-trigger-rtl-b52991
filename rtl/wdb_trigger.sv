// wdb_trigger: board-level trigger pre-processing of one WaveDREAM board.
//
// While the DRS4 records, the ADC samples every channel continuously at
// 80 MSPS.  Each sample is pedestal-subtracted (pedestal_sub), the 16
// channels are combined into one weighted sum (weighted_sum), and the
// result is sent every clock to the trigger concentrator together with the
// number of channels whose comparator fired (leading edges found by the
// TDCs) and the board's busy flag.  That packed trig_word_t is what travels on the board's
// trigger serial link; the link itself is not modelled, the word is handed
// over in parallel.
//
// Timing: an ADC sample presented at clock t is in trig_word at t+4
// (1 pedestal, 2 weighted sum, 1 output register).  A comparator edge in
// clock t leaves the TDC (tdc_hit) in clock t+2; the hits are delayed by
// HIT_DELAY = ADC_LATENCY+1 clocks and registered, so the hit count in
// trig_word belongs to the same instant of the input signal as the sum
// (the ADC output lags the input by ADC_LATENCY clocks).  busy is
// registered once.
module wdb_trigger
  import wavedaq_pkg::*;
#(
  parameter int HIT_DELAY = ADC_LATENCY + 1
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [N_CH-1:0][ADC_W-1:0]  adc,
  input  logic [N_CH-1:0][ADC_W-1:0]  pedestal,
  input  logic [N_CH-1:0][WGT_W-1:0]  weight,
  input  logic                        invert,
  input  logic [N_CH-1:0]             tdc_hit,
  input  logic                        busy,
  output trig_word_t                  trig_word
);
  logic signed [N_CH-1:0][SMP_W-1:0] smp;
  logic signed [BSUM_W-1:0]          bsum;
  logic [N_CH-1:0]                   hit_pipe [HIT_DELAY];
  logic [HC_W-1:0]                   nhit;

  always_comb begin
    nhit = '0;
    for (int c = 0; c < N_CH; c++) nhit = nhit + HC_W'(hit_pipe[HIT_DELAY-1][c]);
  end

  for (genvar c = 0; c < N_CH; c++) begin : g_ped
    pedestal_sub #(.ADC_W(ADC_W)) u_ped (
      .clk, .rst, .adc(adc[c]), .pedestal(pedestal[c]), .invert, .y(smp[c])
    );
  end

  weighted_sum #(.N(N_CH), .IN_W(SMP_W), .WGT_W(WGT_W)) u_sum (
    .clk, .rst, .x(smp), .w(weight), .sum(bsum)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < HIT_DELAY; i++) hit_pipe[i] <= '0;
      trig_word <= '0;
    end else begin
      hit_pipe[0] <= tdc_hit;
      for (int i = 1; i < HIT_DELAY; i++) hit_pipe[i] <= hit_pipe[i-1];
      trig_word.sum  <= bsum;
      trig_word.nhit <= nhit;
      trig_word.busy <= busy;
    end
  end
endmodule
