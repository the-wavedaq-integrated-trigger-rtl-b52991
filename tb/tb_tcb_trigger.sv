// tb_tcb_trigger: self-checking test of the trigger concentrator decision.
// Random board sums and hit counts cross the threshold now and then, while
// veto, busy, the hit requirement and the dead time are switched through
// phases.  A reference written here with the rules of the block (sum above
// threshold, enough hits, no veto, nobody busy, dead time elapsed) gives
// the expected trigger pulse two clocks after the inputs, the event
// numbers, the forwarded sums and the veto/inhibit counters.
module tb_tcb_trigger;
  localparam int N = 16, IW = 26, HW = 5, OW = IW + 4, HO = HW + 4;
  logic clk = 0, rst = 1;
  logic signed [N-1:0][IW-1:0] in_sum;
  logic [N-1:0][HW-1:0] in_nhit;
  logic [N-1:0] in_busy;
  logic enable, veto;
  logic signed [OW-1:0] thr;
  logic [HO-1:0] min_hits;
  logic [15:0] dead_time;
  logic trigger, busy_out;
  logic [15:0] event_num;
  logic signed [OW-1:0] sum_out;
  logic [HO-1:0] nhit_out;
  logic [31:0] n_vetoed, n_inhibited;
  int checks = 0, failures = 0;
  int n_trig = 0, r_veto = 0, r_inh = 0, r_dead = 0, r_evt = 0;
  longint s_h [int]; int h_h [int], b_h [int];

  tcb_trigger #(.N_IN(N), .IN_W(IW), .HC_IN(HW), .EVT_W(16)) dut (
    .clk, .rst, .in_sum, .in_nhit, .in_busy, .enable, .threshold(thr), .min_hits, .dead_time, .veto,
    .trigger, .event_num, .sum_out, .nhit_out, .busy_out, .n_vetoed, .n_inhibited);

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_sum = '0; in_nhit = '0; in_busy = '0; enable = 1; veto = 0; thr = 30'sd3000; min_hits = '0; dead_time = 16'd3;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 3000; t++) begin
      longint s; int h; logic cond, exp_trig; int phase;
      phase = (t / 250) % 6;
      veto      = (phase == 1) ? 1'($urandom_range(0, 1)) : 1'b0;
      in_busy   = (phase == 2 && $urandom_range(0, 3) == 0) ? 16'h0010 : 16'h0;
      min_hits  = (phase == 3) ? HO'(20) : HO'(0);
      dead_time = (phase == 4) ? 16'd10 : 16'd3;
      enable    = (phase != 5) || (t % 2 == 0);
      s = 0; h = 0;
      for (int b = 0; b < N; b++) begin
        in_sum[b]  = IW'($urandom_range(0, 900)) - IW'(300);
        in_nhit[b] = HW'($urandom_range(0, 3));
        s += longint'($signed(in_sum[b])); h += int'(in_nhit[b]);
      end
      s_h[t] = s; h_h[t] = h; b_h[t] = |in_busy;
      @(negedge clk);
      // forwarded sums, one clock
      checks++;
      if (longint'(sum_out) != s || int'(nhit_out) != h || busy_out != (|in_busy)) failures++;
      // decision on what was forwarded in the previous clock
      if (t >= 1) begin
        cond = enable && (s_h[t-1] > 3000) && (h_h[t-1] >= int'(min_hits));
        exp_trig = 0;
        if (cond) begin
          if (veto) r_veto++;
          else if (b_h[t-1] != 0 || r_dead != 0) r_inh++;
          else exp_trig = 1;
        end
        if (r_dead != 0) r_dead--;
        if (exp_trig) r_dead = int'(dead_time);
        checks++;
        if (trigger != exp_trig || (exp_trig && event_num != 16'(r_evt))) begin
          failures++; if (failures < 6) $display("t=%0d s=%0d trig=%0d exp=%0d evt=%0d/%0d", t, s_h[t-1], trigger, exp_trig, event_num, r_evt);
        end
        if (exp_trig) begin r_evt++; n_trig++; end
        checks++;
        if (int'(n_vetoed) != r_veto || int'(n_inhibited) != r_inh) begin failures++; if (failures < 6) $display("t=%0d cnt %0d %0d exp %0d %0d", t, n_vetoed, n_inhibited, r_veto, r_inh); end
      end
      enable_q = enable; veto_q = veto; min_hits_q = min_hits; dead_q = dead_time;
    end
    checks++;
    if (n_trig < 50 || r_veto < 10 || r_inh < 10) failures++;
    $display("triggers=%0d vetoed=%0d inhibited=%0d", n_trig, r_veto, r_inh);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic enable_q = 0, veto_q = 0; logic [HO-1:0] min_hits_q = 0; logic [15:0] dead_q = 0;
endmodule
