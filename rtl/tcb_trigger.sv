// tcb_trigger: trigger decision of the Trigger Concentrator Board.
//
// Every clock each input (a WaveDREAM board in a crate, or a crate TCB
// when used as the master of a trigger concentrator crate) delivers its
// weighted amplitude sum, the number of comparator hits and its busy
// flag.  The concentrator adds the sums and the hit counts and
// discriminates:
//   condition = total_sum > threshold  and  total_hits >= min_hits
// A trigger is issued when the condition holds, the trigger is enabled,
// the veto input is low, no input is busy and the dead time that follows
// the previous trigger has run out.  The trigger travels on the trigger
// bus as a one-clock pulse with a 16-bit event number that counts issued
// triggers from zero.  Conditions lost to the veto and to busy/dead time
// are counted for monitoring.  The summed values and the OR of the busy
// flags are also output, registered, so that a crate TCB can feed a
// master TCB built from the same module.
//
// The amplitude sum with veto follows the trigger chain of the system;
// the hit-multiplicity term stands in for the time-based algorithms,
// which are not specified, and the dead-time counter is this design's
// choice for covering the stop delay before the boards report busy.
//
// Timing: inputs at clock t are summed in t+1 (sum_out etc. valid then)
// and the trigger pulse is present in t+2.
module tcb_trigger #(
  parameter int N_IN  = 16,
  parameter int IN_W  = 26,
  parameter int HC_IN = 5,
  parameter int EVT_W = 16,
  localparam int OUT_W = IN_W + $clog2(N_IN),
  localparam int HC_OUT = HC_IN + $clog2(N_IN)
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic signed [N_IN-1:0][IN_W-1:0] in_sum,
  input  logic [N_IN-1:0][HC_IN-1:0]    in_nhit,
  input  logic [N_IN-1:0]               in_busy,
  // configuration
  input  logic                          enable,
  input  logic signed [OUT_W-1:0]       threshold,
  input  logic [HC_OUT-1:0]             min_hits,
  input  logic [15:0]                   dead_time,
  input  logic                          veto,
  // trigger bus
  output logic                          trigger,
  output logic [EVT_W-1:0]              event_num,
  // forwarded to a master concentrator
  output logic signed [OUT_W-1:0]       sum_out,
  output logic [HC_OUT-1:0]             nhit_out,
  output logic                          busy_out,
  // monitoring
  output logic [31:0]                   n_vetoed,
  output logic [31:0]                   n_inhibited
);
  logic signed [OUT_W-1:0] sum_c;
  logic [HC_OUT-1:0]       nhit_c;
  logic                    cond;
  logic [15:0]             dead_cnt;
  logic [EVT_W-1:0]        evt_next;

  always_comb begin
    sum_c  = '0;
    nhit_c = '0;
    for (int i = 0; i < N_IN; i++) begin
      sum_c  = sum_c + OUT_W'($signed(in_sum[i]));
      nhit_c = nhit_c + HC_OUT'(in_nhit[i]);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sum_out  <= '0;
      nhit_out <= '0;
      busy_out <= 1'b0;
    end else begin
      sum_out  <= sum_c;
      nhit_out <= nhit_c;
      busy_out <= |in_busy;
    end
  end

  assign cond = enable && (sum_out > threshold) && (nhit_out >= min_hits);

  always_ff @(posedge clk) begin
    if (rst) begin
      trigger     <= 1'b0;
      event_num   <= '0;
      evt_next    <= '0;
      dead_cnt    <= '0;
      n_vetoed    <= '0;
      n_inhibited <= '0;
    end else begin
      trigger <= 1'b0;
      if (dead_cnt != '0) dead_cnt <= dead_cnt - 1'b1;
      if (cond) begin
        if (veto) begin
          n_vetoed <= n_vetoed + 1'b1;
        end else if (busy_out || dead_cnt != '0) begin
          n_inhibited <= n_inhibited + 1'b1;
        end else begin
          trigger   <= 1'b1;
          event_num <= evt_next;
          evt_next  <= evt_next + 1'b1;
          dead_cnt  <= dead_time;
        end
      end
    end
  end
endmodule
