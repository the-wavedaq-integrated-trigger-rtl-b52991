// tb_dcb_merger: self-checking test of the data-concentrator merge.
// Four sources send numbered packets of random length with random gaps;
// the sink accepts with random back-pressure.  Every beat carries its
// source, packet and beat number, so the checker can tell that each packet
// arrives whole, in order per source, not interleaved with another, with
// `last` on its final beat, and that a stalled beat does not change.  When
// all sources wait, grants must rotate.
module tb_dcb_merger;
  localparam int N = 4, W = 32, NPKT = 40;
  logic clk = 0, rst = 1;
  logic [N-1:0] in_valid, in_ready, in_last;
  logic [N-1:0][W-1:0] in_data;
  logic out_valid, out_ready, out_last;
  logic [W-1:0] out_data;
  logic [1:0] out_src;
  int checks = 0, failures = 0, stalls = 0, rotations = 0;
  int len [N][NPKT];
  int pkt [N], beat [N];
  int rx_pkt [N];
  int cur_src = -1, cur_beat = 0, prev_src = -1;

  dcb_merger #(.N_IN(N), .DATA_W(W)) dut (.clk, .rst, .in_valid, .in_ready, .in_last, .in_data,
    .out_valid, .out_ready, .out_last, .out_data, .out_src);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sources: hold a beat until it is taken
  always @(posedge clk) begin
    if (rst) begin
      for (int s = 0; s < N; s++) begin pkt[s] = 0; beat[s] = 0; end
    end else begin
      for (int s = 0; s < N; s++)
        if (in_valid[s] && in_ready[s]) begin
          if (beat[s] == len[s][pkt[s]] - 1) begin beat[s] = 0; pkt[s]++; end
          else beat[s]++;
        end
    end
  end

  always @(negedge clk) begin
    for (int s = 0; s < N; s++) begin
      if (!in_valid[s] || in_ready_q[s]) begin
        in_valid[s] <= (pkt[s] < NPKT) && ($urandom_range(0, 99) < 70);
      end
      in_data[s] <= {8'(s), 12'(pkt[s]), 12'(beat[s])};
      in_last[s] <= (pkt[s] < NPKT) && (beat[s] == len[s][pkt[s]] - 1);
    end
    out_ready <= ($urandom_range(0, 99) < 60);
  end
  logic [N-1:0] in_ready_q;
  always @(posedge clk) in_ready_q <= in_ready & in_valid;

  // checker
  logic [W-1:0] stall_data; logic stalled = 0;
  always @(posedge clk) if (!rst) begin
    if (stalled) begin
      checks++;
      if (!out_valid || out_data != stall_data) failures++;
    end
    stalled = out_valid && !out_ready;
    stall_data = out_data;
    if (stalled) stalls++;
    if (out_valid && out_ready) begin
      int s, p, bt;
      s = int'(out_data[31:24]); p = int'(out_data[23:12]); bt = int'(out_data[11:0]);
      checks++;
      if (s != int'(out_src) || p != rx_pkt[s] || (cur_src != -1 && s != cur_src) ||
          bt != cur_beat || out_last != (bt == len[s][p] - 1)) begin
        failures++;
        if (failures < 5) $display("bad beat s=%0d p=%0d b=%0d exp p=%0d b=%0d cur=%0d", s, p, bt, rx_pkt[s], cur_beat, cur_src);
      end
      cur_src = s;
      cur_beat++;
      if (out_last) begin
        if (prev_src != -1 && s != prev_src) rotations++;
        prev_src = s;
        rx_pkt[s]++; cur_src = -1; cur_beat = 0;
      end
    end
  end

  initial begin
    for (int s = 0; s < N; s++) begin
      rx_pkt[s] = 0;
      for (int p = 0; p < NPKT; p++) len[s][p] = $urandom_range(1, 12);
    end
    in_valid = '0; in_last = '0; in_data = '0; out_ready = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    wait (rx_pkt[0] == NPKT && rx_pkt[1] == NPKT && rx_pkt[2] == NPKT && rx_pkt[3] == NPKT);
    checks++;
    if (stalls == 0 || rotations < NPKT) failures++;
    $display("stalls=%0d rotations=%0d", stalls, rotations);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
