// tb_sync_fifo: self-checking test of sync_fifo against a queue model,
// with random push/pop that fill and empty the buffer repeatedly.
module tb_sync_fifo;
  logic clk = 0, rst = 1;
  logic push = 0, pop = 0;
  logic [15:0] wdata = 0, rdata;
  logic empty, full;
  logic [4:0] count;
  logic [15:0] q[$];
  int checks = 0, failures = 0, fulls = 0;

  sync_fifo #(.W(16), .DEPTH(16)) dut (.clk, .rst, .push, .wdata, .pop, .rdata, .empty, .full, .count);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 3000; i++) begin
      int bias;
      bias = ((i / 200) % 2) ? 70 : 30;
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == 16) || int'(count) != q.size() ||
          (q.size() > 0 && rdata != q[0])) begin
        failures++;
        if (failures < 5) $display("i=%0d size=%0d count=%0d empty=%0d full=%0d", i, q.size(), count, empty, full);
      end
      if (full) fulls++;
      push = ($urandom_range(0, 99) < bias) && !full;
      pop  = ($urandom_range(0, 99) < 100 - bias) && !empty;
      wdata = 16'($urandom);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wdata);
    end
    checks++;
    if (fulls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
