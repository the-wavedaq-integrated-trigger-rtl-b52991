// tb_weighted_sum: self-checking test of weighted_sum.
// Random signed samples and unsigned weights, including the extreme
// values; the reference sum is computed here with 64-bit integers and
// checked two clocks later (the block's latency).
module tb_weighted_sum;
  localparam int N = 16;
  logic clk = 0, rst = 1;
  logic signed [N-1:0][12:0] x;
  logic [N-1:0][7:0] w;
  logic signed [25:0] sum;
  int checks = 0, failures = 0;
  longint exp_pipe [3];

  weighted_sum #(.N(N), .IN_W(13), .WGT_W(8)) dut (.clk, .rst, .x, .w, .sum);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    x = '0; w = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 400; i++) begin
      e = 0;
      for (int c = 0; c < N; c++) begin
        x[c] = 13'($urandom);
        w[c] = 8'($urandom);
        if (i == 10) begin x[c] = 13'h1000; w[c] = 8'hFF; end   // most negative
        if (i == 11) begin x[c] = 13'h0FFF; w[c] = 8'hFF; end   // most positive
        e += longint'($signed(x[c])) * longint'(w[c]);
      end
      exp_pipe[2] = exp_pipe[1];
      exp_pipe[1] = exp_pipe[0];
      exp_pipe[0] = e;
      @(negedge clk);
      if (i >= 2) begin
        checks++;
        if (longint'(sum) != exp_pipe[1]) begin
          failures++;
          if (failures < 5) $display("i=%0d sum=%0d exp=%0d", i, sum, exp_pipe[1]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
