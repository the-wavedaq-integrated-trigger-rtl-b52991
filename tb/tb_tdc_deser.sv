// tb_tdc_deser: self-checking test of the TDC shift register.
// A random comparator bit is driven before every clk_fast edge and kept in
// a history; each time a word is published its bits must be the last
// SAMPLES comparator values, newest in the top bit, and words must come
// exactly every SAMPLES fast clocks.
module tb_tdc_deser;
  localparam int S = 28;
  logic clk_fast = 0, rst = 1, comp = 0;
  logic [S-1:0] word;
  logic word_stb;
  int checks = 0, failures = 0;
  logic hist [int];
  int edge_n = 0, last_stb = -1;

  tdc_deser #(.SAMPLES(S)) dut (.clk_fast, .rst, .comp, .word, .word_stb);

  always #1 clk_fast = ~clk_fast;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk_fast) begin
    hist[edge_n] = comp;
    edge_n++;
  end

  initial begin
    repeat (4) @(negedge clk_fast);
    rst = 0;
    edge_n = 0;
    hist.delete();
    repeat (3000) begin
      @(negedge clk_fast);
      if (word_stb && edge_n > S) begin
        checks++;
        for (int k = 0; k < S; k++)
          if (word[S-1-k] != hist[edge_n-1-k]) begin
            failures++;
            if (failures < 5) $display("bit %0d wrong at edge %0d", S-1-k, edge_n);
            break;
          end
        if (last_stb >= 0) begin
          checks++;
          if (edge_n - last_stb != S) failures++;
        end
        last_stb = edge_n;
      end
      comp = 1'($urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
