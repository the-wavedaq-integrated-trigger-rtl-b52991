// tb_tdc_encoder: self-checking test of the TDC leading-edge encoder.
// Words with single pulses at random positions, pulses that straddle the
// word boundary, all-high and all-low words and random noise are
// presented; the expected first rising edge is found here by walking the
// samples in time order.
module tb_tdc_encoder;
  localparam int S = 28;
  logic clk = 0, rst = 1;
  logic [S-1:0] word;
  logic hit;
  logic [4:0] fine;
  logic [31:0] coarse;
  int checks = 0, failures = 0, hits_seen = 0;

  tdc_encoder #(.SAMPLES(S), .TS_W(32)) dut (.clk, .rst, .word, .hit, .fine, .coarse);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic prev;
    int e_hit, e_fine, t;
    word = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    prev = 0;
    for (int i = 0; i < 2000; i++) begin
      case (i % 5)
        0: word = '0;
        1: begin int a = $urandom_range(0, S-1); int b = $urandom_range(a, S-1);
                 word = '0; for (int k = a; k <= b; k++) word[k] = 1'b1; end
        2: word = '1;
        3: word = S'({$urandom, $urandom});
        default: begin word = '0; word[S-1] = 1'b1; end  // edge on last bit, continues next word
      endcase
      e_hit = 0; e_fine = 0;
      for (int k = 0; k < S; k++) begin
        logic prv;
        prv = (k == 0) ? prev : word[k-1];
        if (word[k] && !prv && !e_hit) begin e_hit = 1; e_fine = k; end
      end
      prev = word[S-1];
      t = i;
      @(negedge clk);
      checks++;
      if (hit != 1'(e_hit) || (e_hit && fine != 5'(e_fine)) || coarse != 32'(t + 0)) begin
        failures++;
        if (failures < 5) $display("i=%0d hit=%0d/%0d fine=%0d/%0d coarse=%0d", i, hit, e_hit, fine, e_fine, coarse);
      end
      if (hit) hits_seen++;
    end
    checks++;
    if (hits_seen < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
