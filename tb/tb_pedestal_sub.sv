// tb_pedestal_sub: self-checking test of pedestal_sub.
// Random samples, pedestals and polarities; the expected value is worked
// out here with plain integers and compared one clock later.
module tb_pedestal_sub;
  logic clk = 0, rst = 1;
  logic [11:0] adc, ped;
  logic inv;
  logic signed [12:0] y;
  int checks = 0, failures = 0;
  int exp_q[$];

  pedestal_sub #(.ADC_W(12)) dut (.clk, .rst, .adc, .pedestal(ped), .invert(inv), .y);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    adc = 0; ped = 0; inv = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 500; i++) begin
      adc = 12'($urandom); ped = 12'($urandom); inv = 1'($urandom);
      if (i % 50 == 0) begin adc = 12'hFFF; ped = 0; end
      if (i % 50 == 1) begin adc = 0; ped = 12'hFFF; end
      e = inv ? (int'(ped) - int'(adc)) : (int'(adc) - int'(ped));
      @(negedge clk);
      checks++;
      if (int'(y) != e) begin
        failures++;
        if (failures < 5) $display("mismatch adc=%0d ped=%0d inv=%0d y=%0d exp=%0d", adc, ped, inv, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
