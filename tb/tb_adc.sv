// tb_adc: checks the 4-bit ADC model: rounding to the nearest code, clamping
// at -8 and 7, conversion on the sampling edge (one-cycle latency) and
// holding the code when not sampling.
module tb_adc;
  logic clk = 0, sample = 0;
  real  vin = 0.0;
  logic signed [3:0] code;
  int checks = 0, failures = 0;

  adc #(.BITS(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = -48; s <= 48; s++) begin
      int e;
      @(negedge clk);
      vin = real'(s) * 0.25 + 0.1;      // never exactly on a half step
      sample = 1;
      // reference: nearest integer, clamped
      e = int'($floor(vin + 0.5));
      if (e > 7) e = 7;
      if (e < -8) e = -8;
      @(negedge clk);
      sample = 0;
      checks++;
      if (int'(code) != e) begin
        failures++;
        $display("vin=%f code=%0d exp %0d", vin, code, e);
      end
      vin = 100.0;                       // not sampled: code must hold
      @(negedge clk);
      checks++;
      if (int'(code) != e) begin failures++; $display("code did not hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
