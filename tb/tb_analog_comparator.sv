// tb_analog_comparator: sweeps the input current from -20 to +20 in steps of
// 0.25 and checks the over-range flag against the window -8.5 .. 7.5.
module tb_analog_comparator;
  real  vin = 0.0;
  logic over;
  int checks = 0, failures = 0;

  analog_comparator dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = -80; s <= 80; s++) begin
      logic expv;
      vin = real'(s) * 0.25;
      #1;
      expv = (s > 30) || (s < -34);     // 7.5 = 30/4, -8.5 = -34/4
      checks++;
      if (over !== expv) begin
        failures++;
        $display("vin=%f over=%b exp %b", vin, over, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
