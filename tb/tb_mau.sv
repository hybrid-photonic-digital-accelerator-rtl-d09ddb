// tb_mau: checks the multiply-accumulate unit with random 64-element signed
// 4-bit vectors (including the extreme -8 x -8) and random accumulator
// inputs against a dot product computed here.
module tb_mau;
  import hyatten_pkg::*;
  logic [VEC_W-1:0] a, b;
  logic signed [ACC_W-1:0] acc_in, acc_out;
  int checks = 0, failures = 0;

  mau dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 500; it++) begin
      int s;
      s = $urandom_range(0, 20000) - 10000;
      acc_in = ACC_W'(s);
      for (int k = 0; k < ARR; k++) begin
        int x, y;
        x = (it == 0) ? -8 : $urandom_range(0, 15) - 8;
        y = (it == 0) ? -8 : $urandom_range(0, 15) - 8;
        a[k*DW +: DW] = 4'(x);
        b[k*DW +: DW] = 4'(y);
        s += x * y;
      end
      #1;
      checks++;
      if (int'(acc_out) != s) begin
        failures++;
        $display("it %0d got %0d exp %0d", it, acc_out, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
