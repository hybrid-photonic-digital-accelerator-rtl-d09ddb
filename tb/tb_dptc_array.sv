// tb_dptc_array: checks the tensor-core model on a reduced 8 x 8 array with
// 4 read-out lanes. Random integer amplitudes are applied, the core fires, and
// every read-out group must return the dot products computed here, row
// group / 2, columns (group % 2) * 4 + lane. Currents must hold until the
// next firing.
module tb_dptc_array;
  localparam int ARR = 8, NA = 4, NG = ARR*ARR/NA;
  logic clk = 0, fire = 0;
  real a_amp [ARR][ARR], b_amp [ARR][ARR];
  logic [$clog2(NG)-1:0] rd_group = '0;
  real rd_current [NA];
  int a_i [ARR][ARR], b_i [ARR][ARR];
  int checks = 0, failures = 0;

  dptc_array #(.ARR(ARR), .N_ADC(NA)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_groups();
    for (int gi = 0; gi < NG; gi++) begin
      rd_group = gi[$clog2(NG)-1:0];
      #1;
      for (int l = 0; l < NA; l++) begin
        int i, j, s;
        i = gi / (ARR/NA);
        j = (gi % (ARR/NA)) * NA + l;
        s = 0;
        for (int k = 0; k < ARR; k++) s += a_i[i][k] * b_i[j][k];
        checks++;
        if (rd_current[l] != real'(s)) begin
          failures++;
          if (failures < 10) $display("out(%0d,%0d)=%f exp %0d", i, j, rd_current[l], s);
        end
      end
    end
  endtask

  initial begin
    for (int it = 0; it < 5; it++) begin
      @(negedge clk);
      for (int i = 0; i < ARR; i++)
        for (int k = 0; k < ARR; k++) begin
          a_i[i][k] = $urandom_range(0, 15) - 8;
          b_i[i][k] = $urandom_range(0, 15) - 8;
          a_amp[i][k] = real'(a_i[i][k]);
          b_amp[i][k] = real'(b_i[i][k]);
        end
      fire = 1;
      @(negedge clk);
      fire = 0;
      check_groups();
      // change the inputs without firing: outputs must hold
      for (int i = 0; i < ARR; i++)
        for (int k = 0; k < ARR; k++) begin a_amp[i][k] = 0.0; b_amp[i][k] = 0.0; end
      @(negedge clk);
      check_groups();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
