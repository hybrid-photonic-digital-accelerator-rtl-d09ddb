// tb_accum_or: checks the accumulators and output register on an 8 x 8
// register with 4 lanes. Random groups of ADC codes and over-range flags are
// accumulated (flagged lanes add nothing), random corrections are added, and
// the whole register is compared with a reference after each step; clear must
// zero it.
module tb_accum_or;
  import hyatten_pkg::*;
  localparam int A = 8, L = 4, NG = A*A/L, GW = $clog2(NG), RW = $clog2(A), W = 16;
  logic clk = 0, rst_n = 0, clear = 0, acc_valid = 0, corr_valid = 0;
  logic [GW-1:0] acc_group = '0;
  logic signed [ADC_BITS-1:0] acc_code [L];
  logic [L-1:0] acc_over = '0;
  logic [RW-1:0] corr_row = '0, corr_col = '0, rd_row = '0, rd_col = '0;
  logic signed [W-1:0] corr_value = '0, rd_value;
  int ref_m [A][A];
  int checks = 0, failures = 0;

  accum_or #(.ARR_N(A), .LANES(L), .AW(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int i = 0; i < A; i++)
      for (int j = 0; j < A; j++) begin
        rd_row = RW'(i); rd_col = RW'(j);
        #1;
        checks++;
        if (int'(rd_value) != ref_m[i][j]) begin
          failures++;
          if (failures < 10) $display("OR[%0d][%0d]=%0d exp %0d", i, j, rd_value, ref_m[i][j]);
        end
      end
  endtask

  initial begin
    for (int l = 0; l < L; l++) acc_code[l] = '0;
    for (int i = 0; i < A; i++) for (int j = 0; j < A; j++) ref_m[i][j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      if ($urandom_range(0, 3) != 0) begin
        int gi;
        gi = $urandom_range(0, NG-1);
        acc_valid = 1; acc_group = GW'(gi); acc_over = L'($urandom);
        for (int l = 0; l < L; l++) begin
          acc_code[l] = 4'($urandom);
          if (!acc_over[l]) ref_m[gi/(A/L)][(gi%(A/L))*L + l] += int'(acc_code[l]);
        end
      end else begin
        int i, j, v;
        i = $urandom_range(0, A-1); j = $urandom_range(0, A-1); v = $urandom_range(0, 400) - 200;
        corr_valid = 1; corr_row = RW'(i); corr_col = RW'(j); corr_value = W'(v);
        ref_m[i][j] += v;
      end
      @(negedge clk);
      acc_valid = 0; corr_valid = 0;
      if (it % 20 == 19) check_all();
      if (it == 150) begin
        clear = 1;
        @(negedge clk);
        clear = 0;
        for (int i = 0; i < A; i++) for (int j = 0; j < A; j++) ref_m[i][j] = 0;
        check_all();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
