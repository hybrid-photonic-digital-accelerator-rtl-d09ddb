// tb_photonic_pe: checks one photonic PE at full size (64 x 64 core, 32
// lanes). It writes 64 random sparse K vectors into the local SRAM, loads
// them into the local PDAC, drives the shared-PDAC amplitudes with a random
// sparse Q block, fires the core and reads out all 128 groups. It then
// checks, against dot products computed here:
//  - each in-range output (-8 .. 7) is accumulated exactly in the OR and each
//    over-range output left at zero;
//  - the coordinate register holds exactly the over-range outputs, in
//    read-out order, with the chunk number;
//  - corrections add into the OR; a second chunk accumulates on top;
//  - the read-out takes 128 cycles plus two of pipeline.
module tb_photonic_pe;
  import hyatten_pkg::*;
  localparam int NG = ARR*ARR/N_ADC;
  logic clk = 0, rst_n = 0;
  logic ls_en = 0, ls_we = 0;
  logic [9:0] ls_addr = '0;
  logic [VEC_W-1:0] ls_wdata = '0, ls_rdata;
  logic lp_load = 0;
  logic [5:0] lp_idx = '0;
  real a_amp [ARR][ARR];
  logic fire = 0, acc_clear = 0, rd_valid = 0, cr_clear = 0, corr_valid = 0;
  logic [6:0] rd_group = '0;
  logic [3:0] rd_chunk = '0;
  logic [11:0] cr_idx = '0;
  coord_t cr_coord;
  logic [12:0] cr_count;
  logic cr_overflow;
  logic [5:0] corr_row = '0, corr_col = '0, or_rd_row = '0, or_rd_col = '0;
  logic signed [ACC_W-1:0] corr_value = '0, or_rd_value;
  int q [ARR][ARR], kk [ARR][ARR], s_ref [ARR][ARR];
  int checks = 0, failures = 0;

  photonic_pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sparse();
    if ($urandom_range(0, 3) != 0) return 0;
    return ($urandom_range(0, 1) ? 1 : -1) * $urandom_range(1, 2);
  endfunction

  task automatic one_chunk(input int chunk, output int n_over);
    coord_t exp_c [$];
    int t0;
    for (int i = 0; i < ARR; i++)
      for (int k = 0; k < ARR; k++) begin q[i][k] = sparse(); kk[i][k] = sparse(); end
    // K into the local SRAM, word j = key j
    for (int j = 0; j < ARR; j++) begin
      @(negedge clk);
      ls_en = 1; ls_we = 1; ls_addr = 10'(j);
      for (int k = 0; k < ARR; k++) ls_wdata[k*DW +: DW] = 4'(kk[j][k]);
    end
    // local PDAC load: read word j, load vector j
    for (int j = 0; j < ARR; j++) begin
      @(negedge clk);
      ls_we = 0; ls_addr = 10'(j); lp_load = 1; lp_idx = 6'(j);
    end
    @(negedge clk);
    ls_en = 0; lp_load = 0;
    for (int i = 0; i < ARR; i++) for (int k = 0; k < ARR; k++) a_amp[i][k] = real'(q[i][k]);
    @(negedge clk);
    fire = 1;
    @(negedge clk);
    fire = 0;
    n_over = 0;
    for (int i = 0; i < ARR; i++)
      for (int j = 0; j < ARR; j++) begin
        int s;
        s = 0;
        for (int k = 0; k < ARR; k++) s += q[i][k] * kk[j][k];
        if (s > 7 || s < -8) begin
          n_over++;
          exp_c.push_back('{chunk: 4'(chunk), row: 6'(i), col: 6'(j)});
        end else s_ref[i][j] += s;
      end
    t0 = $time / 10;
    for (int gi = 0; gi < NG; gi++) begin
      rd_valid = 1; rd_group = 7'(gi); rd_chunk = 4'(chunk);
      @(negedge clk);
    end
    rd_valid = 0;
    @(negedge clk);
    @(negedge clk);
    checks++;
    if ($time / 10 - t0 != NG + 2) begin failures++; $display("read-out took %0d", $time/10 - t0); end
    // OR contents
    for (int i = 0; i < ARR; i++)
      for (int j = 0; j < ARR; j++) begin
        or_rd_row = 6'(i); or_rd_col = 6'(j);
        #1;
        checks++;
        if (int'(or_rd_value) != s_ref[i][j]) begin
          failures++;
          if (failures < 10) $display("OR(%0d,%0d)=%0d exp %0d", i, j, or_rd_value, s_ref[i][j]);
        end
      end
    // coordinate register
    checks++;
    if (int'(cr_count) != exp_c.size() || cr_overflow) begin
      failures++; $display("coord count %0d exp %0d", cr_count, exp_c.size());
    end
    for (int e = 0; e < exp_c.size(); e++) begin
      cr_idx = 12'(e);
      #1;
      checks++;
      if (cr_coord !== exp_c[e]) begin
        failures++;
        if (failures < 10) $display("coord %0d = %h exp %h", e, cr_coord, exp_c[e]);
      end
    end
    // corrections for the logged outputs: exact value through the port
    for (int e = 0; e < exp_c.size(); e++) begin
      int s, i, j;
      i = exp_c[e].row; j = exp_c[e].col;
      s = 0;
      for (int k = 0; k < ARR; k++) s += q[i][k] * kk[j][k];
      @(negedge clk);
      corr_valid = 1; corr_row = 6'(i); corr_col = 6'(j); corr_value = ACC_W'(s);
      s_ref[i][j] += s;
    end
    @(negedge clk);
    corr_valid = 0;
    cr_clear = 1;
    @(negedge clk);
    cr_clear = 0;
    for (int i = 0; i < ARR; i++)
      for (int j = 0; j < ARR; j++) begin
        or_rd_row = 6'(i); or_rd_col = 6'(j);
        #1;
        checks++;
        if (int'(or_rd_value) != s_ref[i][j]) begin
          failures++;
          if (failures < 10) $display("after corr OR(%0d,%0d)=%0d exp %0d", i, j, or_rd_value, s_ref[i][j]);
        end
      end
    checks++;
    if (cr_count != 0) begin failures++; $display("coord register not cleared"); end
  endtask

  initial begin
    int n0, n1;
    for (int i = 0; i < ARR; i++) for (int j = 0; j < ARR; j++) s_ref[i][j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    acc_clear = 1;
    @(negedge clk);
    acc_clear = 0;
    one_chunk(0, n0);
    one_chunk(1, n1);
    $display("over-range outputs: %0d and %0d of %0d", n0, n1, ARR*ARR);
    checks++;
    if (n0 == 0 || n1 == 0) begin failures++; $display("no over-range output exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
