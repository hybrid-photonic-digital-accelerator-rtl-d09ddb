// tb_coord_register: checks the coordinate register with 8 lanes and 40
// entries. Random flag patterns with random coordinates are appended; the
// register must keep them in lane order per cycle and arrival order across
// cycles, count them, drop the excess with the overflow flag set, and empty
// on clear.
module tb_coord_register;
  import hyatten_pkg::*;
  localparam int L = 8, D = 40, IW = $clog2(D);
  logic clk = 0, rst_n = 0, clear = 0, wr_valid = 0;
  logic [L-1:0] wr_flag = '0;
  coord_t wr_coord [L];
  logic [IW-1:0] rd_idx = '0;
  coord_t rd_coord;
  logic [IW:0] count;
  logic overflow;
  coord_t ref_q [$];
  int checks = 0, failures = 0;

  coord_register #(.LANES(L), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_contents(input bit exp_ovf);
    checks++;
    if (int'(count) != ref_q.size() || overflow !== exp_ovf) begin
      failures++;
      $display("count %0d exp %0d, overflow %b exp %b", count, ref_q.size(), overflow, exp_ovf);
    end
    for (int i = 0; i < ref_q.size(); i++) begin
      rd_idx = IW'(i);
      #1;
      checks++;
      if (rd_coord !== ref_q[i]) begin
        failures++;
        if (failures < 10) $display("entry %0d = %h exp %h", i, rd_coord, ref_q[i]);
      end
    end
  endtask

  initial begin
    for (int l = 0; l < L; l++) wr_coord[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      bit ovf;
      ovf = 0;
      for (int cyc = 0; cyc < 12; cyc++) begin
        @(negedge clk);
        wr_valid = ($urandom_range(0, 3) != 0);
        wr_flag  = L'($urandom);
        for (int l = 0; l < L; l++) wr_coord[l] = coord_t'($urandom);
        if (wr_valid)
          for (int l = 0; l < L; l++)
            if (wr_flag[l]) begin
              if (ref_q.size() < D) ref_q.push_back(wr_coord[l]);
              else ovf = 1;
            end
        @(negedge clk);
        wr_valid = 0;
        if (cyc % 4 == 3) check_contents(ovf);
      end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      ref_q.delete();
      check_contents(0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
