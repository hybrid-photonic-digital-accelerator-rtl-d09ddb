// tb_pdac_bank: checks the PDAC bank model. Loads random signed 4-bit vectors
// into random vector slots and checks that each slot's amplitudes equal the
// codes times the LSB after the clock edge, that the other slots hold, and
// that nothing changes without load.
module tb_pdac_bank;
  localparam int ARR = 64, DW = 4;
  logic clk = 0, load = 0;
  logic [5:0] idx = '0;
  logic [ARR*DW-1:0] codes = '0;
  real amp [ARR][ARR];
  int ref_v [ARR][ARR];
  int checks = 0, failures = 0;

  pdac_bank #(.ARR(ARR), .DW(DW), .LSB(0.5)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int v = 0; v < ARR; v++)
      for (int k = 0; k < ARR; k++) begin
        checks++;
        if (amp[v][k] != 0.5 * real'(ref_v[v][k])) begin
          failures++;
          if (failures < 10) $display("amp[%0d][%0d]=%f exp %0d*0.5", v, k, amp[v][k], ref_v[v][k]);
        end
      end
  endtask

  initial begin
    for (int v = 0; v < ARR; v++) for (int k = 0; k < ARR; k++) ref_v[v][k] = 0;
    for (int it = 0; it < 40; it++) begin
      int v;
      v = $urandom_range(0, ARR-1);
      @(negedge clk);
      load = 1; idx = 6'(v);
      for (int k = 0; k < ARR; k++) begin
        int c;
        c = $urandom_range(0, 15) - 8;
        codes[k*DW +: DW] = 4'(c);
        ref_v[v][k] = c;
      end
      @(negedge clk);
      load = 0;
      codes = '1;                 // changes without load must not be taken
      @(negedge clk);
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
