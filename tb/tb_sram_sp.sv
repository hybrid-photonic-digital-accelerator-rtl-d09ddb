// tb_sram_sp: self-checking test of the single-port SRAM. Writes random words
// at random addresses, keeps a reference copy, and checks every read returns
// the last value written one cycle after the read is issued, and that rdata
// holds when no read is issued.
module tb_sram_sp;
  localparam int W = 32, D = 64;
  logic clk = 0, en = 0, we = 0;
  logic [$clog2(D)-1:0] addr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] ref_mem [D];
  int checks = 0, failures = 0;

  sram_sp #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_write(input int a, input logic [W-1:0] v);
    @(negedge clk); en = 1; we = 1; addr = a[$clog2(D)-1:0]; wdata = v;
    @(negedge clk); en = 0; we = 0;
    ref_mem[a] = v;
  endtask

  task automatic do_read(input int a);
    @(negedge clk); en = 1; we = 0; addr = a[$clog2(D)-1:0];
    @(negedge clk); en = 0;
    checks++;
    if (rdata !== ref_mem[a]) begin
      failures++;
      $display("read mismatch addr %0d got %h exp %h", a, rdata, ref_mem[a]);
    end
    // rdata holds without a read
    @(negedge clk);
    checks++;
    if (rdata !== ref_mem[a]) begin failures++; $display("rdata did not hold"); end
  endtask

  initial begin
    for (int a = 0; a < D; a++) do_write(a, $urandom);
    for (int i = 0; i < 200; i++) begin
      int a;
      a = $urandom_range(0, D-1);
      if ($urandom_range(0, 1)) do_write(a, $urandom);
      else do_read(a);
    end
    for (int a = 0; a < D; a++) do_read(a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
