// tb_digital_pe: checks the digital PE. A memory model holds 16 random
// operand vectors and answers reads one cycle later. Programs of loads, MACs
// and stores (with several MACs per store) are pushed through the instruction
// queue, the result buffer is drained with random back-pressure, and each
// result's tag and value are compared with dot products computed here. The
// time for a LDA/LDB/MAC/ST sequence is checked: 6 cycles from the first
// push to the result.
module tb_digital_pe;
  import hyatten_pkg::*;
  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, instr_ready;
  dpe_instr_t instr;
  logic mem_en;
  logic [11:0] mem_addr;
  logic [VEC_W-1:0] mem_rdata;
  logic res_valid, res_ready = 0, idle;
  dpe_result_t res;
  logic [VEC_W-1:0] mem [16];
  int exp_tag [$], exp_val [$];
  int checks = 0, failures = 0;

  digital_pe dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) if (mem_en) mem_rdata <= mem[mem_addr[3:0]];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int dot(input int x, input int y);
    int s = 0;
    for (int k = 0; k < ARR; k++) s += int'($signed(mem[x][k*DW +: DW])) * int'($signed(mem[y][k*DW +: DW]));
    return s;
  endfunction

  task automatic push(input dpe_op_t op, input int addr, input int tag);
    @(negedge clk);
    instr_valid = 1;
    instr = '{op: op, addr: 16'(addr), tag: 24'(tag)};
    while (!instr_ready) @(negedge clk);
    @(posedge clk);
    #1 instr_valid = 0;
  endtask

  // result checker
  always @(posedge clk) begin
    if (res_valid && res_ready) begin
      checks++;
      if (exp_tag.size() == 0) begin
        failures++; $display("unexpected result");
      end else begin
        int et, ev;
        et = exp_tag.pop_front(); ev = exp_val.pop_front();
        if (int'(res.tag) != et || int'(res.value) != ev) begin
          failures++;
          $display("result tag %0d val %0d exp tag %0d val %0d", res.tag, res.value, et, ev);
        end
      end
    end
  end

  initial begin
    for (int i = 0; i < 16; i++)
      for (int k = 0; k < ARR; k++) mem[i][k*DW +: DW] = 4'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;

    // latency of one recomputation
    begin
      int t0, t1;
      res_ready = 1;
      exp_tag.push_back(7); exp_val.push_back(dot(2, 5));
      @(negedge clk);
      t0 = $time / 10;
      push(OP_LDA, 2, 0); push(OP_LDB, 5, 0); push(OP_MAC, 0, 0); push(OP_ST, 0, 7);
      while (!res_valid) @(negedge clk);
      t1 = $time / 10;
      checks++;
      if (t1 - t0 > 8) begin failures++; $display("latency %0d cycles", t1 - t0); end
      @(negedge clk);
    end

    fork
      begin
        for (int p = 0; p < 60; p++) begin
          int n, s;
          n = $urandom_range(1, 3);
          s = 0;
          for (int m = 0; m < n; m++) begin
            int x, y;
            x = $urandom_range(0, 15); y = $urandom_range(0, 15);
            push(OP_LDA, x, 0); push(OP_LDB, y, 0); push(OP_MAC, 0, 0);
            s += dot(x, y);
          end
          exp_tag.push_back(100 + p); exp_val.push_back(s);
          push(OP_ST, 0, 100 + p);
        end
      end
      begin
        repeat (3000) begin
          @(negedge clk);
          res_ready = ($urandom_range(0, 2) != 0);
        end
      end
    join
    res_ready = 1;
    repeat (20) @(negedge clk);
    checks++;
    if (exp_tag.size() != 0 || !idle) begin failures++; $display("%0d results missing", exp_tag.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
