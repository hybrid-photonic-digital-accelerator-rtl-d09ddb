// tb_digital_die: checks one digital die through its controller-side ports.
// (1) Recomputation: two random operand vectors are written into SRAM words
// 0 and 1, the PE is given the SRAM and runs LDA 0 / LDB 1 / MAC / ST; the
// result must be their exact dot product with the tag given. (2) Softmax: a
// row of random scores is written one per word from word 2 and streamed three
// times from the SRAM into the softmax unit; the probabilities must match a
// reference computed here.
module tb_digital_die;
  import hyatten_pkg::*;
  localparam int D = 256, DAW = 8;
  logic clk = 0, rst_n = 0;
  logic dd_en = 0, dd_we = 0, pe_grant = 0;
  logic [DAW-1:0] dd_addr = '0;
  logic [VEC_W-1:0] dd_wdata = '0, dd_rdata;
  logic instr_valid = 0, instr_ready, res_valid, res_ready = 1, pe_idle;
  dpe_instr_t instr = '0;
  dpe_result_t res;
  logic sm_in_valid = 0, sm_in_ready, sm_in_last = 0, sm_out_valid, sm_out_last;
  logic [PROB_W-1:0] sm_out_prob;
  int checks = 0, failures = 0;
  int expect_q [$];

  digital_die #(.DD_DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int e_ref(input int d);
    int eh, el;
    if (d >= (1 << 14)) return 0;
    eh = $rtoi($exp(-real'(d >> 7) * 8.0) * 32768.0 + 0.5);
    el = $rtoi($exp(-real'(d % 128) / 16.0) * 32768.0 + 0.5);
    return int'((longint'(eh) * longint'(el)) >>> 15);
  endfunction

  task automatic wr(input int a, input logic [VEC_W-1:0] v);
    @(negedge clk); dd_en = 1; dd_we = 1; dd_addr = DAW'(a); dd_wdata = v;
    @(negedge clk); dd_en = 0; dd_we = 0;
  endtask

  task automatic push(input dpe_op_t op, input int a, input int tag);
    @(negedge clk);
    instr_valid = 1; instr = '{op: op, addr: 16'(a), tag: 24'(tag)};
    while (!instr_ready) @(negedge clk);
    @(negedge clk);
    instr_valid = 0;
  endtask

  always @(posedge clk) begin
    if (rst_n && sm_out_valid) begin
      checks++;
      if (expect_q.size() == 0) begin failures++; $display("extra output"); end
      else begin
        int e;
        e = expect_q.pop_front();
        if (int'(sm_out_prob) != e) begin
          failures++;
          if (failures < 10) $display("prob %0d exp %0d", sm_out_prob, e);
        end
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // recomputation
    for (int it = 0; it < 10; it++) begin
      logic [VEC_W-1:0] a, b;
      int s;
      s = 0;
      for (int k = 0; k < ARR; k++) begin
        a[k*DW +: DW] = 4'($urandom); b[k*DW +: DW] = 4'($urandom);
        s += int'($signed(a[k*DW +: DW])) * int'($signed(b[k*DW +: DW]));
      end
      wr(0, a); wr(1, b);
      @(negedge clk); pe_grant = 1;
      push(OP_LDA, 0, 0); push(OP_LDB, 1, 0); push(OP_MAC, 0, 0); push(OP_ST, 0, 1000 + it);
      while (!res_valid) @(negedge clk);
      checks++;
      if (int'(res.value) != s || int'(res.tag) != 1000 + it) begin
        failures++; $display("dot %0d tag %0d exp %0d tag %0d", res.value, res.tag, s, 1000 + it);
      end
      @(negedge clk); pe_grant = 0;
    end
    // softmax of a row held in the SRAM
    for (int rep = 0; rep < 3; rep++) begin
      int len, m, sum;
      int sc [$];
      sc.delete();
      len = 40 + 50 * rep;
      for (int i = 0; i < len; i++) sc.push_back($urandom_range(0, 300) - 150);
      for (int i = 0; i < len; i++) wr(2 + i, VEC_W'(ACC_W'(sc[i])));
      m = sc[0];
      foreach (sc[i]) if (sc[i] > m) m = sc[i];
      sum = 0;
      foreach (sc[i]) sum += e_ref(m - sc[i]);
      foreach (sc[i]) expect_q.push_back(int'((longint'(e_ref(m - sc[i])) <<< 15) / sum));
      for (int p = 0; p < 3; p++)
        for (int i = 0; i < len; i++) begin
          @(negedge clk);
          dd_en = 1; dd_addr = DAW'(2 + i);
          @(negedge clk);
          dd_en = 0;
          sm_in_valid = 1; sm_in_last = (i == len - 1);
          @(posedge clk);
          #1 sm_in_valid = 0; sm_in_last = 0;
        end
      repeat (3) @(negedge clk);
      checks++;
      if (expect_q.size() != 0) begin failures++; $display("%0d outputs missing", expect_q.size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
