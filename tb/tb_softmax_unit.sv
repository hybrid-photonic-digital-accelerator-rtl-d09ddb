// tb_softmax_unit: checks the softmax unit on random score rows of several
// lengths (including a row with a huge spread, whose small terms underflow
// to zero). Each row is streamed three times; every probability is compared
// with a reference computed here from the exponential directly (the two-table
// split written out with $exp), and the timing is checked: exactly one output
// per third-pass input, one cycle later, and the unit takes a new row right
// after the last output.
module tb_softmax_unit;
  import hyatten_pkg::*;
  localparam int FRAC = 4, TB = 7;
  logic clk = 0, rst_n = 0, in_valid = 0, in_last = 0;
  logic in_ready, out_valid, out_last;
  logic signed [ACC_W-1:0] in_score = '0;
  logic [PROB_W-1:0] out_prob;
  logic [1:0] pass_o;
  int scores [$];
  int expect_q [$];
  int checks = 0, failures = 0, n_out = 0;

  softmax_unit #(.FRAC(FRAC), .TB(TB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int e_ref(input int d);
    int hi, lo, eh, el;
    if (d >= (1 << (2*TB))) return 0;
    hi = d >> TB; lo = d % (1 << TB);
    eh = $rtoi($exp(-real'(hi) * 128.0 / 16.0) * 32768.0 + 0.5);
    el = $rtoi($exp(-real'(lo) / 16.0) * 32768.0 + 0.5);
    return int'((longint'(eh) * longint'(el)) >>> 15);
  endfunction

  always @(posedge clk) begin
    if (out_valid) begin
      int e;
      n_out++;
      checks++;
      if (expect_q.size() == 0) begin failures++; $display("extra output"); end
      else begin
        e = expect_q.pop_front();
        if (int'(out_prob) != e) begin
          failures++;
          if (failures < 10) $display("prob %0d exp %0d", out_prob, e);
        end
        checks++;
        if (out_last != (expect_q.size() == 0)) begin failures++; $display("out_last wrong"); end
      end
    end
  end

  task automatic run_row(input int len, input int spread);
    int m, sum;
    scores.delete();
    for (int i = 0; i < len; i++) scores.push_back($urandom_range(0, spread) - spread/2);
    m = scores[0];
    foreach (scores[i]) if (scores[i] > m) m = scores[i];
    sum = 0;
    foreach (scores[i]) sum += e_ref(m - scores[i]);
    foreach (scores[i]) expect_q.push_back(int'((longint'(e_ref(m - scores[i])) <<< 15) / sum));
    for (int p = 0; p < 3; p++)
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        checks++;
        if (!in_ready) begin failures++; $display("not ready"); end
        in_valid = 1; in_score = ACC_W'(scores[i]); in_last = (i == len-1);
        if (p == 2 && i == 0) n_out = 0;
        @(posedge clk);
        #1;
        // one output per third-pass input, one cycle later
        if (p == 2) begin
          checks++;
          if (n_out != i) begin failures++; $display("timing: %0d outputs after input %0d", n_out, i); end
        end
      end
    @(negedge clk);
    in_valid = 0; in_last = 0;
    @(negedge clk);
    checks++;
    if (expect_q.size() != 0 || n_out != len) begin
      failures++; $display("row of %0d: %0d outputs", len, n_out);
    end
    checks++;
    if (pass_o != 2'd0) begin failures++; $display("not back in the max pass"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_row(1, 10);
    run_row(16, 40);
    run_row(64, 200);
    run_row(128, 4000);
    run_row(200, 100000);
    run_row(384, 60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
