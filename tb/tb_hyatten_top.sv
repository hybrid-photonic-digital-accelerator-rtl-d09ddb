// tb_hyatten_top: end-to-end test of the accelerator at reduced size (2
// tiles, small memories). It writes random sparse Q and K into the shared
// SRAM through the off-chip port, runs attention-score jobs and checks every
// probability that leaves the chip against a reference computed here:
// exact integer scores S = Q x K^T, then the same fixed-point softmax.
//
// Job 1: 2 Q blocks (128 rows) x 2 tiles (128 keys) x 2 chunks (head
// dimension 128). Job 2: 1 block x 1 tile x 1 chunk with dense data, so most
// outputs go the digital way. It counts and requires each mechanism:
// in-range outputs taken from the ADCs, over-range outputs recomputed by the
// digital PE (the count must match the reference exactly), accumulation over
// chunks, broadcast to several tiles, several Q blocks, back-to-back jobs, an
// off-chip write ignored while busy, the plain-product mode (job 3: 1
// block x 2 tiles x 2 chunks without softmax, exact integer results out),
// and two key shards per tile in local SRAM (job 4: 2 blocks x 2 tiles x
// 2 batches with softmax; job 5: 1 tile x 2 batches, plain product). With 2
// tiles each block is processed in 32 row groups, so the event counters
// expect the photonic work 32 times per block.
module tb_hyatten_top;
  import hyatten_pkg::*;
  localparam int NT = 2, SHD = 1024, LD = 128, DDD = 512;
  localparam int SAW = $clog2(SHD), TW = 1;
  localparam int MAXQ = 128, MAXK = 256, MAXC = 2;

  logic clk = 0, rst_n = 0;
  logic hbm_wr_en = 0;
  logic [SAW-1:0] hbm_wr_addr = '0;
  logic [VEC_W-1:0] hbm_wr_data = '0;
  logic start = 0;
  logic [7:0] cfg_q_blocks = '0;
  logic [TW:0] cfg_k_tiles = '0;
  logic [4:0] cfg_chunks = '0;
  logic [SAW-1:0] cfg_q_base = '0, cfg_k_base = '0;
  logic cfg_softmax = 1;
  logic [4:0] cfg_batches = 5'd1;
  logic signed [ACC_W-1:0] out_score;
  logic busy, done, out_valid;
  logic [15:0] out_row, out_col;
  logic [PROB_W-1:0] out_prob;
  logic [31:0] stat_fires, stat_over, stat_rows;

  hyatten_top #(.NT(NT), .SH_DEPTH(SHD), .LOCAL_DEPTH(LD), .DD_DEPTH(DDD)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int q [MAXQ][MAXC*ARR], kk [MAXK][MAXC*ARR];
  int s [MAXQ][MAXK];
  int prob_ref [MAXQ][MAXK];
  bit seen [MAXQ][MAXK];
  int n_out, exp_over, exp_inrange;
  int ev_over = 0, ev_inrange = 0, ev_multichunk = 0, ev_multitile = 0, ev_multiblock = 0,
      ev_multibatch = 0;
  int ev_jobs = 0, ev_busy_write = 0, ev_plain = 0;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int e_ref(input int d);
    int hi, lo, eh, el;
    if (d >= (1 << 14)) return 0;
    hi = d >> 7; lo = d % 128;
    eh = $rtoi($exp(-real'(hi) * 128.0 / 16.0) * 32768.0 + 0.5);
    el = $rtoi($exp(-real'(lo) / 16.0) * 32768.0 + 0.5);
    return int'((longint'(eh) * longint'(el)) >>> 15);
  endfunction

  function automatic int val(input int density);
    if ($urandom_range(0, 99) >= density) return 0;
    return ($urandom_range(0, 1) ? 1 : -1) * $urandom_range(1, 2);
  endfunction

  task automatic hbm_write(input int addr, input logic [VEC_W-1:0] data);
    @(negedge clk);
    hbm_wr_en = 1; hbm_wr_addr = SAW'(addr); hbm_wr_data = data;
    @(negedge clk);
    hbm_wr_en = 0;
  endtask

  task automatic run_job(input int nb, input int nt, input int nc, input int density, input bit sm,
                         input int nbt);
    int nq, nk, qbase, kbase, cycles;
    logic [VEC_W-1:0] w;
    nq = nb * ARR; nk = nt * ARR * nbt; qbase = 0; kbase = nq * nc;
    for (int i = 0; i < nq; i++) for (int k = 0; k < nc*ARR; k++) q[i][k] = val(density);
    for (int n = 0; n < nk; n++) for (int k = 0; k < nc*ARR; k++) kk[n][k] = val(density);
    for (int i = 0; i < nq; i++)
      for (int c = 0; c < nc; c++) begin
        for (int k = 0; k < ARR; k++) w[k*DW +: DW] = 4'(q[i][c*ARR+k]);
        hbm_write(qbase + i*nc + c, w);
      end
    for (int n = 0; n < nk; n++)
      for (int c = 0; c < nc; c++) begin
        for (int k = 0; k < ARR; k++) w[k*DW +: DW] = 4'(kk[n][c*ARR+k]);
        hbm_write(kbase + n*nc + c, w);
      end
    // reference
    exp_over = 0; exp_inrange = 0;
    for (int i = 0; i < nq; i++)
      for (int n = 0; n < nk; n++) begin
        s[i][n] = 0;
        seen[i][n] = 0;
        for (int c = 0; c < nc; c++) begin
          int p;
          p = 0;
          for (int k = 0; k < ARR; k++) p += q[i][c*ARR+k] * kk[n][c*ARR+k];
          if (p > 7 || p < -8) exp_over++; else exp_inrange++;
          s[i][n] += p;
        end
      end
    for (int i = 0; i < nq; i++) begin
      int m, sum;
      m = s[i][0];
      for (int n = 0; n < nk; n++) if (s[i][n] > m) m = s[i][n];
      sum = 0;
      for (int n = 0; n < nk; n++) sum += e_ref(m - s[i][n]);
      for (int n = 0; n < nk; n++) prob_ref[i][n] = int'((longint'(e_ref(m - s[i][n])) <<< 15) / sum);
    end
    // run
    @(negedge clk);
    cfg_q_blocks = 8'(nb); cfg_k_tiles = (TW+1)'(nt); cfg_chunks = 5'(nc);
    cfg_q_base = SAW'(qbase); cfg_k_base = SAW'(kbase); cfg_softmax = sm; cfg_batches = 5'(nbt);
    start = 1;
    @(negedge clk);
    start = 0;
    n_out = 0;
    cycles = 0;
    // an off-chip write while busy must be ignored: overwrite a Q word with junk
    hbm_write(qbase, '1);
    ev_busy_write++;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (n_out != nq * nk) begin failures++; $display("%0d outputs, exp %0d", n_out, nq*nk); end
    for (int i = 0; i < nq; i++) for (int n = 0; n < nk; n++) begin
      checks++;
      if (!seen[i][n]) begin failures++; if (failures < 10) $display("missing (%0d,%0d)", i, n); end
    end
    checks++;
    if (int'(stat_over) != exp_over * ((64 + NT - 1) / NT)) begin failures++; $display("stat_over %0d exp %0d", stat_over, exp_over * ((64 + NT - 1) / NT)); end
    checks++;
    if (int'(stat_fires) != nb * nc * nbt * ((64 + NT - 1) / NT)) begin failures++; $display("stat_fires %0d", stat_fires); end
    checks++;
    if (int'(stat_rows) != nq) begin failures++; $display("stat_rows %0d", stat_rows); end
    ev_over += int'(stat_over);
    ev_inrange += exp_inrange;
    if (nc > 1) ev_multichunk++;
    if (nt > 1) ev_multitile++;
    if (nbt > 1) ev_multibatch++;
    if (nb > 1) ev_multiblock++;
    ev_jobs++;
    $display("job %0dx%0dx%0d: %0d cycles, %0d over-range of %0d partial dot products",
             nb, nt, nc, cycles, exp_over, exp_over + exp_inrange);
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int i, n;
      i = int'(out_row); n = int'(out_col);
      n_out++;
      checks++;
      if (i >= MAXQ || n >= MAXK) begin failures++; $display("bad coordinate %0d %0d", i, n); end
      else begin
        if (!cfg_softmax) begin
          ev_plain++;
          if (int'(out_score) != s[i][n]) begin
            failures++;
            if (failures < 10) $display("S(%0d,%0d)=%0d exp %0d", i, n, out_score, s[i][n]);
          end
        end else if (int'(out_prob) != prob_ref[i][n]) begin
          failures++;
          if (failures < 10) $display("P(%0d,%0d)=%0d exp %0d (score %0d)", i, n, out_prob, prob_ref[i][n], s[i][n]);
        end
        seen[i][n] = 1;
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_job(2, 2, 2, 25, 1, 1);
    run_job(1, 1, 1, 60, 1, 1);
    run_job(1, 2, 2, 30, 0, 1);
    run_job(2, 2, 1, 30, 1, 2);
    run_job(1, 1, 1, 30, 0, 2);
    checks += 7;
    if (ev_plain == 0)      begin failures++; $display("no plain-product job"); end
    if (ev_over == 0)       begin failures++; $display("no over-range output"); end
    if (ev_inrange == 0)    begin failures++; $display("no in-range output"); end
    if (ev_multichunk == 0) begin failures++; $display("no multi-chunk job"); end
    if (ev_multitile == 0)  begin failures++; $display("no multi-tile job"); end
    if (ev_multiblock == 0) begin failures++; $display("no multi-block job"); end
    if (ev_multibatch == 0) begin failures++; $display("no multi-batch job"); end
    if (ev_jobs < 2 || ev_busy_write == 0) begin failures++; $display("jobs"); end
    $display("events: over-range %0d, in-range %0d, multi-chunk jobs %0d, multi-tile jobs %0d, multi-block jobs %0d, multi-batch jobs %0d, jobs %0d, plain-product jobs %0d",
             ev_over, ev_inrange, ev_multichunk, ev_multitile, ev_multiblock, ev_multibatch, ev_jobs, ev_plain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
