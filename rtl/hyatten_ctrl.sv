// hyatten_ctrl: chip controller and memory controller. It runs one attention
// score job, P = softmax(Q x K^T) row by row, over all tiles; with
// cfg_softmax low it runs the same job as a plain product A x B^T and sends
// out the exact integer results instead (the mode for S x V, with the
// quantised probabilities as A and V^T as B).
//
// Data layout (set by whoever fills the shared SRAM from off-chip memory):
// row r of Q, chunk c (64 elements of the head dimension, one 256-bit word)
// is at q_base + r*n_chunks + c; key n of K, chunk c is at
// k_base + n*n_chunks + c. The keys are split into cfg_batches batches of
// bw = 64*cfg_k_tiles keys; within batch b, tile t owns keys
// b*bw + 64t .. b*bw + 64t + 63, all batches of a tile sitting in its local
// SRAM at once (key slot b*64 + k).
//
// Sequence (numbers are the dataflow steps of the architecture):
//  DIST      (2)  copy every key vector from the shared SRAM into the local
//                 SRAM of its tile, one word per cycle.
//  for each block of 64 Q rows, for each group of NT rows (one row per
//  digital die, row r in die r mod NT):
//   for each batch b:
//    for each chunk c:
//     LOAD   (2,3) 64 cycles: Q rows of the block (chunk c) go through the
//                 shared PDAC, broadcast to all tiles; at the same time every
//                 tile loads its 64 keys of batch b (chunk c) into its local
//                 PDAC.
//     FIRE   (3)  all tensor cores fire together.
//     READ   (3,4) 128 cycles: groups of 32 outputs pass the comparators and
//                 ADCs; in-range codes accumulate in each tile's output
//                 register, over-range coordinates are logged.
//     OVER   (5,6) for each logged coordinate, tile by tile: fetch the Q and K
//                 vectors of that output, stage them in the shared SRAM of
//                 the tile's own digital die (words 0 and 1), issue
//                 LDA/LDB/MAC/ST to its digital PE and add the exact result
//                 into the tile's output register. Then clear the
//                 coordinate registers.
//    COPY    (4,5) for each row r of the group: move the batch's scores of
//                 row r (all tiles) into the shared SRAM of digital die
//                 r mod NT, one score per word from word S_BASE + b*bw.
//   SOFTMAX  (7,8) for each row of the group: stream the row (all batches)
//                 three times into its die's softmax unit; its
//                 probabilities leave on out_* towards off-chip memory.
//                 In plain-product mode each row leaves on out_score during
//                 COPY instead (one result per cycle) and no softmax runs.
// With NT < 64 the photonic work of a block is repeated once per row group
// (64/NT times), which keeps the score buffer of a die at one row. A job
// needs S_BASE + cfg_batches*bw <= DD_DEPTH and
// cfg_batches*64*cfg_chunks <= LOCAL_DEPTH.
//
// The order of steps, the broadcast of the first operand, the per-tile
// second operand and the digital recomputation of logged coordinates follow
// the paper. Processing logged coordinates after every chunk (which bounds
// the coordinate register at one array's outputs), merging digital results
// into the output register, the single-entry serial digital path, the row
// groups and the memory layout are this design's choices. Holding several
// shards (batches) per tile in the local SRAM follows the paper's batching.
//
// Lint notes rst_n as used both asynchronously and synchronously: the
// synchronous use is only the disable iff of the assertion.
module hyatten_ctrl
  import hyatten_pkg::*;
#(
  parameter int NT          = N_TILES,
  parameter int SH_DEPTH    = 65536,
  parameter int LOCAL_DEPTH = 1024,
  parameter int COORD_DEPTH = ARR * ARR,
  parameter int DD_DEPTH    = 4096,
  parameter int S_BASE      = 2,
  parameter int SAW         = $clog2(SH_DEPTH),
  parameter int LAW         = $clog2(LOCAL_DEPTH),
  parameter int CIW         = $clog2(COORD_DEPTH),
  parameter int DAW         = $clog2(DD_DEPTH),
  parameter int TW          = (NT > 1) ? $clog2(NT) : 1,
  parameter int GW          = $clog2(ARR*ARR/N_ADC)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // job
  input  logic                    start,
  input  logic [7:0]              cfg_q_blocks,   // number of 64-row Q blocks
  input  logic [TW:0]             cfg_k_tiles,    // keys / 64 = tiles used (1..NT)
  input  logic [4:0]              cfg_chunks,     // head dimension / 64 (1..16)
  input  logic [SAW-1:0]          cfg_q_base,
  input  logic [SAW-1:0]          cfg_k_base,
  input  logic                    cfg_softmax,
  input  logic [4:0]              cfg_batches,    // 1: probabilities, 0: raw products
  output logic                    busy,
  output logic                    done,
  // photonic-die shared SRAM (read side)
  output logic                    sh_en,
  output logic [SAW-1:0]          sh_addr,
  input  logic [VEC_W-1:0]        sh_rdata,
  // shared PDAC
  output logic                    sp_load,
  output logic [5:0]              sp_idx,
  // tiles
  output logic                    ls_en,
  output logic [NT-1:0]           ls_we,
  output logic [LAW-1:0]          ls_addr,
  output logic [VEC_W-1:0]        ls_wdata,
  input  logic [VEC_W-1:0]        ls_rdata [NT],
  output logic                    lp_load,
  output logic [5:0]              lp_idx,
  output logic                    fire,
  output logic                    acc_clear,
  output logic                    rd_valid,
  output logic [GW-1:0]           rd_group,
  output logic [3:0]              rd_chunk,
  output logic                    cr_clear,
  output logic [CIW-1:0]          cr_idx,
  input  coord_t                  cr_coord [NT],
  input  logic [CIW:0]            cr_count [NT],
  output logic [NT-1:0]           corr_valid,
  output logic [5:0]              corr_row,
  output logic [5:0]              corr_col,
  output logic signed [ACC_W-1:0] corr_value,
  output logic [5:0]              or_rd_row,
  output logic [5:0]              or_rd_col,
  input  logic signed [ACC_W-1:0] or_rd_value [NT],
  // digital dies: SRAM access (one die selected) and arbitration
  output logic [NT-1:0]           dd_sel,
  output logic                    dd_we,
  output logic [DAW-1:0]          dd_addr,
  output logic [VEC_W-1:0]        dd_wdata,
  output logic [NT-1:0]           dd_grant_pe,
  // digital PEs
  output logic [NT-1:0]           instr_valid,
  input  logic [NT-1:0]           instr_ready,
  output dpe_instr_t              instr,
  input  logic [NT-1:0]           res_valid,
  output logic [NT-1:0]           res_ready,
  input  dpe_result_t             res [NT],
  // softmax units (the score is the selected die's SRAM read data)
  output logic [NT-1:0]           sm_in_valid,
  output logic                    sm_in_last,
  input  logic [NT-1:0]           sm_out_valid,
  input  logic [PROB_W-1:0]       sm_out_prob [NT],
  input  logic [NT-1:0]           sm_out_last,
  // results towards off-chip memory
  output logic                    out_valid,
  output logic [15:0]             out_row,
  output logic [15:0]             out_col,
  output logic [PROB_W-1:0]       out_prob,
  output logic signed [ACC_W-1:0] out_score,
  // event counters
  output logic [31:0]             stat_fires,
  output logic [31:0]             stat_over,
  output logic [31:0]             stat_rows
);
  typedef enum logic [4:0] {
    S_IDLE, S_DIST, S_DIST_END, S_BLK, S_LOAD, S_LOAD_WAIT, S_FIRE, S_READ, S_DRAIN,
    S_OV_CHECK, S_OV_FETCH, S_OV_STAGE1, S_OV_STAGE2, S_OV_ISSUE, S_OV_WAIT, S_OV_END,
    S_COPY, S_ROW_END, S_STREAM, S_SM_WAIT, S_SM_END, S_DONE
  } state_t;

  state_t state;

  // loop counters
  logic [7:0]       qb;          // Q block
  logic [3:0]       ch;          // chunk
  logic [3:0]       b;           // batch of key shards held in the local SRAMs
  logic [5:0]       rg0;         // first row of the current row group
  logic [15:0]      j;           // key within the current batch (DIST)
  logic [15:0]      n;           // key (DIST, COPY, STREAM)
  logic [5:0]       r;           // row within block (LOAD, softmax rows)
  logic [GW-1:0]    g;           // read-out group
  logic [TW-1:0]    t;           // tile (OVER)
  logic [CIW:0]     e;           // coordinate entry (OVER)
  logic [1:0]       p;           // softmax pass
  logic [1:0]       k;           // instruction within the OVER sequence
  logic [1:0]       drain;
  logic [15:0]      ocol;
  logic [VEC_W-1:0] kbuf;
  coord_t           cur;

  // DIST write pipeline
  logic             dw_valid;
  logic [TW-1:0]    dw_tile;
  logic [LAW-1:0]   dw_addr;
  // softmax stream pipeline
  logic             ss_valid, ss_last;

  // Digital die in use: the die of tile t while recomputing that tile's
  // over-range outputs; die (row mod NT) for the softmax of a score row.
  logic [TW-1:0] die;
  assign die = (state == S_COPY || state == S_ROW_END || state == S_STREAM || state == S_SM_WAIT ||
              state == S_SM_END)
             ? TW'(int'(r) % NT) : t;
  dpe_result_t cur_res;
  logic        sm_v, sm_l;
  assign cur_res = res[die];
  assign sm_v    = sm_out_valid[die];
  assign sm_l    = sm_out_last[die];

  // keys per batch (64 per tile) and in the whole job; batch b holds keys
  // b*bw .. b*bw+bw-1, of which tile t holds the 64 from b*bw + 64t.
  logic [15:0] bw, n_keys, b_off;
  assign bw     = 16'(cfg_k_tiles) << 6;
  assign n_keys = 16'(bw * 16'(cfg_batches));
  assign b_off  = 16'(bw * 16'(b));

  // Rows are handled in groups of NT (one row per digital die, row r in die
  // r mod NT): all batches of a block are computed and the group's rows
  // copied, then the group's rows go through the softmax.
  logic [5:0] rg_last;
  assign rg_last = (int'(rg0) + NT - 1 > 63) ? 6'd63 : 6'(int'(rg0) + NT - 1);

  // address helpers
  function automatic logic [SAW-1:0] q_addr(input logic [7:0] blk, input logic [5:0] row,
                                            input logic [3:0] c);
    return SAW'(cfg_q_base + SAW'(({8'd0, blk} * 16'd64 + 16'(row)) * 16'(cfg_chunks)) + SAW'(c));
  endfunction
  function automatic logic [LAW-1:0] l_addr(input logic [3:0] bt, input logic [5:0] key,
                                            input logic [3:0] c);
    return LAW'(({6'd0, bt, 6'd0} + 16'(key)) * 16'(cfg_chunks) + 16'(c));
  endfunction

  assign busy     = (state != S_IDLE);
  assign rd_chunk = ch;
  assign rd_group = g;
  assign cr_idx   = e[CIW-1:0];
  assign ls_wdata = sh_rdata;
  assign cur      = cr_coord[t];

  // ---------------------------------------------------------------- combinational outputs
  always_comb begin
    sh_en = 1'b0;  sh_addr = '0;
    ls_en = 1'b0;  ls_we = '0;  ls_addr = '0;
    lp_load = 1'b0;  lp_idx = r;
    fire = 1'b0;  acc_clear = 1'b0;  rd_valid = 1'b0;  cr_clear = 1'b0;
    dd_sel = '0;  dd_we = 1'b0;  dd_addr = '0;  dd_wdata = '0;  dd_grant_pe = '0;
    instr_valid = '0;  instr = '0;  res_ready = '0;
    or_rd_row = r;  or_rd_col = n[5:0];
    corr_valid = '0;  corr_row = '0;  corr_col = '0;  corr_value = '0;

    if (dw_valid) begin                    // DIST write, one cycle after the read
      ls_en = 1'b1;
      ls_we[dw_tile] = 1'b1;
      ls_addr = dw_addr;
    end

    unique case (state)
      S_DIST: begin
        sh_en   = 1'b1;
        sh_addr = SAW'(cfg_k_base + SAW'(n * 16'(cfg_chunks)) + SAW'(ch));
      end
      S_BLK:  acc_clear = 1'b1;
      S_LOAD: begin
        sh_en   = 1'b1;
        sh_addr = q_addr(qb, r, ch);
        ls_en   = 1'b1;
        ls_addr = l_addr(b, r, ch);
        lp_load = 1'b1;
      end
      S_FIRE: fire = 1'b1;
      S_READ: rd_valid = 1'b1;
      S_OV_FETCH: begin
        sh_en   = 1'b1;
        sh_addr = q_addr(qb, cur.row, cur.chunk);
        ls_en   = 1'b1;
        ls_addr = l_addr(b, cur.col, cur.chunk);
      end
      S_OV_STAGE1: begin
        dd_sel[die] = 1'b1;  dd_we = 1'b1;  dd_addr = '0;  dd_wdata = sh_rdata;
      end
      S_OV_STAGE2: begin
        dd_sel[die] = 1'b1;  dd_we = 1'b1;  dd_addr = DAW'(1);  dd_wdata = kbuf;
      end
      S_OV_ISSUE: begin
        dd_grant_pe[die] = 1'b1;
        instr_valid[die] = 1'b1;
        unique case (k)
          2'd0: begin instr.op = OP_LDA; instr.addr = 16'd0; end
          2'd1: begin instr.op = OP_LDB; instr.addr = 16'd1; end
          2'd2: begin instr.op = OP_MAC; end
          default: begin
            instr.op  = OP_ST;
            instr.tag = {8'(t), cur};
          end
        endcase
      end
      S_OV_WAIT: begin
        dd_grant_pe[die] = 1'b1;
        res_ready[die]   = 1'b1;
        if (res_valid[die]) begin
          corr_valid[TW'(cur_res.tag[23:16])] = 1'b1;
          corr_row   = cur_res.tag[11:6];
          corr_col   = cur_res.tag[5:0];
          corr_value = cur_res.value;
        end
      end
      S_OV_END: cr_clear = 1'b1;
      S_COPY: begin
        dd_sel[die] = cfg_softmax;  dd_we = 1'b1;
        dd_addr  = DAW'(S_BASE) + DAW'(b_off) + DAW'(n);
        dd_wdata = VEC_W'(or_rd_value[TW'(n >> 6)]);
      end
      S_STREAM: begin
        dd_sel[die] = 1'b1;
        dd_addr = DAW'(S_BASE) + DAW'(n);
      end
      default: ;
    endcase
  end

  // shared PDAC load, aligned with the shared SRAM data
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp_load <= 1'b0;
      sp_idx  <= '0;
    end else begin
      sp_load <= (state == S_LOAD);
      sp_idx  <= r;
    end
  end

  // softmax input, aligned with the digital-die SRAM data
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ss_valid <= 1'b0;
      ss_last  <= 1'b0;
    end else begin
      ss_valid <= (state == S_STREAM);
      ss_last  <= (state == S_STREAM) && (n == n_keys - 1'b1);
    end
  end
  always_comb begin
    sm_in_valid = '0;
    sm_in_valid[die] = ss_valid;
  end
  assign sm_in_last  = ss_last;

  assign out_valid = cfg_softmax ? sm_v : (state == S_COPY);
  assign out_score = or_rd_value[TW'(n >> 6)];
  assign out_prob  = sm_out_prob[die];
  assign out_row   = {qb, 8'd0} >> 2 | 16'(r);   // qb*64 + r
  assign out_col   = cfg_softmax ? ocol : b_off + n;

  // ---------------------------------------------------------------- state machine
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      qb <= '0; ch <= '0; n <= '0; r <= '0; g <= '0; t <= '0; e <= '0; p <= '0; k <= '0;
      drain <= '0; ocol <= '0; kbuf <= '0;
      dw_valid <= 1'b0; dw_tile <= '0; dw_addr <= '0;
      done <= 1'b0;
      stat_fires <= '0; stat_over <= '0; stat_rows <= '0;
    end else begin
      done     <= 1'b0;
      dw_valid <= 1'b0;
      if (sm_v) ocol <= sm_l ? '0 : ocol + 1'b1;

      unique case (state)
        S_IDLE: if (start) begin
          state <= S_DIST;
          n <= '0; j <= '0; b <= '0; ch <= '0; qb <= '0; rg0 <= '0;
          stat_fires <= '0; stat_over <= '0; stat_rows <= '0;
        end

        S_DIST: begin
          dw_valid <= 1'b1;
          dw_tile  <= TW'(j >> 6);
          dw_addr  <= l_addr(b, j[5:0], ch);
          if (ch == 4'(cfg_chunks - 1'b1)) begin
            ch <= '0;
            if (n == n_keys - 1'b1) state <= S_DIST_END;
            else begin
              n <= n + 1'b1;
              if (j == bw - 1'b1) begin
                j <= '0;
                b <= b + 1'b1;
              end else j <= j + 1'b1;
            end
          end else ch <= ch + 1'b1;
        end

        S_DIST_END: begin                   // last local write happens here
          b <= '0;
          state <= S_BLK;
        end

        S_BLK: begin
          ch <= '0; r <= '0;
          state <= S_LOAD;
        end

        S_LOAD: begin
          r <= r + 1'b1;
          if (r == 6'd63) state <= S_LOAD_WAIT;
        end

        S_LOAD_WAIT: state <= S_FIRE;        // last PDAC vectors latch here

        S_FIRE: begin
          stat_fires <= stat_fires + 1'b1;
          g <= '0;
          state <= S_READ;
        end

        S_READ: begin
          g <= g + 1'b1;
          if (g == GW'(ARR*ARR/N_ADC - 1)) begin
            drain <= '0;
            state <= S_DRAIN;
          end
        end

        S_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 2'd1) begin
            t <= '0; e <= '0;
            state <= S_OV_CHECK;
          end
        end

        S_OV_CHECK: begin
          if (e < cr_count[t]) state <= S_OV_FETCH;
          else if ((TW+1)'(t) == cfg_k_tiles - 1'b1) state <= S_OV_END;
          else begin
            t <= t + 1'b1;
            e <= '0;
          end
        end

        S_OV_FETCH:  state <= S_OV_STAGE1;
        S_OV_STAGE1: begin
          kbuf  <= ls_rdata[t];
          state <= S_OV_STAGE2;
        end
        S_OV_STAGE2: begin
          k <= '0;
          state <= S_OV_ISSUE;
        end
        S_OV_ISSUE: if (instr_ready[die]) begin
          k <= k + 1'b1;
          if (k == 2'd3) state <= S_OV_WAIT;
        end
        S_OV_WAIT: if (res_valid[die]) begin
          stat_over <= stat_over + 1'b1;
          e <= e + 1'b1;
          state <= S_OV_CHECK;
        end

        S_OV_END: begin
          r <= '0;
          if (ch == 4'(cfg_chunks - 1'b1)) begin
            r <= rg0;
            n <= '0;
            state <= S_COPY;
          end else begin
            ch <= ch + 1'b1;
            state <= S_LOAD;
          end
        end

        S_COPY: begin
          if (n == bw - 1'b1) state <= S_ROW_END;
          else n <= n + 1'b1;
        end

        S_ROW_END: begin                     // next row, next batch, softmax or next group
          n <= '0;
          if (!cfg_softmax && b == 4'(cfg_batches - 1'b1)) stat_rows <= stat_rows + 1'b1;
          if (r != rg_last) begin
            r <= r + 1'b1;
            state <= S_COPY;
          end else if (b != 4'(cfg_batches - 1'b1)) begin
            b <= b + 1'b1;
            state <= S_BLK;
          end else if (cfg_softmax) begin
            r <= rg0; p <= '0;
            state <= S_STREAM;
          end else begin
            b <= '0;
            if (rg_last != 6'd63) begin
              rg0   <= rg_last + 1'b1;
              state <= S_BLK;
            end else if (qb == cfg_q_blocks - 1'b1) state <= S_DONE;
            else begin
              qb    <= qb + 1'b1;
              rg0   <= '0;
              state <= S_BLK;
            end
          end
        end

        S_STREAM: begin
          if (n == n_keys - 1'b1) begin
            n <= '0;
            if (p == 2'd2) state <= S_SM_WAIT;
            else p <= p + 1'b1;
          end else n <= n + 1'b1;
        end

        S_SM_WAIT: if (sm_v && sm_l) state <= S_SM_END;

        S_SM_END: begin                      // next softmax row, next group, or done
          stat_rows <= stat_rows + 1'b1;
          n <= '0; p <= '0;
          if (r != rg_last) begin
            r <= r + 1'b1;
            state <= S_STREAM;
          end else begin
            b <= '0;
            if (rg_last != 6'd63) begin
              rg0   <= rg_last + 1'b1;
              state <= S_BLK;
            end else if (qb == cfg_q_blocks - 1'b1) state <= S_DONE;
            else begin
              qb    <= qb + 1'b1;
              rg0   <= '0;
              state <= S_BLK;
            end
          end
        end

        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // At most one digital die is addressed at a time.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(dd_sel) && $onehot0(dd_grant_pe));
endmodule
