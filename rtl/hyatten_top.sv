// hyatten_top: hybrid photonic-digital attention accelerator.
//
// The chip computes attention scores S = Q x K^T with photonic tensor cores
// read out by cheap 4-bit ADCs, and repairs the few outputs that do not fit
// those ADCs in a small digital PE, so that the scores are exact; a digital
// softmax unit then turns each row of scores into probabilities.
//
// Structure:
//  - photonic die: a shared SRAM (2 MB) written from off-chip memory
//    (hbm_wr_*), a shared PDAC whose optical output is broadcast to all
//    tiles, and one photonic PE per tile (N_TILES = 32), each with a local
//    SRAM, local PDAC, 64 x 64 tensor core, 32 comparators, 32 ADCs,
//    32 accumulators, output register and coordinate register;
//  - one digital die per tile: a shared SRAM (staging for the digital PE and
//    one row of scores), a digital PE and a softmax unit;
//  - hyatten_ctrl sequences a job and acts as memory controller.
//
// Use: with the chip idle, write Q and K into the shared SRAM through
// hbm_wr_* (one 64 x 4-bit vector per word, layout in hyatten_ctrl), set
// cfg_* (cfg_batches: key shards per tile held in local SRAM) and pulse
// start. Probabilities (cfg_softmax = 1) or exact integer products
// (cfg_softmax = 0, out_score) stream out on out_valid with their row and
// column; done pulses at the end. hbm_wr_* is ignored while busy.
//
// Sizes and the block structure follow the paper. Off-chip memory is outside
// the chip: its write path is the hbm_wr_* port and its read path the out_*
// port. The analog and optical parts (PDACs, tensor cores, comparators, ADCs)
// are behavioural models; everything else is synthesizable.
//
// Lint notes: rst_n also appears in assertions' disable iff (not in logic);
// each digital die's dd_rdata is left open because the controller only writes
// the die SRAMs (the digital PE and softmax unit read them inside the die).
module hyatten_top
  import hyatten_pkg::*;
#(
  parameter int NT          = N_TILES,
  parameter int SH_DEPTH    = 65536,      // 2 MB of 256-bit words
  parameter int LOCAL_DEPTH = 1024,       // 32 KB of 256-bit words
  parameter int DD_DEPTH    = 4096,       // digital-die SRAM per tile, 128 KB
  parameter int SAW         = $clog2(SH_DEPTH),
  parameter int TW          = (NT > 1) ? $clog2(NT) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // off-chip memory -> shared SRAM
  input  logic              hbm_wr_en,
  input  logic [SAW-1:0]    hbm_wr_addr,
  input  logic [VEC_W-1:0]  hbm_wr_data,
  // job
  input  logic              start,
  input  logic [7:0]        cfg_q_blocks,
  input  logic [TW:0]       cfg_k_tiles,
  input  logic [4:0]        cfg_chunks,
  input  logic [SAW-1:0]    cfg_q_base,
  input  logic [SAW-1:0]    cfg_k_base,
  input  logic              cfg_softmax,
  input  logic [4:0]        cfg_batches,
  output logic              busy,
  output logic              done,
  // probabilities -> off-chip memory
  output logic              out_valid,
  output logic [15:0]       out_row,
  output logic [15:0]       out_col,
  output logic [PROB_W-1:0] out_prob,
  output logic signed [ACC_W-1:0] out_score,
  // event counters of the last job
  output logic [31:0]       stat_fires,
  output logic [31:0]       stat_over,
  output logic [31:0]       stat_rows
);
  localparam int COORD_DEPTH = ARR * ARR;
  localparam int LAW = $clog2(LOCAL_DEPTH);
  localparam int CIW = $clog2(COORD_DEPTH);
  localparam int DAW = $clog2(DD_DEPTH);
  localparam int GW  = $clog2(ARR*ARR/N_ADC);

  // ------------------------------------------------------------ controller wires
  logic                    sh_en;
  logic [SAW-1:0]          sh_addr;
  logic [VEC_W-1:0]        sh_rdata;
  logic                    sp_load;
  logic [5:0]              sp_idx;
  logic                    ls_en;
  logic [NT-1:0]           ls_we;
  logic [LAW-1:0]          ls_addr;
  logic [VEC_W-1:0]        ls_wdata;
  logic [VEC_W-1:0]        ls_rdata [NT];
  logic                    lp_load;
  logic [5:0]              lp_idx;
  logic                    fire, acc_clear, rd_valid, cr_clear;
  logic [GW-1:0]           rd_group;
  logic [3:0]              rd_chunk;
  logic [CIW-1:0]          cr_idx;
  coord_t                  cr_coord [NT];
  logic [CIW:0]            cr_count [NT];
  logic                    cr_overflow [NT];
  logic [NT-1:0]           corr_valid;
  logic [5:0]              corr_row, corr_col, or_rd_row, or_rd_col;
  logic signed [ACC_W-1:0] corr_value;
  logic signed [ACC_W-1:0] or_rd_value [NT];
  logic [NT-1:0]           dd_sel, dd_grant_pe;
  logic                    dd_we;
  logic [DAW-1:0]          dd_addr;
  logic [VEC_W-1:0]        dd_wdata;
  logic [NT-1:0]           instr_valid, instr_ready, res_valid, res_ready, pe_idle;
  dpe_instr_t              instr;
  dpe_result_t             res [NT];
  logic [NT-1:0]           sm_in_valid, sm_in_ready, sm_out_valid, sm_out_last;
  logic                    sm_in_last;
  logic [PROB_W-1:0]       sm_out_prob [NT];

  // ------------------------------------------------------------ photonic die: shared parts
  logic           shm_en, shm_we;
  logic [SAW-1:0] shm_addr;
  assign shm_en   = busy ? sh_en : hbm_wr_en;
  assign shm_we   = !busy && hbm_wr_en;
  assign shm_addr = busy ? sh_addr : hbm_wr_addr;

  sram_sp #(.WIDTH(VEC_W), .DEPTH(SH_DEPTH)) u_shared_sram (
    .clk, .en(shm_en), .we(shm_we), .addr(shm_addr), .wdata(hbm_wr_data), .rdata(sh_rdata)
  );

  real a_amp [ARR][ARR];
  pdac_bank #(.ARR(ARR), .DW(DW)) u_shared_pdac (
    .clk, .load(sp_load), .idx(sp_idx), .codes(sh_rdata), .amp(a_amp)
  );

  // ------------------------------------------------------------ tiles: photonic die + digital die
  for (genvar ti = 0; ti < NT; ti++) begin : g_tile
    photonic_pe #(.LOCAL_DEPTH(LOCAL_DEPTH), .COORD_DEPTH(COORD_DEPTH)) u_ppe (
      .clk, .rst_n,
      .ls_en, .ls_we(ls_we[ti]), .ls_addr, .ls_wdata, .ls_rdata(ls_rdata[ti]),
      .lp_load, .lp_idx, .a_amp,
      .fire, .acc_clear, .rd_valid, .rd_group, .rd_chunk,
      .cr_clear, .cr_idx, .cr_coord(cr_coord[ti]), .cr_count(cr_count[ti]),
      .cr_overflow(cr_overflow[ti]),
      .corr_valid(corr_valid[ti]), .corr_row, .corr_col, .corr_value,
      .or_rd_row, .or_rd_col, .or_rd_value(or_rd_value[ti])
    );

    digital_die #(.DD_DEPTH(DD_DEPTH)) u_dd (
      .clk, .rst_n,
      .dd_en(dd_sel[ti]), .dd_we, .dd_addr, .dd_wdata, .dd_rdata(),
      .pe_grant(dd_grant_pe[ti]),
      .instr_valid(instr_valid[ti]), .instr_ready(instr_ready[ti]), .instr,
      .res_valid(res_valid[ti]), .res_ready(res_ready[ti]), .res(res[ti]),
      .pe_idle(pe_idle[ti]),
      .sm_in_valid(sm_in_valid[ti]), .sm_in_ready(sm_in_ready[ti]), .sm_in_last,
      .sm_out_valid(sm_out_valid[ti]), .sm_out_prob(sm_out_prob[ti]),
      .sm_out_last(sm_out_last[ti])
    );
  end

  // ------------------------------------------------------------ controller
  hyatten_ctrl #(
    .NT(NT), .SH_DEPTH(SH_DEPTH), .LOCAL_DEPTH(LOCAL_DEPTH), .COORD_DEPTH(COORD_DEPTH),
    .DD_DEPTH(DD_DEPTH)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg_q_blocks, .cfg_k_tiles, .cfg_chunks, .cfg_q_base, .cfg_k_base, .cfg_softmax, .cfg_batches,
    .busy, .done,
    .sh_en, .sh_addr, .sh_rdata, .sp_load, .sp_idx,
    .ls_en, .ls_we, .ls_addr, .ls_wdata, .ls_rdata, .lp_load, .lp_idx,
    .fire, .acc_clear, .rd_valid, .rd_group, .rd_chunk,
    .cr_clear, .cr_idx, .cr_coord, .cr_count,
    .corr_valid, .corr_row, .corr_col, .corr_value,
    .or_rd_row, .or_rd_col, .or_rd_value,
    .dd_sel, .dd_we, .dd_addr, .dd_wdata, .dd_grant_pe,
    .instr_valid, .instr_ready, .instr, .res_valid, .res_ready, .res,
    .sm_in_valid, .sm_in_last, .sm_out_valid, .sm_out_prob, .sm_out_last,
    .out_valid, .out_row, .out_col, .out_prob, .out_score,
    .stat_fires, .stat_over, .stat_rows
  );

  // The softmax unit accepts every streamed score; the coordinate registers
  // never overflow (one clear per array firing).
  for (genvar ti = 0; ti < NT; ti++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) sm_in_valid[ti] |-> sm_in_ready[ti]);
    assert property (@(posedge clk) disable iff (!rst_n) !cr_overflow[ti]);
    assert property (@(posedge clk) disable iff (!rst_n) busy || pe_idle[ti]);
  end
endmodule
