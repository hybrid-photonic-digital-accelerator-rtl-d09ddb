// photonic_pe: the photonic processing element of one tile.
//
// It holds the tile's shard of the second operand (K for Q x K^T) in a local
// SRAM, converts it with a local PDAC bank into optical amplitudes, and
// multiplies it in the ARR x ARR photonic tensor core (DPTC) against the
// first operand, whose amplitudes arrive already converted from the chip's
// shared PDAC (broadcast to all tiles). The photocurrents are read out in
// ARR*ARR/N_ADC groups of N_ADC: each lane has an analog comparator that
// flags currents outside the 4-bit ADC range and a 4-bit ADC. Codes of
// in-range lanes are summed by the accumulators into the output register;
// flagged lanes have their coordinate appended to the coordinate register
// instead, for exact recomputation by the digital PE, whose result comes
// back through the correction port.
//
// Interface and timing (all driven by the chip controller):
//  - ls_*: local SRAM port; read data appears on ls_rdata one cycle after a
//    read. Writes fill the SRAM with K vectors.
//  - lp_load/lp_idx: with a local SRAM read in the same cycle, loads the
//    returned vector into local-PDAC vector lp_idx one cycle later.
//  - fire: the DPTC latches its currents at this clock edge.
//  - rd_valid/rd_group/rd_chunk: read out one group. The comparator flag and
//    the ADC code are sampled on that edge and accumulated / logged on the
//    next, so a group's effect is visible two edges after it is issued.
//  - cr_*: coordinate register read and clear; corr_*: correction port;
//    or_rd_*: output register read.
//
// The block list (local SRAM, local PDAC, DPTC, analog comparator, ADCs,
// accumulators, OR, coordinate register) and their sizes follow the paper;
// the pipeline timing and ports are this design's.
module photonic_pe
  import hyatten_pkg::*;
#(
  parameter int LOCAL_DEPTH = 1024,      // 32 KB of 256-bit words
  parameter int COORD_DEPTH = ARR * ARR, // 8 KB of 16-bit entries
  parameter int LAW         = $clog2(LOCAL_DEPTH),
  parameter int CIW         = $clog2(COORD_DEPTH),
  parameter int GW          = $clog2(ARR*ARR/N_ADC)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // local SRAM
  input  logic                    ls_en,
  input  logic                    ls_we,
  input  logic [LAW-1:0]          ls_addr,
  input  logic [VEC_W-1:0]        ls_wdata,
  output logic [VEC_W-1:0]        ls_rdata,
  // local PDAC load
  input  logic                    lp_load,
  input  logic [5:0]              lp_idx,
  // optical input from the shared PDAC
  input  real                     a_amp [ARR][ARR],
  // DPTC and read-out
  input  logic                    fire,
  input  logic                    acc_clear,
  input  logic                    rd_valid,
  input  logic [GW-1:0]           rd_group,
  input  logic [3:0]              rd_chunk,
  // coordinate register
  input  logic                    cr_clear,
  input  logic [CIW-1:0]          cr_idx,
  output coord_t                  cr_coord,
  output logic [CIW:0]            cr_count,
  output logic                    cr_overflow,
  // correction from the digital PE
  input  logic                    corr_valid,
  input  logic [5:0]              corr_row,
  input  logic [5:0]              corr_col,
  input  logic signed [ACC_W-1:0] corr_value,
  // output register read
  input  logic [5:0]              or_rd_row,
  input  logic [5:0]              or_rd_col,
  output logic signed [ACC_W-1:0] or_rd_value
);
  localparam int GPR = ARR / N_ADC;

  // ---------------------------------------------------------------- local SRAM
  sram_sp #(.WIDTH(VEC_W), .DEPTH(LOCAL_DEPTH)) u_local_sram (
    .clk, .en(ls_en), .we(ls_we), .addr(ls_addr), .wdata(ls_wdata), .rdata(ls_rdata)
  );

  // ---------------------------------------------------------------- local PDAC
  logic       lp_load_q;
  logic [5:0] lp_idx_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lp_load_q <= 1'b0;
      lp_idx_q  <= '0;
    end else begin
      lp_load_q <= lp_load;
      lp_idx_q  <= lp_idx;
    end
  end

  real b_amp [ARR][ARR];
  pdac_bank #(.ARR(ARR), .DW(DW)) u_local_pdac (
    .clk, .load(lp_load_q), .idx(lp_idx_q), .codes(ls_rdata), .amp(b_amp)
  );

  // ---------------------------------------------------------------- DPTC
  real rd_current [N_ADC];
  dptc_array #(.ARR(ARR), .N_ADC(N_ADC)) u_dptc (
    .clk, .fire, .a_amp, .b_amp, .rd_group, .rd_current
  );

  // ---------------------------------------------------------------- comparators and ADCs
  logic [N_ADC-1:0]               over_now;
  logic signed [ADC_BITS-1:0]     code [N_ADC];
  for (genvar l = 0; l < N_ADC; l++) begin : g_lane
    analog_comparator u_cmp (.vin(rd_current[l]), .over(over_now[l]));
    adc #(.BITS(ADC_BITS)) u_adc (.clk, .sample(rd_valid), .vin(rd_current[l]), .code(code[l]));
  end

  logic             s_valid;
  logic [GW-1:0]    s_group;
  logic [3:0]       s_chunk;
  logic [N_ADC-1:0] s_over;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid <= 1'b0;
      s_group <= '0;
      s_chunk <= '0;
      s_over  <= '0;
    end else begin
      s_valid <= rd_valid;
      if (rd_valid) begin
        s_group <= rd_group;
        s_chunk <= rd_chunk;
        s_over  <= over_now;
      end
    end
  end

  // ---------------------------------------------------------------- accumulators + OR
  accum_or #(.ARR_N(ARR), .LANES(N_ADC), .AW(ACC_W)) u_accum (
    .clk, .rst_n, .clear(acc_clear),
    .acc_valid(s_valid), .acc_group(s_group), .acc_code(code), .acc_over(s_over),
    .corr_valid, .corr_row, .corr_col, .corr_value,
    .rd_row(or_rd_row), .rd_col(or_rd_col), .rd_value(or_rd_value)
  );

  // ---------------------------------------------------------------- coordinate register
  coord_t s_coord [N_ADC];
  always_comb begin
    for (int l = 0; l < N_ADC; l++) begin
      s_coord[l].chunk = s_chunk;
      s_coord[l].row   = 6'(int'(s_group) / GPR);
      s_coord[l].col   = 6'((int'(s_group) % GPR) * N_ADC + l);
    end
  end

  coord_register #(.LANES(N_ADC), .DEPTH(COORD_DEPTH)) u_coord (
    .clk, .rst_n, .clear(cr_clear), .wr_valid(s_valid), .wr_flag(s_over),
    .wr_coord(s_coord), .rd_idx(cr_idx), .rd_coord(cr_coord),
    .count(cr_count), .overflow(cr_overflow)
  );
endmodule
