// digital_die: the digital die of one tile. It holds a shared SRAM, the
// digital PE and the softmax unit, and does the work that would otherwise
// need high-resolution converters: exact recomputation of the over-range dot
// products of its tile, and the softmax of score rows.
//
// The SRAM (256-bit words) is written by the chip controller: staged operand
// vectors for the digital PE (words 0 and 1) and one row of scores, one score
// per word in the low ACC_W bits. While pe_grant is high the digital PE owns
// the SRAM port; otherwise the controller does. The controller streams a
// score row from the SRAM into the softmax unit itself (sm_in_*: the SRAM's
// read data is the score), and results leave on res_* and sm_out_*.
// Timing is that of the parts: SRAM read latency 1, digital PE and softmax
// unit as described in their files.
//
// The three parts and their roles follow the paper; the SRAM's size and use
// as a staging and row buffer and the port arbitration are this design's.
//
// Lint notes: rst_n also appears in an assertion's disable iff (not in logic),
// and the softmax unit's pass_o debug output is left open here.
module digital_die
  import hyatten_pkg::*;
#(
  parameter int DD_DEPTH = 4096,
  parameter int DAW      = $clog2(DD_DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // controller access to the SRAM
  input  logic                    dd_en,
  input  logic                    dd_we,
  input  logic [DAW-1:0]          dd_addr,
  input  logic [VEC_W-1:0]        dd_wdata,
  output logic [VEC_W-1:0]        dd_rdata,
  input  logic                    pe_grant,
  // digital PE
  input  logic                    instr_valid,
  output logic                    instr_ready,
  input  dpe_instr_t              instr,
  output logic                    res_valid,
  input  logic                    res_ready,
  output dpe_result_t             res,
  output logic                    pe_idle,
  // softmax unit
  input  logic                    sm_in_valid,
  output logic                    sm_in_ready,
  input  logic                    sm_in_last,
  output logic                    sm_out_valid,
  output logic [PROB_W-1:0]       sm_out_prob,
  output logic                    sm_out_last
);
  logic           pe_mem_en;
  logic [11:0]    pe_mem_addr;
  logic           m_en, m_we;
  logic [DAW-1:0] m_addr;

  assign m_en   = pe_grant ? pe_mem_en : dd_en;
  assign m_we   = !pe_grant && dd_we;
  assign m_addr = pe_grant ? DAW'(pe_mem_addr) : dd_addr;

  sram_sp #(.WIDTH(VEC_W), .DEPTH(DD_DEPTH)) u_sram (
    .clk, .en(m_en), .we(m_we), .addr(m_addr), .wdata(dd_wdata), .rdata(dd_rdata)
  );

  digital_pe #(.MAW(12)) u_dpe (
    .clk, .rst_n, .instr_valid, .instr_ready, .instr,
    .mem_en(pe_mem_en), .mem_addr(pe_mem_addr), .mem_rdata(dd_rdata),
    .res_valid, .res_ready, .res, .idle(pe_idle)
  );

  softmax_unit u_softmax (
    .clk, .rst_n, .in_valid(sm_in_valid), .in_ready(sm_in_ready),
    .in_score(ACC_W'(dd_rdata)), .in_last(sm_in_last),
    .out_valid(sm_out_valid), .out_prob(sm_out_prob), .out_last(sm_out_last),
    .pass_o()
  );

  // The controller leaves the SRAM alone while the digital PE owns it.
  assert property (@(posedge clk) disable iff (!rst_n) pe_grant |-> !dd_en);
endmodule
