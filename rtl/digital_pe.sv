// digital_pe: the digital processing element of the digital die. It computes
// exactly the dot products whose photocurrents were out of the 4-bit ADC
// range, from the digital operands staged in the digital die's shared SRAM.
//
// Instructions (dpe_instr_t) enter an instruction queue. The decoder takes
// one at a time:
//   OP_LDA addr : read shared SRAM[addr] into input buffer A (2 cycles)
//   OP_LDB addr : read shared SRAM[addr] into input buffer B (2 cycles)
//   OP_MAC      : accumulator += A . B through the MAU (1 cycle)
//   OP_ST  tag  : push {tag, accumulator} into the output buffer and clear
//                 the accumulator (1 cycle; waits while the buffer is full)
// Memory reads use mem_en/mem_addr and expect mem_rdata one cycle later.
// Results leave the output buffer on a valid/ready handshake.
//
// The parts (instruction queue, decoder, input buffer, MAU, accumulator,
// output buffer) follow the paper's digital-PE figure; the instruction set,
// queue depths and timing are this design's.
//
// Lint notes rst_n as used both asynchronously and synchronously: the
// synchronous use is only the disable iff of the assertion at the end.
module digital_pe
  import hyatten_pkg::*;
#(
  parameter int IQ_DEPTH = 8,
  parameter int OB_DEPTH = 8,
  parameter int MAW      = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  // instruction input
  input  logic             instr_valid,
  output logic             instr_ready,
  input  dpe_instr_t       instr,
  // shared SRAM read port
  output logic             mem_en,
  output logic [MAW-1:0]   mem_addr,
  input  logic [VEC_W-1:0] mem_rdata,
  // results
  output logic             res_valid,
  input  logic             res_ready,
  output dpe_result_t      res,
  output logic             idle
);
  // ------------------------------------------------------------ instruction queue
  dpe_instr_t q_instr;
  logic       q_valid, q_pop;
  sync_fifo #(.WIDTH($bits(dpe_instr_t)), .DEPTH(IQ_DEPTH)) u_iq (
    .clk, .rst_n, .in_valid(instr_valid), .in_ready(instr_ready), .in_data(instr),
    .out_valid(q_valid), .out_ready(q_pop), .out_data(q_instr)
  );

  // ------------------------------------------------------------ decoder / execute
  logic [VEC_W-1:0]        buf_a, buf_b;
  logic signed [ACC_W-1:0] acc, acc_next;
  logic                    ld_pending, ld_to_b;
  logic                    ob_ready;

  mau #(.N(ARR), .W(DW), .AW(ACC_W)) u_mau (
    .a(buf_a), .b(buf_b), .acc_in(acc), .acc_out(acc_next)
  );

  // An instruction issues when it is at the head of the queue, no load is in
  // flight, and (for OP_ST) the output buffer has room.
  logic issue;
  assign issue  = q_valid && !ld_pending && (q_instr.op != OP_ST || ob_ready);
  assign q_pop  = issue;
  assign mem_en   = issue && (q_instr.op == OP_LDA || q_instr.op == OP_LDB);
  assign mem_addr = q_instr.addr[MAW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_pending <= 1'b0;
      ld_to_b    <= 1'b0;
      acc        <= '0;
      buf_a      <= '0;
      buf_b      <= '0;
    end else begin
      if (ld_pending) begin
        if (ld_to_b) buf_b <= mem_rdata;
        else         buf_a <= mem_rdata;
        ld_pending <= 1'b0;
      end
      if (issue) begin
        unique case (q_instr.op)
          OP_LDA: begin ld_pending <= 1'b1; ld_to_b <= 1'b0; end
          OP_LDB: begin ld_pending <= 1'b1; ld_to_b <= 1'b1; end
          OP_MAC: acc <= acc_next;
          OP_ST:  acc <= '0;
        endcase
      end
    end
  end

  // ------------------------------------------------------------ output buffer
  dpe_result_t st_res;
  assign st_res.tag   = q_instr.tag;
  assign st_res.value = acc;
  sync_fifo #(.WIDTH($bits(dpe_result_t)), .DEPTH(OB_DEPTH)) u_ob (
    .clk, .rst_n, .in_valid(issue && q_instr.op == OP_ST), .in_ready(ob_ready), .in_data(st_res),
    .out_valid(res_valid), .out_ready(res_ready), .out_data(res)
  );

  assign idle = !q_valid && !ld_pending;

  // A load is never issued while another is in flight.
  assert property (@(posedge clk) disable iff (!rst_n) ld_pending |-> !mem_en);
endmodule
