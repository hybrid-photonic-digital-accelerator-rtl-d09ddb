// sram_sp: single-port synchronous SRAM used for every on-chip memory of the
// accelerator: the 2 MB shared SRAM of the photonic die, the 32 KB local SRAM
// of each photonic PE and the shared SRAM of the digital die.
//
// One access per cycle. A write stores wdata at addr on the clock edge. A
// read returns mem[addr] on rdata one cycle after en is high with we low
// (read latency 1). rdata holds its value when no read is issued.
// The memory is a plain array; a process-specific SRAM macro would replace it.
// Capacity follows the paper (e.g. 2 MB = 65536 x 256 bit); the word width of
// one 64 x 4-bit vector and the single-port organisation are this design's
// choice.
module sram_sp #(
  parameter int WIDTH = 256,
  parameter int DEPTH = 65536,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
