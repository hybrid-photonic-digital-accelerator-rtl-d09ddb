// coord_register: the coordinate register of a photonic PE.
//
// During the read-out of the tensor core, N_ADC comparator flags arrive per
// cycle together with the coordinate of each output. Every flagged
// (over-resolution) output gets its coordinate appended to the register, so
// up to N_ADC entries are written in one cycle: each flagged lane is written
// at the current count plus the number of flagged lanes below it. The memory
// controller later walks entries 0 .. count-1 (rd_idx -> rd_coord,
// combinational) to fetch the operands of those outputs for the digital PE.
// clear empties the register. Entries that do not fit set the sticky
// overflow flag and are dropped; with DEPTH = ARR*ARR and one clear per array
// firing this cannot happen.
//
// The 8 KB capacity follows the paper (4096 entries of 16 bits); the entry
// format and the multi-entry append are this design's choice.
module coord_register
  import hyatten_pkg::*;
#(
  parameter int LANES = N_ADC,
  parameter int DEPTH = 4096,
  parameter int IW    = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           wr_valid,
  input  logic [LANES-1:0] wr_flag,
  input  coord_t         wr_coord [LANES],
  input  logic [IW-1:0]  rd_idx,
  output coord_t         rd_coord,
  output logic [IW:0]    count,
  output logic           overflow
);
  coord_t entries [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count    <= '0;
      overflow <= 1'b0;
    end else if (clear) begin
      count    <= '0;
      overflow <= 1'b0;
    end else if (wr_valid) begin
      logic [IW:0] pos;
      pos = count;
      for (int l = 0; l < LANES; l++) begin
        if (wr_flag[l]) begin
          if (pos < (IW+1)'(DEPTH)) pos = pos + 1'b1;
          else                      overflow <= 1'b1;
        end
      end
      count <= pos;
    end
  end

  // Storage has no reset: only entries below count are ever read.
  always_ff @(posedge clk) begin
    if (wr_valid && !clear) begin
      logic [IW:0] pos;
      pos = count;
      for (int l = 0; l < LANES; l++) begin
        if (wr_flag[l] && pos < (IW+1)'(DEPTH)) begin
          entries[pos[IW-1:0]] <= wr_coord[l];
          pos = pos + 1'b1;
        end
      end
    end
  end

  assign rd_coord = entries[rd_idx];
endmodule
