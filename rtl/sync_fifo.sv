// sync_fifo: small synchronous first-in first-out buffer with a valid/ready
// handshake on both sides, used as the digital PE's instruction queue and
// output buffer.
//
// push is accepted when in_ready (not full); out_valid is high while the
// FIFO holds data and an entry leaves when out_ready is also high. An entry
// pushed in one cycle can be popped from the next. DEPTH must be a power of
// two.
module sync_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 8,
  parameter int PW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW:0]      wp, rp;

  assign in_ready  = (wp - rp) != (PW+1)'(DEPTH);
  assign out_valid = wp != rp;
  assign out_data  = mem[rp[PW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (in_valid && in_ready)   wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp[PW-1:0]] <= in_data;
  end
endmodule
