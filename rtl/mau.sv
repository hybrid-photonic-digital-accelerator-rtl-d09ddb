// mau: multiplication-accumulation unit of the digital PE.
//
// Combinational vector-vector product of two N-element vectors of signed
// DW-bit operands: N multipliers feed an adder tree, and the sum is added to
// the running accumulator value acc_in, giving acc_out = acc_in + a . b.
// The digital PE registers acc_out, so one MAC instruction takes one cycle.
//
// A vector multiply-accumulate unit is what the paper describes; the
// single-cycle combinational form and the operand width are this design's.
module mau
  import hyatten_pkg::*;
#(
  parameter int N  = ARR,
  parameter int W  = DW,
  parameter int AW = ACC_W
) (
  input  logic [N*W-1:0]       a,
  input  logic [N*W-1:0]       b,
  input  logic signed [AW-1:0] acc_in,
  output logic signed [AW-1:0] acc_out
);
  logic signed [2*W-1:0] prod [N];
  for (genvar k = 0; k < N; k++) begin : g_mul
    assign prod[k] = $signed(a[k*W +: W]) * $signed(b[k*W +: W]);
  end

  always_comb begin
    logic signed [AW-1:0] s;
    s = acc_in;
    for (int k = 0; k < N; k++) s = s + AW'(prod[k]);
    acc_out = s;
  end
endmodule
