// adc: behavioural model (not synthesizable logic) of a low-resolution
// (4-bit) analog-to-digital converter.
//
// On a clock edge with sample high it converts vin to the nearest signed
// BITS-bit code in units of LSB, clamping at the ends of the range
// (-2^(BITS-1) .. 2^(BITS-1)-1); the code is held until the next sample.
// Latency is one cycle.
//
// The 4-bit resolution follows the paper. Two's-complement output, rounding
// to nearest and the LSB of one dot-product unit are this model's choices.
module adc #(
  parameter int  BITS = 4,
  parameter real LSB  = 1.0
) (
  input  logic                   clk,
  input  logic                   sample,
  input  real                    vin,
  output logic signed [BITS-1:0] code
);
  localparam int CMAX = (1 << (BITS - 1)) - 1;
  localparam int CMIN = -(1 << (BITS - 1));

  initial code = '0;

  always @(posedge clk) begin
    if (sample) begin
      int q;
      real x;
      x = vin / LSB;
      q = (x >= 0.0) ? int'($floor(x + 0.5)) : -int'($floor(-x + 0.5));
      if (q > CMAX) q = CMAX;
      if (q < CMIN) q = CMIN;
      code <= BITS'(q);
    end
  end
endmodule
