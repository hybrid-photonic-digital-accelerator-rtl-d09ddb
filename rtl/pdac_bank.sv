// pdac_bank: behavioural model (not synthesizable logic) of a 4-bit photonic
// DAC with its bank of modulators.
//
// The real part converts 4-bit digital codes into optical field amplitudes
// that drive the waveguides of the photonic tensor core. Here one 64-element
// vector of signed 4-bit codes is loaded per cycle (load, idx, codes) and
// converted into ARR real amplitudes, amp[idx][k] = code_k * LSB, which the
// modulators then hold until the vector is reloaded. ARR loads fill the whole
// ARR x ARR operand shard. The same model serves as the shared PDAC (one for
// the whole chip, its output broadcast to every tile) and as the local PDAC
// of each photonic PE.
//
// The 4-bit resolution follows the paper. Loading one vector per cycle and
// signed amplitudes (as the coherent dot-product unit can represent signed
// values) are this model's choices.
module pdac_bank #(
  parameter int  ARR = 64,
  parameter int  DW  = 4,
  parameter real LSB = 1.0
) (
  input  logic              clk,
  input  logic              load,
  input  logic [5:0]        idx,
  input  logic [ARR*DW-1:0] codes,
  output real               amp [ARR][ARR]
);
  initial begin
    for (int v = 0; v < ARR; v++)
      for (int k = 0; k < ARR; k++) amp[v][k] = 0.0;
  end

  always @(posedge clk) begin
    if (load) begin
      for (int k = 0; k < ARR; k++)
        amp[idx][k] <= real'($signed(codes[k*DW +: DW])) * LSB;
    end
  end
endmodule
