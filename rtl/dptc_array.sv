// dptc_array: behavioural model (not synthesizable logic) of the
// dynamically-operated photonic tensor core, an ARR x ARR crossbar of
// dot-product (DDot) units.
//
// Row waveguide i carries vector a[i][*] (from the shared PDAC, one wavelength
// per element) and column waveguide j carries vector b[j][*] (from the local
// PDAC). DDot unit (i, j) interferes them in a 50:50 coupler and its balanced
// photodiodes give a current proportional to the dot product, so one firing
// computes the whole ARR x ARR x ARR shard product
//     cur[i][j] = sum_k a[i][k] * b[j][k].
// The currents are latched on the clock edge with fire high and held until the
// next firing. The read-out side is an analog multiplexer: rd_group selects
// N_ADC currents, row rd_group / (ARR/N_ADC), columns starting at
// (rd_group % (ARR/N_ADC)) * N_ADC, for the comparators and ADCs.
//
// The 64 x 64 size follows the paper; the number of wavelengths per waveguide
// (equal to the array size, as in the paper's 3 x 3 example figure) and the
// noise-free response are this model's choices.
module dptc_array #(
  parameter int ARR   = 64,
  parameter int N_ADC = 32,
  parameter int GW    = $clog2(ARR*ARR/N_ADC)
) (
  input  logic          clk,
  input  logic          fire,
  input  real           a_amp [ARR][ARR],
  input  real           b_amp [ARR][ARR],
  input  logic [GW-1:0] rd_group,
  output real           rd_current [N_ADC]
);
  localparam int GPR = ARR / N_ADC;   // groups per row
  real cur [ARR][ARR];

  initial begin
    for (int i = 0; i < ARR; i++)
      for (int j = 0; j < ARR; j++) cur[i][j] = 0.0;
  end

  always @(posedge clk) begin
    if (fire) begin
      for (int i = 0; i < ARR; i++)
        for (int j = 0; j < ARR; j++) begin
          real s;
          s = 0.0;
          for (int k = 0; k < ARR; k++) s += a_amp[i][k] * b_amp[j][k];
          cur[i][j] <= s;
        end
    end
  end

  always_comb begin
    for (int l = 0; l < N_ADC; l++)
      rd_current[l] = cur[int'(rd_group) / GPR][(int'(rd_group) % GPR) * N_ADC + l];
  end
endmodule
