// analog_comparator: behavioural model (not synthesizable logic) of the analog
// window comparator placed in front of each low-resolution ADC.
//
// It flags a photocurrent that the 4-bit ADC cannot represent: over is high
// when vin lies above V_HI or below V_LO. With the ADC's LSB equal to one unit
// of dot product, a signed 4-bit ADC covers -8 .. 7, so the thresholds sit
// half an LSB outside that range. The decision is continuous-time
// (combinational); the flag is sampled with the ADC code.
//
// The comparator's role follows the paper; the window form and the threshold
// values are this design's choice.
module analog_comparator #(
  parameter real V_HI = 7.5,
  parameter real V_LO = -8.5
) (
  input  real  vin,
  output logic over
);
  always_comb over = (vin > V_HI) || (vin < V_LO);
endmodule
