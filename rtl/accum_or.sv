// accum_or: the accumulators and output register (OR) behind the ADCs of a
// photonic PE.
//
// The output register holds one ACC_W-bit partial sum for each of the
// ARR x ARR outputs of the tensor core. Each read-out cycle delivers N_ADC
// ADC codes for group acc_group (row acc_group / (ARR/N_ADC), N_ADC adjacent
// columns); the N_ADC accumulators add each code to its OR entry, so the
// shard products of successive reduction chunks sum up into the score block.
// A lane whose comparator flag is set adds nothing: its value comes later,
// exact, from the digital PE through the correction port (corr_*), which adds
// corr_value to entry (corr_row, corr_col). clear zeroes the whole register.
// rd_row/rd_col read one entry combinationally. One access of each kind per
// cycle; a correction and an accumulation never target the same cycle (the
// controller keeps them in separate phases).
//
// The 32 accumulators and the box named OR come from the paper; reading OR as
// an output register holding the whole score block, and the correction port
// that merges digital results, are this design's interpretation.
module accum_or
  import hyatten_pkg::*;
#(
  parameter int ARR_N = ARR,
  parameter int LANES = N_ADC,
  parameter int AW    = ACC_W,
  parameter int GW    = $clog2(ARR_N*ARR_N/LANES),
  parameter int RW    = $clog2(ARR_N)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       acc_valid,
  input  logic [GW-1:0]              acc_group,
  input  logic signed [ADC_BITS-1:0] acc_code [LANES],
  input  logic [LANES-1:0]           acc_over,
  input  logic                       corr_valid,
  input  logic [RW-1:0]              corr_row,
  input  logic [RW-1:0]              corr_col,
  input  logic signed [AW-1:0]       corr_value,
  input  logic [RW-1:0]              rd_row,
  input  logic [RW-1:0]              rd_col,
  output logic signed [AW-1:0]       rd_value
);
  localparam int GPR = ARR_N / LANES;
  logic signed [AW-1:0] or_q [ARR_N][ARR_N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ARR_N; i++)
        for (int j = 0; j < ARR_N; j++) or_q[i][j] <= '0;
    end else if (clear) begin
      for (int i = 0; i < ARR_N; i++)
        for (int j = 0; j < ARR_N; j++) or_q[i][j] <= '0;
    end else begin
      if (acc_valid) begin
        logic [RW-1:0] r;
        int c0;
        r  = RW'(int'(acc_group) / GPR);
        c0 = (int'(acc_group) % GPR) * LANES;
        for (int l = 0; l < LANES; l++)
          if (!acc_over[l])
            or_q[r][c0+l] <= or_q[r][c0+l] + AW'(acc_code[l]);
      end
      if (corr_valid)
        or_q[corr_row][corr_col] <= or_q[corr_row][corr_col] + corr_value;
    end
  end

  assign rd_value = or_q[rd_row][rd_col];
endmodule
