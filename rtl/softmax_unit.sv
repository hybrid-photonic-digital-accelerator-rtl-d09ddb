// softmax_unit: row softmax of the attention scores on the digital die.
//
// A row of L scores is streamed in three times (the unit keeps no copy of
// the row; in_last marks the end of each pass):
//   pass 1 (Max)           : m = max(s)
//   pass 2 (Minus/Exp/Sum) : sum += e(m - s)
//   pass 3 (Minus/Exp/Div) : out = e(m - s) / sum, one result per input, one
//                            cycle after it (out_last marks the end).
// The exponential uses two small tables and a multiplier: d = m - s is split
// into an upper and a lower TB-bit half and
//     e(d) = (HI[d >> TB] * LO[d mod 2^TB]) >> 15,
//     HI[k] = round(2^15 * exp(-k * 2^TB / 2^FRAC)),
//     LO[k] = round(2^15 * exp(-k / 2^FRAC)),
// i.e. exp(-d / 2^FRAC) in Q1.15, and 0 when d >= 2^(2*TB). Outputs are
// probabilities in Q1.15 (32768 = 1.0). The unit accepts one score per cycle
// in every pass: in_ready is tied high, so the source never stalls.
//
// Max, subtraction, the two half exponent tables, the multiplier, the sum and
// the divider are the paper's; so is the table size, 2 x 128 x 16 bit = 512
// bytes. The three-pass streaming order, the fixed-point formats and FRAC
// (the score's exponent scale, folding in 1/sqrt(d_k) and the quantisation
// scales) are this design's choices.
module softmax_unit
  import hyatten_pkg::*;
#(
  parameter int AW    = ACC_W,
  parameter int FRAC  = 4,
  parameter int TB    = 7,
  parameter int SUM_W = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic signed [AW-1:0] in_score,
  input  logic                 in_last,
  output logic                 out_valid,
  output logic [PROB_W-1:0]    out_prob,
  output logic                 out_last,
  output logic [1:0]           pass_o
);
  localparam int NT = 1 << TB;

  // ------------------------------------------------------------ exponent tables
  logic [15:0] lut_hi [NT];
  logic [15:0] lut_lo [NT];
  for (genvar k = 0; k < NT; k++) begin : g_lut
    localparam real EH = $exp(-real'(k) * real'(NT) / real'(1 << FRAC));
    localparam real EL = $exp(-real'(k) / real'(1 << FRAC));
    assign lut_hi[k] = 16'($rtoi(EH * 32768.0 + 0.5));
    assign lut_lo[k] = 16'($rtoi(EL * 32768.0 + 0.5));
  end

  typedef enum logic [1:0] { P_MAX = 2'd0, P_SUM = 2'd1, P_DIV = 2'd2 } pass_t;
  pass_t pass;
  logic signed [AW-1:0] max_q;
  logic [SUM_W-1:0]     sum_q;
  logic                 first;

  // ------------------------------------------------------------ Minus + Exp + Multiply
  logic [AW:0]  d;
  logic [15:0]  e;
  always_comb begin
    logic [31:0] p;
    d = (AW+1)'($signed({max_q[AW-1], max_q}) - $signed({in_score[AW-1], in_score}));
    p = 32'(lut_hi[d[2*TB-1:TB]]) * 32'(lut_lo[d[TB-1:0]]);
    e = (d >= (AW+1)'(1 << (2*TB))) ? 16'd0 : 16'(p >> 15);
  end

  // ------------------------------------------------------------ Divider
  logic [PROB_W-1:0] q;
  always_comb begin
    logic [SUM_W-1:0] num;
    num = SUM_W'(e) << 15;
    q   = (sum_q == '0) ? '0 : PROB_W'(num / sum_q);
  end

  assign in_ready = 1'b1;
  assign pass_o   = pass;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pass      <= P_MAX;
      max_q     <= '0;
      sum_q     <= '0;
      first     <= 1'b1;
      out_valid <= 1'b0;
      out_prob  <= '0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (in_valid) begin
        unique case (pass)
          P_MAX: begin
            if (first || in_score > max_q) max_q <= in_score;
            first <= 1'b0;
            if (in_last) begin
              pass  <= P_SUM;
              sum_q <= '0;
            end
          end
          P_SUM: begin
            sum_q <= sum_q + SUM_W'(e);
            if (in_last) pass <= P_DIV;
          end
          P_DIV: begin
            out_valid <= 1'b1;
            out_prob  <= q;
            out_last  <= in_last;
            if (in_last) begin
              pass  <= P_MAX;
              first <= 1'b1;
            end
          end
          default: pass <= P_MAX;
        endcase
      end
    end
  end
endmodule
