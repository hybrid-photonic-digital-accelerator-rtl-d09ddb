// hyatten_pkg: types and constants shared by the hybrid photonic-digital
// attention accelerator.
//
// The photonic tensor core (DPTC) is ARR x ARR and multiplies ARR x ARR
// shards of 4-bit operands. Each tile reads its photocurrents out through
// N_ADC low-resolution (4-bit) ADCs, so one full readout takes
// ARR*ARR/N_ADC readout cycles (a "group" of N_ADC outputs per cycle).
// Outputs whose photocurrent lies outside the ADC range are flagged by an
// analog comparator; their coordinates are logged and the dot product is
// recomputed exactly by the digital PE.
//
// The sizes 64x64, 4-bit operands, 4-bit ADCs, 32 ADCs per array and 32
// tiles follow the paper's hardware table. The coordinate entry format, the
// digital-PE instruction format and the score width are this design's own.
package hyatten_pkg;

  localparam int ARR        = 64;           // DPTC array size (64 x 64)
  localparam int DW         = 4;            // operand width (4-bit quantised Q, K)
  localparam int VEC_W      = ARR * DW;     // one 64-element operand vector, 256 bits
  localparam int ADC_BITS   = 4;            // low-resolution ADC
  localparam int N_ADC      = 32;           // ADCs / comparators / accumulators per array
  localparam int ACC_W      = 24;           // accumulated score width
  localparam int N_TILES    = 32;           // tiles in the accelerator
  localparam int PROB_W     = 16;           // softmax output, Q1.15

  // Coordinate register entry: 16 bits, so the 8 KB register holds 4096 entries,
  // one per output of a 64 x 64 array.
  typedef struct packed {
    logic [3:0] chunk;   // reduction-dimension chunk the output belongs to
    logic [5:0] row;     // row of the array output (Q row within the shard)
    logic [5:0] col;     // column of the array output (K row within the shard)
  } coord_t;

  // Digital PE instructions.
  typedef enum logic [1:0] {
    OP_LDA = 2'd0,   // input buffer A <= shared SRAM[addr]
    OP_LDB = 2'd1,   // input buffer B <= shared SRAM[addr]
    OP_MAC = 2'd2,   // accumulator += A . B
    OP_ST  = 2'd3    // output buffer <= {tag, accumulator}; accumulator <= 0
  } dpe_op_t;

  typedef struct packed {
    dpe_op_t     op;
    logic [15:0] addr;
    logic [23:0] tag;    // {tile[7:0], coord_t}
  } dpe_instr_t;

  typedef struct packed {
    logic [23:0]              tag;
    logic signed [ACC_W-1:0]  value;
  } dpe_result_t;

endpackage
