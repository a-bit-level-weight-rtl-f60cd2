// rram_pkg -- constants and types shared by the bit-sliced RRAM accelerator.
//
// The numbers below are the main configuration of the design: 1 bit per RRAM
// cell, 128x128 crossbars, operation units (OUs) of 7 rows x 8 columns read by
// 3-bit ADCs, signed 8-bit weights and activations, and eight computation units
// (CUs) per processing element, one per weight bit position (CU k holds bit k
// of every weight, CU 7 the sign bit). The OU grid is 18 x 16 per crossbar
// (128 div 7 = 18 OU rows, the last two crossbar rows are unused; 128 / 8 = 16
// OU columns).
//
// Index-entry format (this design's choice, the published description fixes
// only the principle): for every OU of every CU the indexing crossbar holds a
// 5-bit length L (number of logical column indices, 0..16) and up to 16
// signed 8-bit deltas. The first delta is taken from 0, each later one from
// the index before it. If L > OU_W the first L-OU_W physical columns of the
// OU are "repetitive" columns, each shared by two logical columns, and come
// first in the list (two indices each); the rest carry one index each.
package rram_pkg;

  localparam int unsigned XBAR_ROWS = 128;
  localparam int unsigned XBAR_COLS = 128;
  localparam int unsigned OU_H      = 7;
  localparam int unsigned OU_W      = 8;
  localparam int unsigned OU_ROWS   = XBAR_ROWS / OU_H;   // 18
  localparam int unsigned OU_COLS   = XBAR_COLS / OU_W;   // 16
  localparam int unsigned W_BITS    = 8;
  localparam int unsigned A_BITS    = 8;
  localparam int unsigned ADC_BITS  = 3;
  localparam int unsigned N_CU      = W_BITS;             // one CU per weight bit

  // logical sizes of the weight slice one PE holds
  localparam int unsigned N_IN      = 128;                // logical input rows
  localparam int unsigned N_OUT     = 128;                // logical output columns
  localparam int unsigned IN_AW     = $clog2(N_IN);
  localparam int unsigned OUT_AW    = $clog2(N_OUT);

  // column-index list of one OU
  localparam int unsigned MAX_IDX   = 2 * OU_W;           // all columns repetitive
  localparam int unsigned LEN_W     = $clog2(MAX_IDX + 1);
  localparam int unsigned DELTA_W   = 8;
  localparam int unsigned ENTRY_W   = LEN_W + MAX_IDX * DELTA_W;   // 133 bits
  localparam int unsigned IDX_ROW_W = N_CU * ENTRY_W;              // one OU, all CUs
  localparam int unsigned N_OU      = OU_ROWS * OU_COLS;           // 288
  localparam int unsigned OU_AW     = $clog2(N_OU);

  localparam int unsigned ACC_W     = 24;                 // output accumulators

  typedef logic [$clog2(OU_ROWS)-1:0] ou_row_t;
  typedef logic [$clog2(OU_COLS)-1:0] ou_col_t;
  typedef logic [$clog2(A_BITS)-1:0]  in_bit_t;
  typedef logic [ADC_BITS-1:0]        adc_code_t;

  typedef struct packed {
    logic [MAX_IDX-1:0][DELTA_W-1:0] delta;   // delta[0] is the first index
    logic [LEN_W-1:0]                len;
  } idx_entry_t;

  // Physical crossbar row index entry used by the input decoder.
  typedef struct packed {
    logic             valid;
    logic [IN_AW-1:0] idx;
  } row_map_t;

  typedef enum logic { DIR_HORIZONTAL = 1'b0, DIR_VERTICAL = 1'b1 } direction_e;

  // Per-operation configuration of a PE.
  typedef struct packed {
    direction_e                   direction;   // OU visiting order
    logic [$clog2(OU_ROWS+1)-1:0] n_rows;      // OU rows used by the mapping, 1..18
    logic [$clog2(OU_COLS+1)-1:0] n_cols;      // OU columns used by the mapping, 1..16
    logic [7:0]                   scale;       // requantisation multiplier
    logic [4:0]                   shift;       // requantisation right shift
    logic                         relu_en;     // apply ReLU
  } pe_cfg_t;

  // Event counters of the last PE operation (for observation only).
  typedef struct packed {
    logic [31:0] ou_cycles;      // OUs issued
    logic [31:0] wl_reuse;       // cycles that reused the previous wordline vector
    logic [31:0] rep_cols;       // repetitive physical columns routed to two outputs
    logic [31:0] sub_cycles;     // CU partial sums that were subtracted (sign terms)
  } pe_stats_t;

endpackage
