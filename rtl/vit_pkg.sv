// vit_pkg: widths, encodings and helper functions shared by the Taylor-attention
// accelerator. Data are signed fixed-point numbers of DATA_W bits with FRAC_W
// fractional bits (Q8.8 by default). Products of two data words carry 2*FRAC_W
// fractional bits and are summed in ACC_W-bit accumulators. The 16-bit data width
// follows the paper's component table; the fraction split, the accumulator width
// and every encoding below are this design's own choices.
package vit_pkg;

  parameter int unsigned DEF_DATA_W = 16;   // operand width of every array (paper: 16-bit)
  parameter int unsigned FRAC_W = 8;    // fractional bits of a data word (assumed)
  parameter int unsigned DEF_ACC_W  = 32;   // partial-sum / accumulator width (assumed)
  parameter int unsigned DEF_DIM    = 64;   // PEs per SA row/column and lanes per 1-D array
  parameter int unsigned IDX_W  = 9;    // token index width (up to 512 rows)

  // Divider array configurations (paper: single-divisor and multiple-divisors division)
  typedef enum logic {
    DIV_SINGLE = 1'b0,   // every lane divides by the broadcast Reg(n)
    DIV_MULTI  = 1'b1    // lane c divides by the c-th register of the divisor chain
  } div_mode_e;

  // Input staging of the systolic array
  typedef enum logic {
    FEED_ROWLOAD = 1'b0, // a whole row vector is loaded into one SA row and shifted out (K-hat^T)
    FEED_SKEW    = 1'b1  // element k of a vector enters SA row k, delayed by k cycles (Q)
  } feed_mode_e;

  // Operation carried by one controller command
  typedef enum logic [2:0] {
    OP_NONE  = 3'd0,
    OP_KSUM  = 3'd1,     // Step 1: accumulate 1^T K
    OP_VLOAD = 3'd2,     // Step 2/3: load a V row as stationary operand, accumulate v_sum
    OP_KHAT  = 3'd3,     // Step 1/2/3: K-hat = K - mean, feed SA, accumulate k_sum
    OP_Q     = 3'd4,     // Steps 4-6: stream a Q row through SA-General and SA-Diag
    OP_GLOAD = 3'd5      // load a requantised G row (and k_sum) as stationary operands
  } op_e;

  // One command issued by the controller per cycle; the datapath delays it to
  // line it up with the SRAM read data.
  typedef struct packed {
    op_e              op;
    logic [IDX_W-1:0] addr;      // token index (SRAM row) or G row
    logic [IDX_W-1:0] row;       // systolic-array row within the chunk
    logic             tok_valid; // token lies below n; otherwise zero padding
  } cmd_t;

  // Clip x to the range of a w-bit two's complement number.
  function automatic longint sat(input longint x, input int unsigned w);
    longint hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 1;
    lo = -(64'sd1 <<< (w - 1));
    if (x > hi) return hi;
    if (x < lo) return lo;
    return x;
  endfunction

endpackage
