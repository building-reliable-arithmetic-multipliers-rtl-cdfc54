// sa_pkg: types and constants shared by the aging-aware systolic array.
//
// The array multiplies signed OP_W-bit operands. Every operand travels through
// the array as an operand_t bundle: the value I, its 2's complement -I (computed
// once at the array edge), a flag marking the most negative value (whose
// negation does not fit in OP_W bits) and a valid bit.
//
// The selector-module (SM) constants at the bottom describe the three
// approximate Boolean functions SM-1..SM-3. Each SM looks at SM_K of the 2*OP_W
// operand bits. A bit position p < OP_W names X[p]; p >= OP_W names W[p-OP_W].
// The SM's decision is entry {b[K-1],...,b[0]} of its 2^K-bit truth table,
// where b[n] is the bit at position SM_BITS[s][n]. The real functions come from
// an offline approximate-logic-synthesis fit to the stress oracle of a given
// multiplier; the values below are placeholders of the right shape (SM-1 leads
// with the X MSB and the W LSB, the pair that correlates best with the oracle
// when only two bits are used). Replace them with the fitted functions.
package sa_pkg;

  parameter int unsigned OP_W     = 8;   // operand width (8-bit array multiplier)
  parameter int unsigned ACC_W    = 32;  // running-sum width (design choice)
  parameter int unsigned NUM_SM   = 3;   // SM-1..SM-3
  parameter int unsigned SM_K     = 4;   // input bits per SM
  parameter int unsigned SM_SEL_W = 2;   // width of the per-PE SM choice
  parameter int unsigned IDX_W    = $clog2(2 * OP_W);

  typedef struct packed {
    logic [OP_W-1:0] val;     // I
    logic [OP_W-1:0] neg;     // -I mod 2^OP_W
    logic            is_min;  // I == -2^(OP_W-1): -I overflows
    logic            valid;
  } operand_t;

  typedef logic [SM_K-1:0][IDX_W-1:0] sm_bits_t;
  typedef logic [(1 << SM_K)-1:0]     sm_truth_t;

  // Bit positions, listed b[0] first. X bits are 0..7, W bits are 8..15.
  parameter sm_bits_t SM1_BITS = {4'd9,  4'd6, 4'd8,  4'd7};  // b0=X7 b1=W0 b2=X6 b3=W1
  parameter sm_bits_t SM2_BITS = {4'd8,  4'd0, 4'd15, 4'd7};  // b0=X7 b1=W7 b2=X0 b3=W0
  parameter sm_bits_t SM3_BITS = {4'd10, 4'd1, 4'd9,  4'd6};  // b0=X6 b1=W1 b2=X1 b3=W2

  // SM-1: transform when X is non-negative and W0 is set, or when X7, X6, W1
  // are set and W0 is clear.
  parameter sm_truth_t SM1_TRUTH = 16'h6444;
  // SM-2: transform when the signs differ and X0 or W0 is set.
  parameter sm_truth_t SM2_TRUTH = 16'h6660;
  // SM-3: transform when an odd number of its four bits is set.
  parameter sm_truth_t SM3_TRUTH = 16'h6996;

  parameter sm_bits_t  SM_BITS_DEFAULT  [NUM_SM] = '{SM1_BITS, SM2_BITS, SM3_BITS};
  parameter sm_truth_t SM_TRUTH_DEFAULT [NUM_SM] = '{SM1_TRUTH, SM2_TRUTH, SM3_TRUTH};

endpackage
