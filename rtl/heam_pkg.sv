// heam_pkg -- shared widths, types and the compressed-term list of the HEAM
// approximate multiplier.
//
// An unsigned 8x8 multiplication is written as a bit-matrix of partial
// products: row i holds the bits pp[i][j] = x[j] & y[i], each worth
// 2^(i+j). HEAM keeps rows 4..7 exact and replaces rows 0..3 by a handful of
// "compressed terms". A compressed term takes a group of one or two bits of
// rows 0..3, combines a two-bit group with AND, OR or XOR (a one-bit group is
// used as it is), and puts the resulting single bit into an output column of
// its own choosing, where it is worth 2^col. The approximate product is the
// sum of the exact rows and all compressed terms.
//
// HEAM_TERMS below is the term list of the optimized 8x8 multiplier. Which
// bits form each group comes from the partial-product picture (colours and
// shapes of the groups), and the operation and column of each term from the
// picture of the optimized multiplier; the bit positions are counted from
// those pictures, the operators are the printed symbols. Columns here are
// 0-based bit positions (column c from the right in 1-based counting is bit
// c-1). Naming x the operand whose bits run along a row and y the operand
// that selects the row is this design's convention; the DNN use intended is
// x = weight (quantized values cluster near 128) and y = activation
// (clustered near 0).
package heam_pkg;

  localparam int unsigned OP_W        = 8;         // operand width
  localparam int unsigned PROD_W      = 2 * OP_W;  // product width
  localparam int unsigned N_COMP_ROWS = 4;         // rows 0..3 are compressed
  localparam int unsigned IDX_W       = 4;         // width of a bit/column index

  typedef logic [OP_W-1:0]   operand_t;
  typedef logic [PROD_W-1:0] product_t;

  // Logic operation of a compressed term. OP_PASS is a one-bit group taken as
  // it is (the figures draw these without a symbol); it uses bit a only.
  typedef enum logic [1:0] {
    OP_PASS = 2'd0,
    OP_AND  = 2'd1,
    OP_OR   = 2'd2,
    OP_XOR  = 2'd3
  } term_op_e;

  // One compressed term: operation, two partial-product bits (row, x-bit
  // index) and the output column it is added into.
  typedef struct packed {
    term_op_e          op;
    logic [IDX_W-1:0]  a_row;
    logic [IDX_W-1:0]  a_bit;
    logic [IDX_W-1:0]  b_row;
    logic [IDX_W-1:0]  b_bit;
    logic [IDX_W-1:0]  col;
  } term_t;

  localparam int unsigned HEAM_N_TERMS = 6;

  // The optimized HEAM multiplier (group = the bits' weight 2^(row+bit)):
  //  0  pp[3][7]               alone,  column 10   (group of weight 2^10)
  //  1  pp[2][6] & pp[3][5]    AND,    column 9    (group of weight 2^8)
  //  2  pp[2][6] | pp[3][5]    OR,     column 9    (same group as term 1)
  //  3  pp[2][7] | pp[3][6]    OR,     column 9    (group of weight 2^9)
  //  4  pp[1][7]               alone,  column 8    (group of weight 2^8)
  //  5  pp[0][7] | pp[1][6]    OR,     column 8    (group of weight 2^7)
  localparam term_t [HEAM_N_TERMS-1:0] HEAM_TERMS = '{
    term_t'{op: OP_OR,   a_row: 4'd0, a_bit: 4'd7, b_row: 4'd1, b_bit: 4'd6, col: 4'd8},
    term_t'{op: OP_PASS, a_row: 4'd1, a_bit: 4'd7, b_row: 4'd1, b_bit: 4'd7, col: 4'd8},
    term_t'{op: OP_OR,   a_row: 4'd2, a_bit: 4'd7, b_row: 4'd3, b_bit: 4'd6, col: 4'd9},
    term_t'{op: OP_OR,   a_row: 4'd2, a_bit: 4'd6, b_row: 4'd3, b_bit: 4'd5, col: 4'd9},
    term_t'{op: OP_AND,  a_row: 4'd2, a_bit: 4'd6, b_row: 4'd3, b_bit: 4'd5, col: 4'd9},
    term_t'{op: OP_PASS, a_row: 4'd3, a_bit: 4'd7, b_row: 4'd3, b_bit: 4'd7, col: 4'd10}
  };

endpackage
