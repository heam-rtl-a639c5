// heam_mul8 -- unsigned 8x8 HEAM approximate multiplier (combinational).
//
// p ~= x * y. The partial-product bit-matrix pp[i][j] = x[j] & y[i] is
// split in two. Rows N_COMP_ROWS..7 (rows 4..7, the "uncompressed" partial
// products) are added exactly, each shifted by its row index. Rows 0..3 are
// dropped and replaced by the compressed terms in TERMS: each term ANDs, ORs
// or XORs a group of two partial-product bits (or passes a single bit) and
// adds the result at its own output column. With the default term list
// (heam_pkg::HEAM_TERMS) the matrix above the exact rows shrinks from 32
// bits to 6, which is where the area, power and delay savings come from.
//
// Following the paper: the 8x8 unsigned operands, which rows are compressed,
// the six terms with their groups, operations and columns, and the final
// summation of all rows. The paper does not say how the summation is built
// (its numbers come from a synthesis tool); here it is a plain '+' of the
// shifted rows and terms, left to synthesis to map. The largest possible
// result is 240*255 + 2^10 + 3*2^9 + 2*2^8 = 64272, so the 16-bit output
// never overflows.
//
// Interface: x (8 b, operand along the row; the weight in a DNN), y (8 b,
// row-selecting operand; the activation), p (16 b). Purely combinational,
// no clock.
module heam_mul8
  import heam_pkg::*;
#(
  parameter int unsigned                 N_TERMS = HEAM_N_TERMS,
  parameter term_t [N_TERMS-1:0]         TERMS   = HEAM_TERMS,
  parameter int unsigned                 FIRST_EXACT_ROW = N_COMP_ROWS
) (
  input  operand_t x,
  input  operand_t y,
  output product_t p
);

  // pp[i] is row i of the bit-matrix, before its shift by i.
  logic [OP_W-1:0] pp [OP_W];

  always_comb begin
    for (int i = 0; i < OP_W; i++) pp[i] = x & {OP_W{y[i]}};
  end

  // Bits of the compressed terms, one per term.
  logic [N_TERMS-1:0] term_bit;

  always_comb begin
    for (int k = 0; k < N_TERMS; k++) begin
      logic a, b;
      a = pp[TERMS[k].a_row[2:0]][TERMS[k].a_bit[2:0]];
      b = pp[TERMS[k].b_row[2:0]][TERMS[k].b_bit[2:0]];
      unique case (TERMS[k].op)
        OP_AND:  term_bit[k] = a & b;
        OP_OR:   term_bit[k] = a | b;
        OP_XOR:  term_bit[k] = a ^ b;
        default: term_bit[k] = a;      // OP_PASS: single-bit group
      endcase
    end
  end

  // Sum of the exact rows and the weighted compressed terms.
  always_comb begin
    product_t acc;
    acc = '0;
    for (int i = FIRST_EXACT_ROW; i < OP_W; i++)
      acc += product_t'(pp[i]) << i;
    for (int k = 0; k < N_TERMS; k++)
      acc += product_t'(term_bit[k]) << TERMS[k].col;
    p = acc;
  end

endmodule
