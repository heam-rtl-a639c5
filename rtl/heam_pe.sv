// heam_pe -- weight-stationary processing element of the HEAM systolic array.
//
// The PE keeps one 8-bit weight. Each cycle it multiplies the activation
// arriving from its left neighbour by that weight with the HEAM approximate
// multiplier, adds the product to the partial sum arriving from the PE above,
// and registers both the new partial sum (passed down) and the activation
// (passed right). A weight is written when w_we is high; the write takes
// effect from the next cycle.
//
// The paper only says that a 16x16 TPU-style systolic array was built with
// HEAM multipliers; the weight-stationary dataflow, the one-cycle register on
// both outputs, the write-enable weight port and the accumulator width are
// this design's choices. The weight drives the multiplier's x operand and the
// activation its y operand (see heam_pkg).
//
// Timing: act_out and psum_out are registered, one cycle after act_in and
// psum_in. Reset (rst_n low, synchronous) clears weight, activation and
// partial sum.
module heam_pe
  import heam_pkg::*;
#(
  parameter int unsigned ACC_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             w_we,
  input  operand_t         w_in,
  input  operand_t         act_in,
  input  logic [ACC_W-1:0] psum_in,
  output operand_t         act_out,
  output logic [ACC_W-1:0] psum_out
);

  operand_t weight_q;
  product_t prod;

  heam_mul8 u_mul (
    .x (weight_q),
    .y (act_in),
    .p (prod)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      weight_q <= '0;
      act_out  <= '0;
      psum_out <= '0;
    end else begin
      if (w_we) weight_q <= w_in;
      act_out  <= act_in;
      psum_out <= psum_in + ACC_W'(prod);
    end
  end

endmodule
