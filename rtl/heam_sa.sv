// heam_sa -- ROWS x COLS weight-stationary systolic array built from HEAM
// approximate multipliers (default 16 x 16). Top of the design.
//
// It computes, for every input vector a (one 8-bit unsigned activation per
// row), the vector of column sums  out[c] = sum_r heam(W[r][c], a[r])  where
// heam() is the approximate product of heam_mul8 and W is the weight matrix
// held in the array. Activations enter at the left edge and move one PE to
// the right per cycle; partial sums start at zero at the top edge and move
// one PE down per cycle. Row r's input is delayed r cycles (input skew) and
// column c's result COLS-1-c cycles (output deskew), so the user sees whole
// vectors on both sides and a new vector can be accepted every cycle.
//
// Interface and timing:
//   w_we / w_row / w_data  write the COLS weights of row w_row (one row per
//                          cycle). Weights must not change while vectors are
//                          in flight: w_we is allowed only when in_valid and
//                          busy are both low (checked by an assertion).
//   in_valid / in_act      one activation vector per cycle, no back-pressure.
//   out_valid / out_psum   the column sums of the vector given LATENCY =
//                          ROWS + COLS - 1 cycles earlier.
//   busy                   some accepted vector has not come out yet.
// Reset (rst_n low) is synchronous and empties the pipeline.
//
// From the paper: a 16 x 16 systolic array of the TPU kind whose multipliers
// are HEAM multipliers on unsigned 8-bit operands. Everything else (weight-
// stationary dataflow, row-wise weight writes, the skew/deskew registers,
// the 32-bit accumulation, the valid pipeline) is this design's choice; the
// paper does not describe the array's insides. The column sums are raw
// unsigned sums of products: zero-point correction, requantization and
// activation functions of the quantized network lie outside the array.
module heam_sa
  import heam_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned COLS  = 16,
  parameter int unsigned ACC_W = 32,
  localparam int unsigned RW      = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned LATENCY = ROWS + COLS - 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // weight write port
  input  logic                        w_we,
  input  logic [RW-1:0]               w_row,
  input  operand_t [COLS-1:0]         w_data,
  // activation stream
  input  logic                        in_valid,
  input  operand_t [ROWS-1:0]         in_act,
  // result stream
  output logic                        out_valid,
  output logic [COLS-1:0][ACC_W-1:0]  out_psum,
  output logic                        busy
);

  // Activation and partial-sum nets between PEs:
  // act[r][c] enters PE(r,c) from the left, psum[r][c] enters it from above.
  operand_t         act  [ROWS][COLS+1];
  logic [ACC_W-1:0] psum [ROWS+1][COLS];

  // ---------------------------------------------------------------- input skew
  for (genvar r = 0; r < ROWS; r++) begin : g_skew
    if (r == 0) begin : g_direct
      assign act[0][0] = in_act[0];
    end else begin : g_delay
      operand_t sk_q [r];
      always_ff @(posedge clk) begin
        if (!rst_n) begin
          for (int k = 0; k < r; k++) sk_q[k] <= '0;
        end else begin
          sk_q[0] <= in_act[r];
          for (int k = 1; k < r; k++) sk_q[k] <= sk_q[k-1];
        end
      end
      assign act[r][0] = sk_q[r-1];
    end
  end

  // ---------------------------------------------------------------- PE grid
  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign psum[0][c] = '0;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      heam_pe #(.ACC_W(ACC_W)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .w_we     (w_we && (w_row == RW'(r))),
        .w_in     (w_data[c]),
        .act_in   (act[r][c]),
        .psum_in  (psum[r][c]),
        .act_out  (act[r][c+1]),
        .psum_out (psum[r+1][c])
      );
    end
  end

  // ---------------------------------------------------------------- output deskew
  for (genvar c = 0; c < COLS; c++) begin : g_deskew
    localparam int unsigned D = COLS - 1 - c;
    if (D == 0) begin : g_direct
      assign out_psum[c] = psum[ROWS][c];
    end else begin : g_delay
      logic [ACC_W-1:0] dk_q [D];
      always_ff @(posedge clk) begin
        if (!rst_n) begin
          for (int k = 0; k < D; k++) dk_q[k] <= '0;
        end else begin
          dk_q[0] <= psum[ROWS][c];
          for (int k = 1; k < D; k++) dk_q[k] <= dk_q[k-1];
        end
      end
      assign out_psum[c] = dk_q[D-1];
    end
  end

  // ---------------------------------------------------------------- valid pipeline
  logic [LATENCY-1:0] vld_q;

  always_ff @(posedge clk) begin
    if (!rst_n) vld_q <= '0;
    else        vld_q <= {vld_q[LATENCY-2:0], in_valid};
  end

  assign out_valid = vld_q[LATENCY-1];
  assign busy      = |vld_q;

  // ---------------------------------------------------------------- rules
  // A weight write while a vector is in flight would mix old and new weights.
  a_no_write_in_flight : assert property (
    @(posedge clk) disable iff (!rst_n) w_we |-> !(in_valid || busy)
  ) else $error("heam_sa: weight write while vectors are in flight");

  a_row_in_range : assert property (
    @(posedge clk) disable iff (!rst_n) w_we |-> (int'(w_row) < ROWS)
  ) else $error("heam_sa: weight row out of range");

endmodule
