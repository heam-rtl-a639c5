// tb_heam_workload -- one 16 x 16 tile of a quantized fully-connected layer
// run on the HEAM systolic array, with operands shaped like those HEAM was
// tuned for, against the same tile with uniformly random operands.
//
// Operand shapes (read off the input and weight histograms of the first
// fully-connected layer of an 8-bit LeNet on MNIST): activations pile up near
// 0 (about 70 % fall in 0..15, the rest thin out towards ~150); weights
// cluster around 128 with a spread of roughly +-40. Here activations are 0..15
// with probability 0.7 and otherwise 16 plus a sum of two uniform draws, and
// weights are 128 plus the sum of four uniform draws in [-16, 16]. Sizes of
// the real layer are not used: one weight tile and 256 activation vectors
// stand for one slice of the layer.
//
// Checks: every output column sum equals the sum of independently modelled
// HEAM products (bit exactness of the array). For the shaped operands the
// column sums must also stay close to the exact ones: the bias (sum of errors
// over sum of exact values) below 1 % and the RMS error below 5 % of the RMS
// exact sum. These bounds are sanity limits of this test, not figures from
// the paper; the measured values for both operand sets are printed.
`timescale 1ns/1ps
module tb_heam_workload;
  import heam_pkg::*;

  localparam int unsigned ROWS  = 16;
  localparam int unsigned COLS  = 16;
  localparam int unsigned ACC_W = 32;
  localparam int unsigned RW    = $clog2(ROWS);
  localparam int unsigned N_VEC = 256;

  logic                       clk = 1'b0;
  logic                       rst_n;
  logic                       w_we;
  logic [RW-1:0]              w_row;
  operand_t [COLS-1:0]        w_data;
  logic                       in_valid;
  operand_t [ROWS-1:0]        in_act;
  logic                       out_valid;
  logic [COLS-1:0][ACC_W-1:0] out_psum;
  logic                       busy;

  heam_sa dut (.*);

  always #5 clk = ~clk;

  int unsigned checks   = 0;
  int unsigned failures = 0;

  operand_t W [ROWS][COLS];
  typedef logic [COLS-1:0][63:0] sums_t;
  sums_t heam_q[$];
  sums_t exact_q[$];

  real sq_err, sq_ref, sum_err, sum_ref;
  int unsigned n_out;

  function automatic int unsigned heam_model(input logic [7:0] a, input logic [7:0] b);
    int unsigned s;
    s = 0;
    for (int i = 4; i < 8; i++) if (b[i]) s += int'(a) << i;
    s += (a[7] & b[3]) << 10;
    s += ((a[6] & b[2]) & (a[5] & b[3])) << 9;
    s += ((a[6] & b[2]) | (a[5] & b[3])) << 9;
    s += ((a[7] & b[2]) | (a[6] & b[3])) << 9;
    s += (a[7] & b[1]) << 8;
    s += ((a[7] & b[0]) | (a[6] & b[1])) << 8;
    return s;
  endfunction

  function automatic operand_t shaped_act();
    if ($urandom_range(0, 9) < 7) return operand_t'($urandom_range(0, 15));
    return operand_t'(16 + $urandom_range(0, 60) + $urandom_range(0, 60));
  endfunction

  function automatic operand_t shaped_weight();
    int v = 128;
    for (int k = 0; k < 4; k++) v += int'($urandom_range(0, 32)) - 16;
    return operand_t'(v);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      sums_t h, e;
      if (heam_q.size() == 0) begin
        check(1'b0, "unexpected output");
      end else begin
        h = heam_q.pop_front();
        e = exact_q.pop_front();
        for (int c = 0; c < COLS; c++) begin
          check(out_psum[c] == ACC_W'(h[c]), "column sum");
          sq_err += (real'(out_psum[c]) - real'(e[c])) ** 2;
          sq_ref += real'(e[c]) ** 2;
          sum_err += real'(out_psum[c]) - real'(e[c]);
          sum_ref += real'(e[c]);
        end
        n_out++;
      end
    end
  end

  task automatic run_tile(input bit shaped, output real rel_rms, output real rel_bias);
    operand_t v [ROWS];
    sums_t h, e;
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        W[r][c]   = shaped ? shaped_weight() : operand_t'($urandom);
        w_data[c] = W[r][c];
      end
      w_we = 1'b1; w_row = RW'(r);
      @(posedge clk); #1;
    end
    w_we = 1'b0;
    sq_err = 0.0; sq_ref = 0.0; sum_err = 0.0; sum_ref = 0.0; n_out = 0;
    for (int n = 0; n < N_VEC; n++) begin
      for (int r = 0; r < ROWS; r++) v[r] = shaped ? shaped_act() : operand_t'($urandom);
      for (int c = 0; c < COLS; c++) begin
        h[c] = 0; e[c] = 0;
        for (int r = 0; r < ROWS; r++) begin
          h[c] += heam_model(W[r][c], v[r]);
          e[c] += 64'(W[r][c]) * 64'(v[r]);
        end
      end
      heam_q.push_back(h);
      exact_q.push_back(e);
      for (int r = 0; r < ROWS; r++) in_act[r] = v[r];
      in_valid = 1'b1;
      @(posedge clk); #1;
    end
    in_valid = 1'b0;
    while (busy) begin
      @(posedge clk); #1;
    end
    check(n_out == N_VEC, "all vectors returned");
    rel_rms  = $sqrt(sq_err / sq_ref);
    rel_bias = sum_err / sum_ref;
  endtask

  initial begin
    real rms_s, bias_s, rms_u, bias_u;
    rst_n = 1'b0; w_we = 1'b0; w_row = '0; w_data = '0; in_valid = 1'b0; in_act = '0;
    repeat (3) @(posedge clk);
    #1;
    rst_n = 1'b1;
    run_tile(1'b1, rms_s, bias_s);
    run_tile(1'b0, rms_u, bias_u);
    $display("column sums vs exact: shaped operands rms %.4f %%, bias %.4f %%; uniform operands rms %.4f %%, bias %.4f %%",
             100.0 * rms_s, 100.0 * bias_s, 100.0 * rms_u, 100.0 * bias_u);
    check(bias_s < 0.01 && bias_s > -0.01, "shaped-operand bias below 1 %");
    check(rms_s < 0.05, "shaped-operand rms error below 5 %");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
