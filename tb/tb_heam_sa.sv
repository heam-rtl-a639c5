// tb_heam_sa -- end-to-end test of the 16 x 16 HEAM systolic array at its
// default size.
//
// The test writes a weight matrix row by row, streams activation vectors
// through the array and compares every output vector with column sums
// computed here from an independent bit-level model of the HEAM product.
// Expected vectors wait in a queue; each out_valid pops one. It runs three
// batches with a fresh weight matrix each, and exercises, counting each
// occurrence and failing if one never happened:
//   - weight writes (whole matrix, every row),
//   - back-to-back vectors (in_valid high on consecutive cycles),
//   - bubbles (in_valid low between vectors inside a batch),
//   - a weight reload after the array has drained (busy low),
//   - the latency: the first result of a batch appears exactly
//     ROWS + COLS - 1 cycles after its first vector,
//   - extreme operands (all-255 rows and columns, zero weights).
// A watchdog ends a hung run.
`timescale 1ns/1ps
module tb_heam_sa;
  import heam_pkg::*;

  localparam int unsigned ROWS    = 16;
  localparam int unsigned COLS    = 16;
  localparam int unsigned ACC_W   = 32;
  localparam int unsigned LATENCY = ROWS + COLS - 1;
  localparam int unsigned RW      = $clog2(ROWS);

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

  // mechanism counters
  int unsigned n_wrow = 0, n_b2b = 0, n_bubble = 0, n_reload = 0, n_latency = 0, n_extreme = 0;

  operand_t W [ROWS][COLS];
  typedef logic [COLS-1:0][ACC_W-1:0] vec_t;
  vec_t exp_q[$];

  longint unsigned cycle = 0;
  longint unsigned first_in_cycle;
  bit              wait_first_out = 1'b0;

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

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s at cycle %0d", what, cycle);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cycle <= cycle + 1;

  // Output monitor: compare every valid result with the queued expectation.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      vec_t e;
      if (wait_first_out) begin
        check(cycle - first_in_cycle == LATENCY, "latency");
        if (cycle - first_in_cycle == LATENCY) n_latency++;
        wait_first_out = 1'b0;
      end
      if (exp_q.size() == 0) begin
        check(1'b0, "unexpected output");
      end else begin
        e = exp_q.pop_front();
        for (int c = 0; c < COLS; c++) begin
          check(out_psum[c] == e[c], "column sum");
          if (out_psum[c] != e[c] && failures <= 10)
            $display("  col %0d got %0d expected %0d", c, out_psum[c], e[c]);
        end
      end
    end
  end

  task automatic load_weights(input int mode);
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        case (mode)
          0:       W[r][c] = operand_t'($urandom);
          1:       W[r][c] = (c == COLS - 1) ? 8'd0 : (r == ROWS / 2 ? 8'd255 : operand_t'(8'd96 + 8'($urandom_range(0, 64))));
          default: W[r][c] = operand_t'(8'd128 + 8'($urandom_range(0, 16)) - 8'd8);
        endcase
        w_data[c] = W[r][c];
      end
      w_we = 1'b1; w_row = RW'(r);
      @(posedge clk); #1;
      n_wrow++;
    end
    w_we = 1'b0;
  endtask

  task automatic send(input operand_t v [ROWS]);
    vec_t e;
    for (int c = 0; c < COLS; c++) begin
      longint unsigned s = 0;
      for (int r = 0; r < ROWS; r++) s += heam_model(W[r][c], v[r]);
      e[c] = ACC_W'(s);
    end
    exp_q.push_back(e);
    for (int r = 0; r < ROWS; r++) in_act[r] = v[r];
    in_valid = 1'b1;
  endtask

  task automatic run_batch(input int n_vec, input int mode);
    operand_t v [ROWS];
    bit prev_valid = 1'b0;
    for (int n = 0; n < n_vec; n++) begin
      for (int r = 0; r < ROWS; r++) begin
        case (mode)
          1:       v[r] = (n == 0) ? 8'd255 : operand_t'($urandom_range(0, 40));
          default: v[r] = operand_t'($urandom);
        endcase
      end
      if (n == 0) begin
        first_in_cycle = cycle;
        wait_first_out = 1'b1;
      end
      send(v);
      if (prev_valid) n_b2b++;
      @(posedge clk); #1;
      prev_valid = 1'b1;
      in_valid = 1'b0;
      // random bubbles inside the batch
      if ($urandom_range(0, 3) == 0 && n != n_vec - 1) begin
        n_bubble++;
        prev_valid = 1'b0;
        repeat ($urandom_range(1, 3)) @(posedge clk);
        #1;
      end
    end
    // drain
    while (busy) begin
      @(posedge clk); #1;
    end
    check(exp_q.size() == 0, "all results delivered");
  endtask

  initial begin
    rst_n = 1'b0; w_we = 1'b0; w_row = '0; w_data = '0; in_valid = 1'b0; in_act = '0;
    repeat (3) @(posedge clk);
    #1;
    check(!out_valid && !busy, "idle after reset");
    rst_n = 1'b1;

    load_weights(0);
    run_batch(60, 0);

    // reload after draining, with a zero column and an all-255 row
    check(!busy, "drained before reload");
    load_weights(1); n_reload++;
    run_batch(40, 1);
    n_extreme++;

    load_weights(2); n_reload++;
    run_batch(50, 0);

    if (n_wrow    == 0) check(1'b0, "no weight write happened");
    if (n_b2b     == 0) check(1'b0, "no back-to-back vectors");
    if (n_bubble  == 0) check(1'b0, "no bubble");
    if (n_reload  == 0) check(1'b0, "no weight reload");
    if (n_latency == 0) check(1'b0, "latency never observed");
    if (n_extreme == 0) check(1'b0, "extreme operands never applied");
    $display("mechanisms: weight rows written %0d, back-to-back %0d, bubbles %0d, reloads %0d, latency checks %0d, extreme batches %0d",
             n_wrow, n_b2b, n_bubble, n_reload, n_latency, n_extreme);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
