// tb_heam_pe -- self-checking test of one systolic-array processing element.
//
// It writes random weights, streams random activations and partial sums,
// and after every rising edge compares act_out (the previous act_in) and
// psum_out (previous psum_in + HEAM product of the stored weight and the
// previous act_in). The HEAM product is modelled here from the term list
// written out bit by bit, not taken from the RTL. It also checks that reset
// clears the outputs, that a weight write takes effect in the next cycle and
// that the weight holds while w_we is low. A watchdog ends a hung run.
`timescale 1ns/1ps
module tb_heam_pe;
  import heam_pkg::*;

  localparam int unsigned ACC_W = 32;

  logic             clk = 1'b0;
  logic             rst_n;
  logic             w_we;
  operand_t         w_in, act_in, act_out;
  logic [ACC_W-1:0] psum_in, psum_out;

  int unsigned checks   = 0;
  int unsigned failures = 0;

  heam_pe dut (.*);

  always #5 clk = ~clk;

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
      if (failures <= 10) $display("FAIL %s at %0t: act_out=%0d psum_out=%0d", what, $time, act_out, psum_out);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    operand_t         weight;
    operand_t         a_prev;
    logic [ACC_W-1:0] s_prev;
    rst_n = 1'b0; w_we = 1'b0; w_in = '0; act_in = 8'hff; psum_in = 32'h1234;
    @(posedge clk); #1;
    check(act_out == '0 && psum_out == '0, "reset");
    rst_n = 1'b1;
    // with weight 0 the PE passes the partial sum unchanged
    act_in = 8'd200; psum_in = 32'd777;
    @(posedge clk); #1;
    check(psum_out == 32'd777 && act_out == 8'd200, "zero weight");
    weight = '0;
    for (int n = 0; n < 2000; n++) begin
      logic we;
      we      = ($urandom_range(0, 7) == 0);
      w_we    = we;
      w_in    = operand_t'($urandom);
      a_prev  = operand_t'($urandom);
      s_prev  = (n % 3 == 0) ? 32'hffff_f000 + 32'($urandom_range(0, 4095)) : 32'($urandom);
      act_in  = a_prev;
      psum_in = s_prev;
      @(posedge clk); #1;
      // the multiply in this cycle used the weight held before the edge
      check(act_out == a_prev, "act pass");
      check(psum_out == s_prev + ACC_W'(heam_model(weight, a_prev)), "psum");
      if (we) weight = w_in;
    end
    // the last weight must still be held with w_we low
    w_we = 1'b0; w_in = ~weight; act_in = 8'd1; psum_in = '0;
    @(posedge clk); #1;
    act_in = 8'd255;
    @(posedge clk); #1;
    check(psum_out == ACC_W'(heam_model(weight, 8'd255)), "weight held");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
