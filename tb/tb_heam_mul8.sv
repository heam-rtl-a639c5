// tb_heam_mul8 -- exhaustive self-checking test of the HEAM 8x8 multiplier.
//
// Every one of the 65536 operand pairs is applied. The expected value is
// written out bit by bit here, independently of the term table the RTL reads:
//   exact rows 4..7:  sum_{i=4..7} y[i] * x << i
//   + 2^10 * (x7 y3)
//   + 2^9  * ((x6 y2) & (x5 y3)) + 2^9 * ((x6 y2) | (x5 y3))
//   + 2^9  * ((x7 y2) | (x6 y3))
//   + 2^8  * (x7 y1)             + 2^8 * ((x7 y0) | (x6 y1))
// Besides matching that model, the test checks properties that follow from
// the structure: the result is exact whenever y[3:0] = 0, it never exceeds
// 16 bits, and for x = 128 (the weight value the multiplier was tuned
// around) it is exact except for the y[0] term, which counts twice.
// It also prints the mean error against the exact product. A watchdog ends
// the run if it hangs.
`timescale 1ns/1ps
module tb_heam_mul8;
  import heam_pkg::*;

  operand_t x, y;
  product_t p;

  int unsigned checks   = 0;
  int unsigned failures = 0;

  heam_mul8 dut (.x(x), .y(y), .p(p));

  function automatic int unsigned model(input logic [7:0] a, input logic [7:0] b);
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
      if (failures <= 10) $display("FAIL %s: x=%0d y=%0d p=%0d model=%0d exact=%0d",
                                   what, x, y, p, model(x, y), int'(x) * int'(y));
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint err_sum = 0;
    longint abs_sum = 0;
    int unsigned max_p = 0;
    for (int a = 0; a < 256; a++) begin
      for (int b = 0; b < 256; b++) begin
        x = operand_t'(a);
        y = operand_t'(b);
        #1;
        check(int'(p) == model(x, y), "model");
        if (y[3:0] == 4'd0) check(int'(p) == a * b, "exact when y[3:0]==0");
        if (a == 128)       check(int'(p) == a * b + (b & 1) * 128, "x=128");
        if (int'(p) > max_p) max_p = p;
        err_sum += longint'(p) - longint'(a * b);
        abs_sum += (int'(p) > a * b) ? longint'(int'(p) - a * b) : longint'(a * b - int'(p));
      end
    end
    // 240*255 + 1024 + 3*512 + 2*256 is the largest value the structure allows.
    check(max_p == 64272, "maximum output");
    $display("uniform operands: mean error %0.2f, mean |error| %0.2f, max output %0d",
             real'(err_sum) / 65536.0, real'(abs_sum) / 65536.0, max_p);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
