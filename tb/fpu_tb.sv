// fpu_tb: self-checking test of the single-precision floating-point unit.
//
// Checks the values of the published programming example (1 x 1.1, 2 x 1.2, 3 x 1.3 and the
// running sum 3.9 + 2.4 + 1.1), special cases (zero, infinity, NaN, division by zero,
// exact cancellation), and then random operands of all four operations against the
// simulator's double-precision arithmetic rounded to single precision.
module fpu_tb;
  import msg_pkg::*;
  import fp_ref_pkg::*;

  fp32_t   a, b, y;
  fpu_op_e op;
  int      checks = 0, failures = 0;

  fpu dut (.a(a), .b(b), .op(op), .y(y));

  function automatic real apply(input fpu_op_e o, input real x, input real z);
    case (o)
      FPU_ADD: return x + z;
      FPU_SUB: return x - z;
      FPU_MUL: return x * z;
      default: return x / z;
    endcase
  endfunction

  task automatic check(input fpu_op_e o, input fp32_t x, input fp32_t z, input fp32_t exp_y);
    op = o; a = x; b = z;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      $display("FAIL op=%0d a=%h b=%h y=%h expected %h", o, x, z, y, exp_y);
    end
  endtask

  task automatic check_ref(input fpu_op_e o, input fp32_t x, input fp32_t z);
    check(o, x, z, to_fp32(apply(o, to_real(x), to_real(z))));
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // published example: the products 1.1, 2.4, 3.9 and the sum 7.4
    check(FPU_MUL, 32'h3f8c_cccd, 32'h3f80_0000, to_fp32(to_real(32'h3f8c_cccd) * 1.0));
    check(FPU_MUL, 32'h3f99_999a, 32'h4000_0000, to_fp32(to_real(32'h3f99_999a) * 2.0));
    check(FPU_MUL, 32'h3fa6_6666, 32'h4040_0000, to_fp32(to_real(32'h3fa6_6666) * 3.0));
    check(FPU_ADD, 32'h4079_999a, 32'h4019_999a, to_fp32(to_real(32'h4079_999a) + to_real(32'h4019_999a)));
    // known constants
    check(FPU_ADD, 32'h3f80_0000, 32'h3f80_0000, 32'h4000_0000);  // 1 + 1 = 2
    check(FPU_SUB, 32'h4040_0000, 32'h3f80_0000, 32'h4000_0000);  // 3 - 1 = 2
    check(FPU_MUL, 32'h4000_0000, 32'hc040_0000, 32'hc0c0_0000);  // 2 * -3 = -6
    check(FPU_DIV, 32'h3f80_0000, 32'h4040_0000, 32'h3eaa_aaab);  // 1 / 3
    check(FPU_SUB, 32'h4121_999a, 32'h4121_999a, 32'h0000_0000);  // x - x = +0
    check(FPU_ADD, 32'h0000_0000, 32'hbf80_0000, 32'hbf80_0000);  // 0 + -1
    check(FPU_DIV, 32'h3f80_0000, 32'h0000_0000, 32'h7f80_0000);  // 1 / 0 = inf
    check(FPU_DIV, 32'h0000_0000, 32'h0000_0000, 32'h7fc0_0000);  // 0 / 0 = NaN
    check(FPU_SUB, 32'h7f80_0000, 32'h7f80_0000, 32'h7fc0_0000);  // inf - inf = NaN
    check(FPU_MUL, 32'h7f00_0000, 32'h7f00_0000, 32'h7f80_0000);  // overflow
    check(FPU_MUL, 32'h0080_0000, 32'h0080_0000, 32'h0000_0000);  // underflow flush
    check(FPU_ADD, 32'h3f80_0000, 32'h3380_0000, 32'h3f80_0000);  // 1 + 2^-24 ties to even
    check(FPU_ADD, 32'h3f80_0001, 32'h3380_0000, 32'h3f80_0002);  // tie rounds up to even
    // random operands, moderate exponents so no result leaves the normal range
    for (int i = 0; i < 4000; i++) begin
      fp32_t x, z;
      x = rand_fp32(100, 154);
      z = rand_fp32(100, 154);
      check_ref(fpu_op_e'(i % 4), x, z);
    end
    // random operands with close exponents, to stress cancellation in add and subtract
    for (int i = 0; i < 2000; i++) begin
      fp32_t x, z;
      x = rand_fp32(126, 128);
      z = rand_fp32(126, 128);
      check_ref(fpu_op_e'(i % 2), x, z);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
