// tb_fp32_mul: checks the FP32 multiplier against the simulator's own
// floating-point arithmetic (the exact product of two floats fits a double,
// so one rounding to float gives the correctly rounded result), on random
// normal operands whose product stays in the normal range, plus zeros,
// infinities and NaNs.
module tb_fp32_mul;
  import td_pkg::*;
  import tb_fp_ref_pkg::*;
  fp32_t a, b, y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a, .b, .y);

  task automatic check(fp32_t x, fp32_t z, fp32_t exp);
    a = x; b = z; #1;
    checks++;
    if (!feq(y, exp)) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h = %h, expected %h", x, z, y, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 20000; n++) begin
      automatic fp32_t x = frand(90, 164);
      automatic fp32_t z = frand(90, 164);
      check(x, z, fmul(x, z));
    end
    check(32'h3F80_0000, 32'h4000_0000, 32'h4000_0000);  // 1 * 2
    check(32'h0000_0000, 32'h4049_0FDB, 32'h0000_0000);  // 0 * pi
    check(32'h8000_0000, 32'h4049_0FDB, 32'h8000_0000);  // -0 * pi
    check(32'h7F80_0000, 32'h4000_0000, 32'h7F80_0000);  // inf * 2
    check(32'h7F80_0000, 32'h0000_0000, 32'h7FC0_0000);  // inf * 0
    check(32'h7F00_0000, 32'h7F00_0000, 32'h7F80_0000);  // overflow
    check(32'h7FC0_0001, 32'h3F80_0000, 32'h7FC0_0000);  // NaN
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
