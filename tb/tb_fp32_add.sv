// tb_fp32_add: checks the FP32 adder against the simulator's floating-point
// arithmetic. Operand exponents are kept within 25 of each other so that the
// double-precision sum is exact and one rounding to float is the correctly
// rounded reference. Covers random sums, exact cancellations, near
// cancellations, zeros, infinities and NaNs.
module tb_fp32_add;
  import td_pkg::*;
  import tb_fp_ref_pkg::*;
  fp32_t a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a, .b, .y);

  task automatic check(fp32_t x, fp32_t z, fp32_t exp);
    a = x; b = z; #1;
    checks++;
    if (!feq(y, exp)) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h = %h, expected %h", x, z, y, exp);
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
      automatic fp32_t x = frand(115, 140);
      automatic fp32_t z = frand(115, 140);
      check(x, z, fadd(x, z));
    end
    for (int n = 0; n < 5000; n++) begin   // near cancellation
      automatic fp32_t x = frand(120, 130);
      automatic fp32_t z;
      z = x ^ 32'h8000_0000;
      z[3:0] = 4'($urandom);
      check(x, z, fadd(x, z));
    end
    check(32'h3F80_0000, 32'hBF80_0000, 32'h0000_0000);  // 1 - 1 = +0
    check(32'h8000_0000, 32'h8000_0000, 32'h8000_0000);  // -0 + -0
    check(32'h4000_0000, 32'h0000_0000, 32'h4000_0000);  // 2 + 0
    check(32'h7F80_0000, 32'hFF80_0000, 32'h7FC0_0000);  // inf - inf
    check(32'h7F80_0000, 32'h3F80_0000, 32'h7F80_0000);  // inf + 1
    check(32'h7F7F_FFFF, 32'h7F7F_FFFF, 32'h7F80_0000);  // overflow
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
