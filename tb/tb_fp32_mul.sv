// tb_fp32_mul: self-checking test of the single-precision multiplier.
// Random operands (so that no product leaves the normal range) are multiplied
// and compared bit for bit with the exact double-precision product rounded to
// single precision; half of them use short mantissas, which produce rounding
// ties. Directed cases cover zeros, infinities, NaN, overflow, rounding carry
// and flush-to-zero.
module tb_fp32_mul;
  import accel_pkg::*;
  import tb_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a, .b, .y);

  task automatic check(input logic [31:0] exp_y, input string what);
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %h + %h = %h, expected %h", what, a, b, y, exp_y);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed
    a = 32'h3F80_0000; b = 32'h4049_0FDB; check(32'h4049_0FDB, "1*pi");
    a = 32'h4000_0000; b = 32'hC040_0000; check(32'hC0C0_0000, "2*-3");
    a = 32'h4049_0FDB; b = 32'h8000_0000; check(32'h8000_0000, "pi*-0");
    a = 32'h7F80_0000; b = 32'hBF80_0000; check(32'hFF80_0000, "inf*-1");
    a = 32'h7F80_0000; b = 32'h0000_0000; check(32'h7FC0_0000, "inf*0");
    a = 32'h7FC0_0001; b = 32'h3F80_0000; check(32'h7FC0_0000, "nan*1");
    a = 32'h7F00_0000; b = 32'h4000_0000; check(32'h7F80_0000, "overflow");
    a = 32'h0080_0000; b = 32'h3F00_0000; check(32'h0000_0000, "underflow ftz");
    a = 32'h0000_0001; b = 32'h3F80_0000; check(32'h0000_0000, "subnormal in");
    a = 32'h3F80_0001; b = 32'h3F80_0001; check(32'h3F80_0002, "round");
    a = 32'h3FFF_FFFF; b = 32'h3FFF_FFFF; check(32'h407F_FFFE, "round carry");
    // random
    for (int i = 0; i < 20000; i++) begin
      a = rand_fp32(70, 184);
      b = (i % 2 == 0) ? rand_fp32(70, 184) : {1'($urandom), 8'($urandom_range(100, 154)), 23'($urandom_range(7))};
      check(real_to_fp32(fp32_to_real(a) * fp32_to_real(b)), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
