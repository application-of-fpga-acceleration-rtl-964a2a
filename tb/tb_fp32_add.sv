// tb_fp32_add: self-checking test of the single-precision adder. Random
// operands of moderate exponent (so no result leaves the normal range) are
// added and compared bit for bit with the double-precision sum rounded to
// single precision; near-cancellation pairs exercise the normaliser, and
// directed cases cover zeros, infinities, NaN and flush-to-zero.
module tb_fp32_add;
  import accel_pkg::*;
  import tb_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a, .b, .y);

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
    a = 32'h3F80_0000; b = 32'h3F80_0000; check(32'h4000_0000, "1+1");
    a = 32'h3F80_0000; b = 32'hBF80_0000; check(32'h0000_0000, "1-1");
    a = 32'h4049_0FDB; b = 32'h0000_0000; check(32'h4049_0FDB, "pi+0");
    a = 32'h7F80_0000; b = 32'h3F80_0000; check(32'h7F80_0000, "inf+1");
    a = 32'h7F80_0000; b = 32'hFF80_0000; check(32'h7FC0_0000, "inf-inf");
    a = 32'h7FC0_0001; b = 32'h3F80_0000; check(32'h7FC0_0000, "nan+1");
    a = 32'h7F7F_FFFF; b = 32'h7F7F_FFFF; check(32'h7F80_0000, "overflow");
    a = 32'h0080_0001; b = 32'h8080_0000; check(32'h0000_0000, "underflow ftz");
    a = 32'h0000_0001; b = 32'h3F80_0000; check(32'h3F80_0000, "subnormal in");
    a = 32'h3F80_0000; b = 32'h3380_0000; check(32'h3F80_0000, "tie to even down");
    a = 32'h3F80_0001; b = 32'h3380_0000; check(32'h3F80_0002, "tie to even up");
    // random
    for (int i = 0; i < 20000; i++) begin
      a = rand_fp32(100, 154);
      case (i % 4)
        0: b = rand_fp32(100, 154);
        1: b = {1'($urandom), a[30:23], 23'($urandom)};               // same exponent
        2: b = {~a[31], a[30:0] ^ 31'($urandom_range(255))};          // near cancellation
        default: b = {1'($urandom), 8'(int'(a[30:23]) - 1 + int'($urandom_range(2))), 23'($urandom)};
      endcase
      check(real_to_fp32(fp32_to_real(a) + fp32_to_real(b)), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
