// tb_fp32_add -- checks the FP32 adder against the sum of the two operands
// computed in double precision and rounded to FP32 (nearest even). Random
// operands keep their exponent difference below 29 so that the double sum is
// exact and the single rounding is the reference; special cases cover zeros,
// exact cancellation, infinities, NaN and overflow.
module tb_fp32_add;
  import mxp_ref_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.*);

  task automatic check(logic [31:0] x, logic [31:0] z, logic [31:0] ex);
    a = x; b = z;
    #1;
    checks++;
    if (y !== ex) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h y=%h exp=%h", x, z, y, ex);
    end
  endtask

  task automatic check_ref(logic [31:0] x, logic [31:0] z);
    check(x, z, real_to_f32(f32_to_real(x) + f32_to_real(z)));
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h3F80_0000, 32'hBF80_0000, 32'h0000_0000);  // 1 - 1 = +0
    check(32'h0000_0000, 32'h4000_0000, 32'h4000_0000);
    check(32'h8000_0000, 32'h8000_0000, 32'h8000_0000);
    check(32'h7F80_0000, 32'h3F80_0000, 32'h7F80_0000);  // inf + 1
    check(32'h7F80_0000, 32'hFF80_0000, 32'h7FC0_0000);  // inf - inf
    check(32'h7FC0_0000, 32'h3F80_0000, 32'h7FC0_0000);
    check(32'h7F7F_FFFF, 32'h7F7F_FFFF, 32'h7F80_0000);  // overflow
    check(32'h3F80_0000, 32'h3380_0000, 32'h3F80_0000);  // 1 + 2^-24: tie to even
    check(32'h3F80_0001, 32'h3380_0000, 32'h3F80_0002);  // tie, round up to even
    for (int n = 0; n < 30000; n++) begin
      logic [31:0] x, z;
      int ex, ez;
      ex = 40 + int'($urandom % 170);
      ez = ex - 28 + int'($urandom % 57);
      x = {1'($urandom), 8'(ex), 23'($urandom)};
      z = {1'($urandom), 8'(ez), 23'($urandom)};
      if (n % 7 == 0) z = {~x[31], x[30:23], x[22:0] ^ 23'($urandom % 8)};
      check_ref(x, z);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
