// tb_fx_to_fp32 -- checks the normalizer/FP32 converter against rounding of
// the exact value s * 2^(esum - 272) done from the IEEE double bit pattern.
// Covers zero, both signs, values needing round-up with carry-out,
// underflow to zero and overflow to infinity.
module tb_fx_to_fp32;
  import mxp_pkg::*;
  import mxp_ref_pkg::*;

  logic signed [ACC_W-1:0] s;
  logic [8:0] esum;
  logic [31:0] f;
  int checks = 0, failures = 0;

  fx_to_fp32 dut (.*);

  task automatic check(longint sv, int es);
    logic [31:0] ex;
    s = ACC_W'(sv); esum = 9'(es);
    #1;
    ex = real_to_f32(real'(sv) * 2.0**(es - 272));
    checks++;
    if (f !== ex) begin
      failures++;
      if (failures < 10) $display("FAIL s=%0d esum=%0d f=%h exp=%h", sv, es, f, ex);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0, 254);
    check(1, 272);                         // exactly 1.0
    check(-3, 272);
    check(longint'(33554431), 272);       // 2^25-1 rounds up with carry
    check(longint'(16777217), 272);       // tie, rounds to even (down)
    check(longint'(16777219), 272);       // tie, rounds to even (up)
    check(5, 0);                           // far below FP32 range
    check(longint'(1) << 50, 510);         // overflow to infinity
    check(-(longint'(1) << 50), 510);
    for (int n = 0; n < 20000; n++) begin
      longint v;
      int shamt;
      shamt = int'($urandom % 55);
      v  = longint'({$urandom, $urandom}) >>> (63 - shamt);
      if ($urandom % 2 == 1) v = -v;
      check(v, int'($urandom % 511));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
