// tb_fsu -- exhaustive check of the Forward and Swap Unit: every A/B nibble
// and BM select combination, checking the values forwarded to the vector
// multiplier and the four values driven towards the BM Compute Unit.
module tb_fsu;
  import mxp_pkg::*;

  logic [3:0] a_in, b_in, a_out, b_out;
  logic bm_a, bm_b;
  bcu_bus_t drv;
  int checks = 0, failures = 0;

  fsu dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 16; a++)
      for (int b = 0; b < 16; b++)
        for (int s = 0; s < 4; s++) begin
          a_in = 4'(a); b_in = 4'(b); bm_a = s[0]; bm_b = s[1];
          #1;
          checks++;
          if (a_out !== (s[0] ? 4'd0 : 4'(a)) || b_out !== (s[1] ? 4'd0 : 4'(b)) ||
              drv.a_bm !== (s[0] ? 4'(a) : 4'd0) || drv.b_nbm !== (s[0] ? 4'(b) : 4'd0) ||
              drv.a_nbm !== (s[1] ? 4'(a) : 4'd0) || drv.b_bm !== (s[1] ? 4'(b) : 4'd0)) begin
            failures++;
            $display("FAIL a=%0d b=%0d sel=%0d", a, b, s);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
