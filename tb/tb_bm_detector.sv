// tb_bm_detector -- exhaustive check of the BM Detector.
// For every format, phase, pair of BM index bytes and BM flag, the expected
// lane selects are derived from the element that each lane carries: FP4 lane
// l in phase p holds element 16p + l; FP6/FP8 lanes 2j and 2j+1 in phase p
// hold element 8p + j.
module tb_bm_detector;
  import mxp_pkg::*;

  logic   bm_en;
  fmt_e   fmt;
  logic [1:0] phase;
  bmidx_t a_bmidx, b_bmidx;
  logic [LANES-1:0] bm_a, bm_b;
  logic a_hit, b_hit, idx_eq;
  logic [2:0] delta_a, delta_b;
  int checks = 0, failures = 0;

  bm_detector dut (.*);

  function automatic logic [LANES-1:0] expect_sel(int f, int p, int idx, int en);
    logic [LANES-1:0] r = '0;
    for (int l = 0; l < LANES; l++) begin
      int elem = (f == 0) ? 16 * p + l : 8 * p + l / 2;
      if (en != 0 && elem == idx) r[l] = 1'b1;
    end
    return r;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < 3; f++)
      for (int p = 0; p < ((f == 0) ? 2 : 4); p++)
        for (int en = 0; en < 2; en++)
          for (int ia = 0; ia < 32; ia++)
            for (int ib = 0; ib < 32; ib++) begin
              logic [2:0] da, db;
              da = 3'($urandom); db = 3'($urandom);
              fmt = fmt_e'(f); phase = 2'(p); bm_en = 1'(en);
              a_bmidx = {da, 5'(ia)}; b_bmidx = {db, 5'(ib)};
              #1;
              checks++;
              if (bm_a !== expect_sel(f, p, ia, en) || bm_b !== expect_sel(f, p, ib, en) ||
                  a_hit !== (|expect_sel(f, p, ia, en)) || b_hit !== (|expect_sel(f, p, ib, en)) ||
                  idx_eq !== (en != 0 && ia == ib) ||
                  delta_a !== ((en != 0) ? da : 3'd0) || delta_b !== ((en != 0) ? db : 3'd0)) begin
                failures++;
                if (failures < 10)
                  $display("FAIL f=%0d p=%0d en=%0d ia=%0d ib=%0d bm_a=%h bm_b=%h",
                           f, p, en, ia, ib, bm_a, bm_b);
              end
            end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
