// tb_dpe -- end-to-end check of one MX+ dot product engine.
//
// Streams random outputs through the DPE with no idle cycles (occasionally
// with gaps): each output is C plus two MXFP4(+) block pairs (4 slices) or
// one MXFP6/MXFP8(+) block pair (4 slices). Blocks carry random element
// codes, random E8M0 scales, and, with the BM flag, a random BM index whose
// element is encoded as a BM, random MX++ deltas, equal A/B indices and the
// all-zero block encoding. The reference evaluates each block pair in real
// arithmetic from the format definitions, rounds it to FP32 and accumulates
// onto C in FP32; the DPE result must be within 1 ulp and arrive exactly 3
// cycles after the last slice is accepted. Each MX+ mechanism must occur.
module tb_dpe;
  import mxp_pkg::*;
  import mxp_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  fmt_e fmt = FMT_FP4;
  logic bm_en = 0;
  logic [LANES-1:0][NIB_W-1:0] a_lanes = '0, b_lanes = '0;
  logic [1:0] phase = '0;
  logic first = 0, blk_last = 0, out_last = 0;
  logic [31:0] c_in = '0;
  logic [7:0] a_exp = '0, b_exp = '0;
  bmidx_t a_bmidx = '0, b_bmidx = '0;
  logic d_valid;
  logic [31:0] d;
  logic bm_a_seen, bm_b_seen, bm_swap_seen;

  dpe dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  logic [31:0] exp_q[$];
  int          due_q[$];
  int n_a = 0, n_b = 0, n_sw = 0, n_fmt[3] = '{0, 0, 0}, n_mx = 0, n_zero = 0, n_delta = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    n_a  += int'(bm_a_seen);
    n_b  += int'(bm_b_seen);
    n_sw += int'(bm_swap_seen);
    if (rst_n && d_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected result");
      end else begin
        logic [31:0] e;
        int due;
        e = exp_q.pop_front();
        due = due_q.pop_front();
        if (cyc != due) begin
          failures++;
          $display("FAIL latency: result at %0d, expected %0d", cyc, due);
        end
        if (!((e[30:23] == 8'hFF && e[22:0] != 0) ? (d == 32'h7FC0_0000)
                                                  : (ulp_diff(d, e) <= 1))) begin
          failures++;
          if (failures < 10) $display("FAIL d=%h expected=%h", d, e);
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd_code(int f);
    return (f == 0) ? int'($urandom % 16) : (f == 1) ? int'($urandom % 64) : int'($urandom % 256);
  endfunction

  // One output: nblk block pairs of 32 elements, four slices in all.
  task automatic run_output(int f, int en, int special);
    int nblk;
    logic [31:0] acc, c;
    logic [3:0] an [64], bn [64];
    logic [7:0] xa [2], xb [2];
    bmidx_t ia [2], ib [2];
    nblk = (f == 0) ? 2 : 1;
    begin
      int  ci = int'($urandom % 2000) - 1000;
      real cr = ci / 64.0;
      c = real_to_f32(cr);
    end
    acc = c;
    for (int k = 0; k < nblk; k++) begin
      int ac [32], bc [32];
      real sum;
      xa[k] = 8'(115 + $urandom % 20);
      xb[k] = 8'(115 + $urandom % 20);
      ia[k] = {3'($urandom % 3 == 0 ? $urandom : 0), 5'($urandom)};
      ib[k] = {3'($urandom % 3 == 0 ? $urandom : 0), 5'($urandom)};
      if (special == 1) ib[k].idx = ia[k].idx;
      if (special == 2 && k == 0) xa[k] = 8'h00;
      if (en != 0 && (ia[k].delta != 0 || ib[k].delta != 0)) n_delta++;
      sum = 0.0;
      for (int e = 0; e < 32; e++) begin
        real va, vb;
        ac[e] = rnd_code(f);
        bc[e] = rnd_code(f);
        va = (en != 0 && e == int'(ia[k].idx)) ? ref_bm(f, ac[e]) * pow2(int'(ia[k].delta))
                                               : ref_nbm(f, ac[e]);
        vb = (en != 0 && e == int'(ib[k].idx)) ? ref_bm(f, bc[e]) * pow2(int'(ib[k].delta))
                                               : ref_nbm(f, bc[e]);
        sum += va * vb;
        if (f == 0) begin
          an[32 * k + e] = 4'(ac[e]);
          bn[32 * k + e] = 4'(bc[e]);
        end else begin
          an[2 * e] = 4'(ac[e]); an[2 * e + 1] = 4'(ac[e] >> 4);
          bn[2 * e] = 4'(bc[e]); bn[2 * e + 1] = 4'(bc[e] >> 4);
        end
      end
      if (en != 0 && (xa[k] == 0 || xb[k] == 0)) begin
        n_zero++;
        acc = real_to_f32(f32_to_real(acc) + 0.0);
      end else
        acc = real_to_f32(f32_to_real(acc) +
                          f32_to_real(real_to_f32(sum * pow2(int'(xa[k]) + int'(xb[k]) - 254))));
    end
    for (int p = 0; p < 4; p++) begin
      int k;
      @(negedge clk);
      k = (f == 0) ? p / 2 : 0;
      in_valid = 1;
      fmt = fmt_e'(f);
      bm_en = 1'(en);
      for (int l = 0; l < 16; l++) begin
        a_lanes[l] = an[16 * p + l];
        b_lanes[l] = bn[16 * p + l];
      end
      phase    = (f == 0) ? 2'(p % 2) : 2'(p);
      first    = (p == 0);
      blk_last = (f == 0) ? (p % 2 == 1) : (p == 3);
      out_last = (p == 3);
      c_in  = c;
      a_exp = xa[k]; b_exp = xb[k];
      a_bmidx = ia[k]; b_bmidx = ib[k];
      if (p == 3) begin
        exp_q.push_back(acc);
        due_q.push_back(cyc + 3);
      end
    end
    n_fmt[f]++;
    if (en == 0) n_mx++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      int f, en, sp;
      f  = n % 3;
      en = (n % 5 != 4) ? 1 : 0;
      sp = (n % 7 == 3) ? 1 : (n % 11 == 5) ? 2 : 0;
      run_output(f, en, sp);
      if (n % 13 == 0) begin
        @(negedge clk);
        in_valid = 0;
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(posedge clk);
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("mechanisms: bmA=%0d bmB=%0d swap=%0d fp4=%0d fp6=%0d fp8=%0d mx=%0d zero=%0d delta=%0d",
             n_a, n_b, n_sw, n_fmt[0], n_fmt[1], n_fmt[2], n_mx, n_zero, n_delta);
    if (n_a == 0 || n_b == 0 || n_sw == 0 || n_fmt[0] == 0 || n_fmt[1] == 0 ||
        n_fmt[2] == 0 || n_mx == 0 || n_zero == 0 || n_delta == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
