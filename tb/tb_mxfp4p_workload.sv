// tb_mxfp4p_workload -- LLM-style tiles with activation outliers through the
// full-size Tensor Core, in MXFP4 and in MXFP4+.
//
// Activations (A) are drawn roughly normal with a large outlier in some
// 32-element blocks, as seen in LLM attention inputs; weights (B) are roughly
// normal. Both are quantized here, in the testbench, exactly as the MX / MX+
// conversion rules prescribe:
//   shared_exp = floor(log2(max|x|)) - e_max (e_max = 2 for E2M1), clamped to
//   [-127, 127]; a block whose max exponent is <= -127 + e_max is all zero
//   (scale byte 0); ordinary elements round to the nearest E2M1 value
//   (saturating at 6); in MX+ the BM is stored as 2^2 * 1.mmm (nearest,
//   saturating at 1.875) and its index is recorded.
// The same tiles are run once with plain MXFP4 (BM flag low) and once with
// MXFP4+ (BM flag high, both operands). Each D element must match a reference
// built from the quantized values (1 ulp), and the mean squared error against
// the unquantized product must be lower with MXFP4+ than with MXFP4.
module tb_mxfp4p_workload;
  import mxp_pkg::*;
  import mxp_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start = 0, ready, done;
  fmt_e fmt = FMT_FP4;
  logic bm_en = 0;
  logic [TC_M-1:0][TC_KNIB-1:0][NIB_W-1:0] a_mat = '0;
  logic [TC_N-1:0][TC_KNIB-1:0][NIB_W-1:0] b_mat = '0;
  logic [TC_M-1:0][TC_N-1:0][31:0] c_mat = '0;
  logic [TC_M-1:0][1:0][7:0] a_exp = '0;
  logic [TC_N-1:0][1:0][7:0] b_exp = '0;
  bmidx_t [TC_M-1:0][1:0] a_bmidx = '0;
  bmidx_t [TC_N-1:0][1:0] b_bmidx = '0;
  logic [TC_M-1:0][TC_N-1:0][31:0] d_mat;
  logic bm_a_active, bm_b_active, bm_swap_active;

  tensor_core dut (.*);

  always #5 clk = ~clk;

  localparam int N_TILES = 6;
  int checks = 0, failures = 0;
  real af [TC_M][64];
  real bf [TC_N][64];
  real se_mx = 0.0, se_mxp = 0.0;
  int  n_outlier_blocks = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real gauss();
    real s = 0.0;
    for (int i = 0; i < 4; i++) s += ($urandom % 65536) / 65536.0;
    return (s - 2.0) * 1.7;
  endfunction

  function automatic int floor_log2(real v);
    int e = 0;
    while (v >= 2.0) begin v = v / 2.0; e++; end
    while (v < 1.0)  begin v = v * 2.0; e--; end
    return e;
  endfunction

  // Nearest E2M1 code for v (already divided by the scale), saturating.
  function automatic int enc_e2m1(real v);
    real mags [8] = '{0.0, 0.5, 1.0, 1.5, 2.0, 3.0, 4.0, 6.0};
    real a = (v < 0.0) ? -v : v;
    int best = 0;
    for (int i = 1; i < 8; i++)
      if ((a - mags[i]) * (a - mags[i]) < (a - mags[best]) * (a - mags[best])) best = i;
    return ((v < 0.0) ? 8 : 0) | best;
  endfunction

  // Quantize one 32-element block; returns codes, scale byte and BM index.
  task automatic quant_block(input real x [32], input int plus,
                             output int codes [32], output int xs, output int bmi);
    real mx = 0.0;
    int  se;
    bmi = 0;
    for (int e = 0; e < 32; e++) begin
      real a = (x[e] < 0.0) ? -x[e] : x[e];
      if (a > mx) begin mx = a; bmi = e; end
    end
    if (mx == 0.0 || floor_log2(mx) <= -127 + 2) begin
      xs = 0;
      for (int e = 0; e < 32; e++) codes[e] = 0;
      return;
    end
    se = floor_log2(mx) - 2;
    if (se > 127) se = 127;
    xs = se + 127;
    for (int e = 0; e < 32; e++) begin
      real v = x[e] / pow2(se);
      if (plus != 0 && e == bmi) begin
        real a = (v < 0.0) ? -v : v;
        int m;
        m = int'((a / 4.0 - 1.0) * 8.0 + 0.5);
        if (m > 7) m = 7;
        if (m < 0) m = 0;
        codes[e] = ((v < 0.0) ? 8 : 0) | m;
      end else
        codes[e] = enc_e2m1(v);
    end
  endtask

  // Quantize all operands for one run and return the reference tile.
  task automatic load(input int plus);
    for (int r = 0; r < TC_M; r++)
      for (int k = 0; k < 2; k++) begin
        real x [32];
        int codes [32], xs, bmi;
        for (int e = 0; e < 32; e++) x[e] = af[r][32 * k + e];
        quant_block(x, plus, codes, xs, bmi);
        for (int e = 0; e < 32; e++) a_mat[r][32 * k + e] = 4'(codes[e]);
        a_exp[r][k] = 8'(xs);
        a_bmidx[r][k] = {3'b000, 5'(bmi)};
      end
    for (int c = 0; c < TC_N; c++)
      for (int k = 0; k < 2; k++) begin
        real x [32];
        int codes [32], xs, bmi;
        for (int e = 0; e < 32; e++) x[e] = bf[c][32 * k + e];
        quant_block(x, plus, codes, xs, bmi);
        for (int e = 0; e < 32; e++) b_mat[c][32 * k + e] = 4'(codes[e]);
        b_exp[c][k] = 8'(xs);
        b_bmidx[c][k] = {3'b000, 5'(bmi)};
      end
    bm_en = 1'(plus);
  endtask

  function automatic logic [31:0] ref_d(int r, int c, int plus);
    logic [31:0] acc = c_mat[r][c];
    for (int k = 0; k < 2; k++) begin
      real sum = 0.0;
      for (int e = 0; e < 32; e++) begin
        int ca = int'(a_mat[r][32 * k + e]), cb = int'(b_mat[c][32 * k + e]);
        real va, vb;
        if (plus != 0 && e == int'(a_bmidx[r][k].idx)) va = ref_bm(0, ca); else va = ref_nbm(0, ca);
        if (plus != 0 && e == int'(b_bmidx[c][k].idx)) vb = ref_bm(0, cb); else vb = ref_nbm(0, cb);
        sum += va * vb;
      end
      if (!(plus != 0 && (a_exp[r][k] == 0 || b_exp[c][k] == 0)))
        acc = real_to_f32(f32_to_real(acc) + f32_to_real(real_to_f32(
                sum * pow2(int'(a_exp[r][k]) + int'(b_exp[c][k]) - 254))));
    end
    return acc;
  endfunction

  task automatic run_and_check(input int plus);
    @(negedge clk);
    load(plus);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    for (int r = 0; r < TC_M; r++)
      for (int c = 0; c < TC_N; c++) begin
        real exact, err;
        logic [31:0] e;
        e = ref_d(r, c, plus);
        checks++;
        if (ulp_diff(d_mat[r][c], e) > 1) begin
          failures++;
          if (failures < 10) $display("FAIL plus=%0d D[%0d][%0d]=%h expected %h",
                                      plus, r, c, d_mat[r][c], e);
        end
        exact = f32_to_real(c_mat[r][c]);
        for (int k = 0; k < 64; k++) exact += af[r][k] * bf[c][k];
        err = f32_to_real(d_mat[r][c]) - exact;
        if (plus != 0) se_mxp += err * err; else se_mx += err * err;
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < N_TILES; t++) begin
      for (int r = 0; r < TC_M; r++) begin
        for (int k = 0; k < 64; k++) af[r][k] = gauss() * 0.25;
        for (int k = 0; k < 2; k++)
          if ($urandom % 2 == 0) begin      // outlier in this block
            int pos;
            pos = 32 * k + int'($urandom % 32);
            af[r][pos] = (($urandom % 2 == 0) ? 1.0 : -1.0) * (6.0 + ($urandom % 1000) / 100.0);
            n_outlier_blocks++;
          end
      end
      for (int c = 0; c < TC_N; c++)
        for (int k = 0; k < 64; k++) bf[c][k] = gauss() * 0.05;
      for (int r = 0; r < TC_M; r++)
        for (int c = 0; c < TC_N; c++) c_mat[r][c] = 32'h0;
      run_and_check(0);
      run_and_check(1);
    end
    $display("outlier blocks=%0d  MSE MXFP4=%e  MSE MXFP4+=%e", n_outlier_blocks,
             se_mx / (N_TILES * 128), se_mxp / (N_TILES * 128));
    checks++;
    if (!(se_mxp < se_mx) || n_outlier_blocks == 0) begin
      failures++;
      $display("FAIL MXFP4+ error is not below MXFP4 error");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
