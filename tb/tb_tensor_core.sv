// tb_tensor_core -- end-to-end test of the MX+ Tensor Core at its full size
// (32 DPEs, m16n8k64 FP4 / m16n8k32 FP6 and FP8 tiles, no parameter
// overrides).
//
// Issues a stream of block-scaled MMAs, most of them back to back (a new
// start in the last feed cycle of the previous one), cycling through FP4,
// FP6 and FP8 elements, with and without the BM flag (MX+ vs plain MX), with
// MX++ deltas and with all-zero blocks (biased shared exponent 0). Every
// D element is compared, within 1 ulp, with a reference built in real
// arithmetic from the format definitions: per block pair the exact dot
// product is scaled, rounded to FP32 and accumulated onto C in FP32. It also
// checks the rate (one MMA accepted every 16 cycles when issued back to back)
// and the start-to-done latency, and counts that every mechanism occurred:
// A BMs, B BMs, equal-index swaps, each format, plain MX, zero blocks, MX++
// shifts and back-to-back issue.
module tb_tensor_core;
  import mxp_pkg::*;
  import mxp_ref_pkg::*;

  localparam int DONE_LATENCY = 21;   // cycles from accepted start to done

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

  typedef logic [TC_M-1:0][TC_N-1:0][31:0] tile_t;
  tile_t exp_q[$];
  int    due_q[$];
  int checks = 0, failures = 0, cyc = 0;
  int n_a = 0, n_b = 0, n_sw = 0, n_fmt[3] = '{0, 0, 0}, n_mx = 0, n_zero = 0,
      n_delta = 0, n_b2b = 0, n_mma = 0, last_take = -100, n_rate_ok = 0;
  localparam int N_MMA = 24;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    n_a  += int'(bm_a_active);
    n_b  += int'(bm_b_active);
    n_sw += int'(bm_swap_active);
    if (start && ready) begin
      if (cyc - last_take == 16) n_rate_ok++;
      if (dut.feeding) n_b2b++;
      last_take = cyc;
    end
    if (rst_n && done) begin
      tile_t e;
      int due;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected done");
      end else begin
        e = exp_q.pop_front();
        due = due_q.pop_front();
        checks++;
        if (cyc != due) begin
          failures++;
          $display("FAIL done at %0d, expected %0d", cyc, due);
        end
        for (int r = 0; r < TC_M; r++)
          for (int c = 0; c < TC_N; c++) begin
            checks++;
            if (ulp_diff(d_mat[r][c], e[r][c]) > 1) begin
              failures++;
              if (failures < 10)
                $display("FAIL D[%0d][%0d]=%h expected %h", r, c, d_mat[r][c], e[r][c]);
            end
          end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd_code(int f);
    return (f == 0) ? int'($urandom % 16) : (f == 1) ? int'($urandom % 64) : int'($urandom % 256);
  endfunction

  // Element e of block k of a 64-nibble row, for format f.
  function automatic int elem(logic [TC_KNIB-1:0][NIB_W-1:0] row, int f, int k, int e);
    return (f == 0) ? int'(row[32 * k + e]) : int'({row[2 * e + 1], row[2 * e]});
  endfunction

  // Fill the operand ports with a random MMA and return the expected tile.
  function automatic tile_t make_mma(int f, int en, int n);
    tile_t t;
    int nblk = (f == 0) ? 2 : 1;
    for (int r = 0; r < TC_M; r++) begin
      for (int e = 0; e < 32 * nblk; e++) begin
        int code = rnd_code(f);
        if (f == 0) a_mat[r][e] = 4'(code);
        else begin a_mat[r][2 * e] = 4'(code); a_mat[r][2 * e + 1] = 4'(code >> 4); end
      end
      for (int k = 0; k < 2; k++) begin
        a_exp[r][k] = 8'(118 + $urandom % 16);
        a_bmidx[r][k] = {3'(($urandom % 4 == 0) ? $urandom : 0), 5'($urandom)};
      end
      for (int c = 0; c < TC_N; c++) begin
        int  ci = int'($urandom % 4000) - 2000;
        real cr = ci / 256.0;
        c_mat[r][c] = real_to_f32(cr);
      end
    end
    for (int c = 0; c < TC_N; c++) begin
      for (int e = 0; e < 32 * nblk; e++) begin
        int code = rnd_code(f);
        if (f == 0) b_mat[c][e] = 4'(code);
        else begin b_mat[c][2 * e] = 4'(code); b_mat[c][2 * e + 1] = 4'(code >> 4); end
      end
      for (int k = 0; k < 2; k++) begin
        b_exp[c][k] = 8'(118 + $urandom % 16);
        b_bmidx[c][k] = {3'(($urandom % 4 == 0) ? $urandom : 0), 5'($urandom)};
      end
    end
    if (n % 4 == 1) a_exp[n % TC_M][0] = 8'h00;   // all-zero block (MX+ only)
    for (int r = 0; r < TC_M; r++)
      for (int c = 0; c < TC_N; c++) begin
        logic [31:0] acc = c_mat[r][c];
        for (int k = 0; k < nblk; k++) begin
          real sum = 0.0;
          int ia = int'(a_bmidx[r][k].idx), ib = int'(b_bmidx[c][k].idx);
          if (en != 0 && (a_bmidx[r][k].delta != 0 || b_bmidx[c][k].delta != 0)) n_delta++;
          for (int e = 0; e < 32; e++) begin
            real va, vb;
            int ca = elem(a_mat[r], f, k, e), cb = elem(b_mat[c], f, k, e);
            if (en != 0 && e == ia) va = ref_bm(f, ca) * pow2(int'(a_bmidx[r][k].delta));
            else                    va = ref_nbm(f, ca);
            if (en != 0 && e == ib) vb = ref_bm(f, cb) * pow2(int'(b_bmidx[c][k].delta));
            else                    vb = ref_nbm(f, cb);
            sum += va * vb;
          end
          if (en != 0 && (a_exp[r][k] == 0 || b_exp[c][k] == 0)) n_zero++;
          else
            acc = real_to_f32(f32_to_real(acc) + f32_to_real(real_to_f32(
                    sum * pow2(int'(a_exp[r][k]) + int'(b_exp[c][k]) - 254))));
        end
        t[r][c] = acc;
      end
    return t;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < N_MMA; n++) begin
      int f, en;
      f  = n % 3;
      en = (n % 4 != 3) ? 1 : 0;
      @(negedge clk);
      fmt = fmt_e'(f);
      bm_en = 1'(en);
      exp_q.push_back(make_mma(f, en, n));
      start = 1;
      while (!ready) begin
        @(negedge clk);
      end
      due_q.push_back(cyc + DONE_LATENCY);
      n_fmt[f]++;
      if (en == 0) n_mx++;
      n_mma++;
      if (n % 6 == 5) begin       // an idle gap now and then
        @(negedge clk);
        start = 0;
        repeat (20) @(negedge clk);
      end
    end
    @(negedge clk);
    start = 0;
    repeat (40) @(posedge clk);
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d tiles missing", exp_q.size()); end
    $display("mechanisms: mma=%0d bmA=%0d bmB=%0d swap=%0d fp4=%0d fp6=%0d fp8=%0d mx=%0d zero=%0d delta=%0d b2b=%0d rate16=%0d",
             n_mma, n_a, n_b, n_sw, n_fmt[0], n_fmt[1], n_fmt[2], n_mx, n_zero, n_delta, n_b2b, n_rate_ok);
    if (n_a == 0 || n_b == 0 || n_sw == 0 || n_fmt[0] == 0 || n_fmt[1] == 0 || n_fmt[2] == 0 ||
        n_mx == 0 || n_zero == 0 || n_delta == 0 || n_b2b == 0 || n_rate_ok == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    checks++;
    if (n_rate_ok != n_b2b) begin
      failures++;
      $display("FAIL back-to-back MMAs not spaced 16 cycles (%0d of %0d)", n_rate_ok, n_b2b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
