// tb_bcu -- randomized check of the BM Compute Unit against real arithmetic.
// Each case draws a format, which BMs are present, equal or different
// indices and MX++ deltas, places the codes on the even/odd datapaths the way
// the FSUs would, and compares the fixed-point output (LSB 2^-18) with
//   BM_A*NBM_B*2^dA + BM_B*NBM_A*2^dB        (different indices)
//   BM_A*BM_B*2^(dA+dB)                      (equal indices)
// computed from the format definitions.
module tb_bcu;
  import mxp_pkg::*;
  import mxp_ref_pkg::*;

  fmt_e fmt;
  bcu_bus_t bus_even, bus_odd;
  logic a_hit, b_hit, idx_eq;
  logic [2:0] delta_a, delta_b;
  logic signed [ACC_W-1:0] out;
  int checks = 0, failures = 0;
  int n_eq = 0, n_a = 0, n_b = 0;

  bcu dut (.*);

  function automatic int rnd_code(int f);
    return (f == 0) ? int'($urandom % 16) : (f == 1) ? int'($urandom % 64) : int'($urandom % 256);
  endfunction

  // Put the four values of one FSU (lane parity par) onto the buses.
  task automatic put(int f, int par, int abm, int bnbm, int anbm, int bbm);
    bcu_bus_t v_lo, v_hi;
    v_lo = {4'(abm), 4'(bnbm), 4'(anbm), 4'(bbm)};
    v_hi = {4'(abm >> 4), 4'(bnbm >> 4), 4'(anbm >> 4), 4'(bbm >> 4)};
    if (f == 0) begin
      if (par == 0) bus_even = bus_even | v_lo; else bus_odd = bus_odd | v_lo;
    end else begin
      bus_even = bus_even | v_lo;
      bus_odd  = bus_odd  | v_hi;
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 6000; n++) begin
      int f, ca, cb, cna, cnb, da, db, mode;
      real ex;
      f = n % 3; fmt = fmt_e'(f);
      ca = rnd_code(f); cb = rnd_code(f); cna = rnd_code(f); cnb = rnd_code(f);
      da = (n % 4 == 0) ? int'($urandom % 8) : 0;
      db = (n % 5 == 0) ? int'($urandom % 8) : 0;
      delta_a = 3'(da); delta_b = 3'(db);
      mode = int'($urandom % 5);  // 0 none, 1 A only, 2 B only, 3 both, 4 equal
      bus_even = '0; bus_odd = '0;
      a_hit = (mode == 1 || mode == 3 || mode == 4);
      b_hit = (mode == 2 || mode == 3 || mode == 4);
      idx_eq = (mode == 4) || (mode == 0 && n % 2 == 0);
      ex = 0.0;
      if (mode == 4) begin
        put(f, int'($urandom % 2), ca, cb, ca, cb);
        ex = ref_bm(f, ca) * ref_bm(f, cb) * 2.0**(da + db);
        n_eq++;
      end else begin
        if (a_hit) begin
          put(f, 0, ca, cnb, 0, 0);
          ex += ref_bm(f, ca) * ref_nbm(f, cnb) * 2.0**da;
          n_a++;
        end
        if (b_hit) begin
          put(f, (f == 0) ? 1 : 0, 0, 0, cna, cb);
          ex += ref_bm(f, cb) * ref_nbm(f, cna) * 2.0**db;
          n_b++;
        end
      end
      #1;
      checks++;
      if (out !== ACC_W'(longint'(ex * 2.0**18))) begin
        failures++;
        if (failures < 10)
          $display("FAIL f=%0d mode=%0d ca=%h cb=%h cna=%h cnb=%h da=%0d db=%0d out=%0d exp=%f",
                   f, mode, ca, cb, cna, cnb, da, db, out, ex * 2.0**18);
      end
    end
    if (n_eq == 0 || n_a == 0 || n_b == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
