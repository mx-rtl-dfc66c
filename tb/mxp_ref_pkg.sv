// mxp_ref_pkg -- reference arithmetic for the MX+ testbenches.
//
// Everything here is computed with real (double) numbers straight from the
// format definitions, independently of the fixed-point grid used in the RTL:
//   FP4 E2M1  bias 1, FP6 E2M3 bias 1, FP8 E4M3 bias 7, subnormals when the
//   exponent field is zero; an MX+ block maximum has no exponent field, an
//   implicit leading one and exponent e_max (2, 2, 8).
// real_to_f32 rounds a double to FP32 (nearest, ties to even) from its IEEE
// bit pattern, flushing results below the normal range to zero as the RTL
// does.
package mxp_ref_pkg;

  function automatic real pow2(int e);
    real v = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) v = v * 2.0;
    else        for (int i = 0; i < -e; i++) v = v / 2.0;
    return v;
  endfunction

  function automatic real ref_nbm(int fmt, int code);
    int s, e, m;
    real v;
    case (fmt)
      1: begin s = (code >> 5) & 1; e = (code >> 3) & 3;  m = code & 7;
         v = (e == 0) ? m / 8.0 * 2.0**(1 - 1) : (1.0 + m / 8.0) * 2.0**(e - 1); end
      2: begin s = (code >> 7) & 1; e = (code >> 3) & 15; m = code & 7;
         v = (e == 0) ? m / 8.0 * 2.0**(1 - 7) : (1.0 + m / 8.0) * 2.0**(e - 7); end
      default: begin s = (code >> 3) & 1; e = (code >> 1) & 3; m = code & 1;
         v = (e == 0) ? m / 2.0 * 2.0**(1 - 1) : (1.0 + m / 2.0) * 2.0**(e - 1); end
    endcase
    return (s != 0) ? -v : v;
  endfunction

  function automatic real ref_bm(int fmt, int code);
    int s, m;
    real v;
    case (fmt)
      1: begin s = (code >> 5) & 1; m = code & 31;  v = (1.0 + m / 32.0)  * 4.0;   end
      2: begin s = (code >> 7) & 1; m = code & 127; v = (1.0 + m / 128.0) * 256.0; end
      default: begin s = (code >> 3) & 1; m = code & 7; v = (1.0 + m / 8.0) * 4.0; end
    endcase
    return (s != 0) ? -v : v;
  endfunction

  function automatic logic [31:0] real_to_f32(real r);
    logic [63:0] b;
    logic        s;
    int          e;
    logic [51:0] fr;
    logic [23:0] m;
    logic        g, st;
    b  = $realtobits(r);
    s  = b[63];
    fr = b[51:0];
    if (b[62:0] == '0) return {s, 31'b0};
    e  = int'(b[62:52]) - 1023 + 127;
    m  = {1'b1, fr[51:29]};
    g  = fr[28];
    st = |fr[27:0];
    if (g && (st || m[0])) begin
      m = m + 24'd1;
      if (m == 24'd0) begin m = 24'h800000; e = e + 1; end
    end
    if (e <= 0)   return {s, 31'b0};
    if (e >= 255) return {s, 8'hFF, 23'b0};
    return {s, 8'(e), m[22:0]};
  endfunction

  function automatic real f32_to_real(logic [31:0] f);
    real v;
    if (f[30:23] == 8'd0) return 0.0;
    v = $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'b0});
    return v;
  endfunction

  // Distance in units in the last place between two finite FP32 numbers.
  function automatic int ulp_diff(logic [31:0] x, logic [31:0] y);
    longint ix, iy;
    ix = x[31] ? -longint'(x[30:0]) : longint'(x[30:0]);
    iy = y[31] ? -longint'(y[30:0]) : longint'(y[30:0]);
    return (ix > iy) ? int'(ix - iy) : int'(iy - ix);
  endfunction

endpackage
