// mxp_pkg -- types, constants and element decoders shared by the MX+ Tensor
// Core datapath.
//
// MX blocks hold 32 elements that share one E8M0 scale. MX+ stores the block
// maximum (BM) without its private exponent: the exponent of the BM is always
// e_max of the element type, so its exponent field is reused as extra
// mantissa bits (E2M1 -> E0M3, E2M3 -> E0M5, E4M3 -> E0M7). A per-block
// index byte holds the BM position in bits [4:0]; bits [7:5] are reserved and
// carry the MX++ scale difference (delta) between the BM and the other
// elements.
//
// Every decoded element is a sign, an unsigned significand and a left shift,
// so that value = (-1)^sign * mant * 2^(shamt - ELEM_FRAC). ELEM_FRAC = 9 is the
// smallest LSB of any supported element (the E4M3 subnormal step 2^-9), so
// all three formats share one fixed-point grid and a product of two elements
// has its LSB at 2^-18 (PROD_FRAC). The shared scales are applied after the
// block-pair sum, when it is converted to FP32.
//
// This grid, the choice of packing FP6 elements into the low six bits of an
// 8-bit lane pair, and little-endian nibble order inside a lane pair are this
// design's choices; the element encodings and e_max values follow the OCP MX
// formats and the MX+ layout.
package mxp_pkg;

  // 4-bit lanes per DPE: 16 FP4 input pairs per cycle.
  localparam int unsigned LANES     = 16;
  localparam int unsigned NIB_W     = 4;
  localparam int unsigned ELEM_FRAC = 9;    // LSB of a decoded element: 2^-9
  localparam int unsigned PROD_FRAC = 2 * ELEM_FRAC;
  localparam int unsigned ELEM_W    = 19;   // signed decoded element width
  localparam int unsigned PROD_W    = 2 * ELEM_W;
  localparam int unsigned ACC_W     = 56;   // signed block-pair accumulator
  localparam int unsigned E8M0_BIAS = 127;

  // Tensor Core organisation and MMA tile (m16n8, 256-bit rows of A / columns
  // of B: K = 64 FP4 or 32 FP6/FP8 elements).
  localparam int unsigned TC_M         = 16;
  localparam int unsigned TC_N         = 8;
  localparam int unsigned TC_KNIB      = 64;
  localparam int unsigned N_OCTET      = 4;
  localparam int unsigned TG_PER_OCTET = 2;
  localparam int unsigned DPE_PER_TG   = 4;
  localparam int unsigned N_DPE        = N_OCTET * TG_PER_OCTET * DPE_PER_TG;

  // Element data type of the MMA.
  typedef enum logic [1:0] {
    FMT_FP4 = 2'd0,   // E2M1, MXFP4(+)
    FMT_FP6 = 2'd1,   // E2M3, MXFP6(+), in the low 6 bits of a lane pair
    FMT_FP8 = 2'd2    // E4M3, MXFP8(+)
  } fmt_e;

  // A decoded element: value = (-1)^sign * mant * 2^(shamt - ELEM_FRAC).
  typedef struct packed {
    logic       sign;
    logic [7:0] mant;
    logic [3:0] shamt;
  } elem_t;

  // One parity of the shared FSU -> BCU datapath (four 4-bit wires).
  typedef struct packed {
    logic [NIB_W-1:0] a_bm;
    logic [NIB_W-1:0] b_nbm;
    logic [NIB_W-1:0] a_nbm;
    logic [NIB_W-1:0] b_bm;
  } bcu_bus_t;

  // BM index byte of one MX+ block.
  typedef struct packed {
    logic [2:0] delta;   // reserved bits: MX++ shared-exponent difference
    logic [4:0] idx;     // position of the BM within the 32-element block
  } bmidx_t;

  function automatic logic is_wide(fmt_e fmt);
    return fmt != FMT_FP4;
  endfunction

  // Decode a non-BM element (ordinary MX element encoding).
  function automatic elem_t dec_nbm(fmt_e fmt, logic [7:0] code);
    elem_t r;
    r = '0;
    unique case (fmt)
      FMT_FP6: begin
        r.sign = code[5];
        if (code[4:3] == 2'b00) begin
          r.mant = {5'b0, code[2:0]};
          r.shamt   = 4'd6;
        end else begin
          r.mant = {4'b0, 1'b1, code[2:0]};
          r.shamt   = 4'(code[4:3]) + 4'd5;
        end
      end
      FMT_FP8: begin
        r.sign = code[7];
        if (code[6:3] == 4'b0000) begin
          r.mant = {5'b0, code[2:0]};
          r.shamt   = 4'd0;
        end else begin
          r.mant = {4'b0, 1'b1, code[2:0]};
          r.shamt   = code[6:3] - 4'd1;
        end
      end
      default: begin  // FP4 E2M1
        r.sign = code[3];
        if (code[2:1] == 2'b00) begin
          r.mant = {7'b0, code[0]};
          r.shamt   = 4'd8;
        end else begin
          r.mant = {6'b0, 1'b1, code[0]};
          r.shamt   = 4'(code[2:1]) + 4'd7;
        end
      end
    endcase
    return r;
  endfunction

  // Decode a BM element: implicit leading one, exponent fixed at e_max
  // (2 for E2M1/E2M3, 8 for E4M3), all other bits mantissa.
  function automatic elem_t dec_bm(fmt_e fmt, logic [7:0] code);
    elem_t r;
    r = '0;
    unique case (fmt)
      FMT_FP6: begin   // E0M5: 2^2 * 1.mmmmm
        r.sign = code[5];
        r.mant = {2'b0, 1'b1, code[4:0]};
        r.shamt   = 4'd6;
      end
      FMT_FP8: begin   // E0M7: 2^8 * 1.mmmmmmm
        r.sign = code[7];
        r.mant = {1'b1, code[6:0]};
        r.shamt   = 4'd10;
      end
      default: begin   // E0M3: 2^2 * 1.mmm
        r.sign = code[3];
        r.mant = {4'b0, 1'b1, code[2:0]};
        r.shamt   = 4'd8;
      end
    endcase
    return r;
  endfunction

  // Signed fixed-point value of a decoded element (LSB 2^-ELEM_FRAC).
  function automatic logic signed [ELEM_W-1:0] elem_val(elem_t e);
    logic [ELEM_W-1:0] mag;
    mag = ELEM_W'(e.mant) << e.shamt;
    return e.sign ? -$signed(mag) : $signed(mag);
  endfunction

endpackage
