// dpe -- MX dot product engine (DPE) with the MX+ extension.
//
// A DPE takes one slice of an A block and the matching slice of a B block per
// cycle on 16 4-bit lanes (16 FP4 pairs, or 8 FP6/FP8 pairs, each 8-bit
// element spanning an even/odd lane pair), so an MXFP4 block pair takes 2
// cycles and an MXFP6/MXFP8 block pair 4 cycles. The unmodified MX pipeline is
// a vector multiplier, an adder tree and pipeline registers; the FP32 result
// of each block pair, scaled by 2^(X_A + X_B), is accumulated onto C.
//
// The MX+ extension sits outside that pipeline:
//   * the BM Detector turns the A and B BM index bytes into per-lane BM_A /
//     BM_B selects for the current slice;
//   * 16 Forward and Swap Units zero the selected BM lane at the multiplier
//     input and drive the BM and its matching operand onto a shared datapath
//     (one for even, one for odd lanes);
//   * the BM Compute Unit multiplies the BMs with their matching operands at
//     full BM precision (and applies the MX++ shifts), and its output is added
//     to the adder-tree output before normalization.
// With bm_en low the engine is a plain MX engine.
//
// Pipeline (one slice accepted every cycle, no stalls):
//   stage 1  FSU/detector, vector multiplier, adder tree, BCU -> register
//   stage 2  block-pair accumulation over 2 (FP4) or 4 (FP6/FP8) slices;
//            on the last slice the block sum and scales are registered
//   stage 3  normalize/convert to FP32 and add to C or the running sum;
//            on the last block of an output, d/d_valid are registered.
// d_valid rises LATENCY = 3 cycles after the in_valid cycle that carried
// out_last. The control inputs (phase, first, blk_last, out_last) are
// supplied by the Tensor Core sequencer.
//
// Follows the paper: 16 lanes, the rates, the FSU/BCU placement, zeroing of
// BM lanes, the BCU being added to the adder-tree output before FP32
// conversion, the MX+ all-zero block encoding (biased shared exponent 0 with
// bm_en). This design's choices: the fixed-point grid (see mxp_pkg), the
// three-stage pipeline, FP32 accumulation once per block pair, an E8M0 scale
// of 0xFF (NaN in the MX specification) giving a NaN result, and the adder
// tree written as a balanced sum.
module dpe
  import mxp_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  fmt_e                          fmt,
  input  logic                          bm_en,
  input  logic [LANES-1:0][NIB_W-1:0]   a_lanes,
  input  logic [LANES-1:0][NIB_W-1:0]   b_lanes,
  input  logic [1:0]                    phase,     // slice within block pair
  input  logic                          first,     // first slice of an output
  input  logic                          blk_last,  // last slice of a block pair
  input  logic                          out_last,  // last slice of an output
  input  logic [31:0]                   c_in,      // FP32 C element
  input  logic [7:0]                    a_exp,     // E8M0 shared exponents
  input  logic [7:0]                    b_exp,
  input  bmidx_t                        a_bmidx,
  input  bmidx_t                        b_bmidx,
  output logic                          d_valid,
  output logic [31:0]                   d,
  // Observation of the MX+ path (counted by testbenches).
  output logic                          bm_a_seen,
  output logic                          bm_b_seen,
  output logic                          bm_swap_seen
);

  // ---------------------------------------------------------------- stage 1
  logic [LANES-1:0]            bm_a, bm_b;
  logic                        a_hit, b_hit, idx_eq;
  logic [2:0]                  delta_a, delta_b;
  logic [LANES-1:0][NIB_W-1:0] a_fwd, b_fwd;
  bcu_bus_t [LANES-1:0]        drv;
  bcu_bus_t                    bus_even, bus_odd;
  logic signed [ACC_W-1:0]     bcu_out;

  bm_detector u_det (
    .bm_en, .fmt, .phase, .a_bmidx, .b_bmidx,
    .bm_a, .bm_b, .a_hit, .b_hit, .idx_eq, .delta_a, .delta_b
  );

  for (genvar l = 0; l < LANES; l++) begin : g_fsu
    fsu u_fsu (
      .a_in (a_lanes[l]), .b_in (b_lanes[l]),
      .bm_a (bm_a[l]),    .bm_b (bm_b[l]),
      .a_out(a_fwd[l]),   .b_out(b_fwd[l]),
      .drv  (drv[l])
    );
  end

  // Shared even / odd datapaths to the BCU (at most one driver each).
  always_comb begin
    bus_even = '0;
    bus_odd  = '0;
    for (int l = 0; l < LANES; l += 2) begin
      bus_even = bus_even | drv[l];
      bus_odd  = bus_odd  | drv[l+1];
    end
  end

  bcu u_bcu (
    .fmt, .bus_even, .bus_odd, .a_hit, .b_hit, .idx_eq, .delta_a, .delta_b,
    .out(bcu_out)
  );

  // Vector multiplier: one product per FP4 lane, or per even lane for 8-bit
  // elements (odd lanes then carry the high nibble and give no product).
  logic signed [PROD_W-1:0] prod [LANES];
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic [7:0] ac, bc;
      ac = is_wide(fmt) ? {a_fwd[l | 1], a_fwd[l & ~1]} : {4'b0, a_fwd[l]};
      bc = is_wide(fmt) ? {b_fwd[l | 1], b_fwd[l & ~1]} : {4'b0, b_fwd[l]};
      if (is_wide(fmt) && (l % 2 == 1))
        prod[l] = '0;
      else
        prod[l] = PROD_W'(elem_val(dec_nbm(fmt, ac))) *
                  PROD_W'(elem_val(dec_nbm(fmt, bc)));
    end
  end

  // Adder tree: four levels of pairwise additions.
  logic signed [ACC_W-1:0] lvl1 [8];
  logic signed [ACC_W-1:0] lvl2 [4];
  logic signed [ACC_W-1:0] lvl3 [2];
  logic signed [ACC_W-1:0] tree_out;
  always_comb begin
    for (int i = 0; i < 8; i++)
      lvl1[i] = ACC_W'(prod[2*i]) + ACC_W'(prod[2*i+1]);
    for (int i = 0; i < 4; i++)
      lvl2[i] = lvl1[2*i] + lvl1[2*i+1];
    for (int i = 0; i < 2; i++)
      lvl3[i] = lvl2[2*i] + lvl2[2*i+1];
    tree_out = lvl3[0] + lvl3[1];
  end

  typedef struct packed {
    logic                    valid;
    logic signed [ACC_W-1:0] sum;
    logic                    blk_first;
    logic                    blk_last;
    logic                    first;
    logic                    out_last;
    logic [31:0]             c;
    logic [7:0]              a_exp;
    logic [7:0]              b_exp;
    logic                    bm_en;
  } s1_t;

  s1_t s1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0;
    end else begin
      s1.valid <= in_valid;
      if (in_valid) begin
        s1.sum       <= tree_out + bcu_out;
        s1.blk_first <= (phase == 2'd0);
        s1.blk_last  <= blk_last;
        s1.first     <= first;
        s1.out_last  <= out_last;
        s1.c         <= c_in;
        s1.a_exp     <= a_exp;
        s1.b_exp     <= b_exp;
        s1.bm_en     <= bm_en;
      end
    end
  end

  assign bm_a_seen    = in_valid && a_hit;
  assign bm_b_seen    = in_valid && b_hit;
  assign bm_swap_seen = in_valid && a_hit && idx_eq;

  // ---------------------------------------------------------------- stage 2
  typedef struct packed {
    logic                    valid;
    logic signed [ACC_W-1:0] sum;
    logic                    first;
    logic                    out_last;
    logic [31:0]             c;
    logic [8:0]              esum;
    logic                    zero_blk;
    logic                    nan_blk;
  } s2_t;

  logic signed [ACC_W-1:0] blk_acc, blk_next;
  s2_t s2;
  logic first_seen;   // "first" of the current output, held until its block

  assign blk_next = (s1.blk_first ? '0 : blk_acc) + s1.sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      blk_acc    <= '0;
      s2         <= '0;
      first_seen <= 1'b0;
    end else begin
      s2.valid <= 1'b0;
      if (s1.valid) begin
        blk_acc <= blk_next;
        if (s1.first)
          first_seen <= 1'b1;
        if (s1.blk_last) begin
          s2.valid    <= 1'b1;
          s2.sum      <= blk_next;
          s2.first    <= first_seen || s1.first;
          s2.out_last <= s1.out_last;
          s2.c        <= s1.c;
          s2.esum     <= 9'(s1.a_exp) + 9'(s1.b_exp);
          s2.zero_blk <= s1.bm_en && (s1.a_exp == 8'h00 || s1.b_exp == 8'h00);
          s2.nan_blk  <= (s1.a_exp == 8'hFF || s1.b_exp == 8'hFF);
          first_seen  <= 1'b0;
        end
      end
    end
  end

  // ---------------------------------------------------------------- stage 3
  logic [31:0] blk_fp, blk_term, acc, acc_base, acc_next;

  fx_to_fp32 u_norm (.s(s2.sum), .esum(s2.esum), .f(blk_fp));

  always_comb begin
    if (s2.nan_blk)       blk_term = 32'h7FC0_0000;
    else if (s2.zero_blk) blk_term = 32'h0000_0000;
    else                  blk_term = blk_fp;
    acc_base = s2.first ? s2.c : acc;
  end

  fp32_add u_acc (.a(acc_base), .b(blk_term), .y(acc_next));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      d       <= '0;
      d_valid <= 1'b0;
    end else begin
      d_valid <= 1'b0;
      if (s2.valid) begin
        acc <= acc_next;
        if (s2.out_last) begin
          d       <= acc_next;
          d_valid <= 1'b1;
        end
      end
    end
  end

endmodule
