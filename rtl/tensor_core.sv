// tensor_core -- one Tensor Core with MX+ support, executing a block-scaled
// matrix multiply-accumulate D = A x B + C per instruction.
//
// Tile shape: A is 16 x K, B is K x 8, C and D are 16 x 8 FP32. K is 64 FP4
// elements (mma.m16n8k64) or 32 FP6/FP8 elements (m16n8k32); either way a row
// of A and a column of B are 256 bits, held here as 64 nibbles. FP4 rows hold
// two MX blocks (two E8M0 scales and two BM index bytes per row / column);
// FP6/FP8 rows hold one (entry [0] of each pair is used).
//
// Organisation: 32 dot product engines (DPEs), grouped as 4 octets of 2
// threadgroups of 4 DPEs; DPE d serves warp thread d. Thread d owns the four
// D elements of the m16n8 accumulator fragment: rows g and g+8 (g = d/4),
// columns 2*(d%4) and 2*(d%4)+1. For each of them the DPE consumes the A row
// and B column in four 16-lane slices (two block pairs of 2 slices for FP4,
// one block pair of 4 slices for FP6/FP8), so an MMA occupies the DPEs for
// exactly 16 cycles and a new one can start every 16 cycles (ready is high
// in the last feed cycle).
//
// Interface and timing: when start is sampled with ready high, the operands
// (A, B, C, shared exponents, BM index bytes, fmt, bm_en) are captured into
// the A, B and C buffers. Feeding takes cycles 0..15 after the capture; each
// DPE result comes 3 cycles after its last slice and is written into the
// write-back buffer. One cycle after the last result the whole tile appears on
// d_mat with a one-cycle done pulse; d_mat then holds until the next done.
// bm_en is the BM flag of the extended MMA instruction: with it low the core
// computes plain MX (the BM index inputs are ignored).
//
// Follows the paper: 32 DPEs per Tensor Core, threadgroups of 4 and octets of
// 2 threadgroups, one FP4 m16n8k64 MMA every 16 cycles, an MXFP4 block pair
// per DPE every 2 cycles and an MXFP6/8 block pair every 4, the BM flag and
// per-block BM index bytes. This design's choices: which threads form an
// octet (consecutive ones), the fragment ownership (standard m16n8 layout),
// operand capture as whole tiles, and the write-back buffer.
module tensor_core
  import mxp_pkg::*;
(
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   start,
  output logic                                   ready,
  input  fmt_e                                   fmt,
  input  logic                                   bm_en,
  input  logic [TC_M-1:0][TC_KNIB-1:0][NIB_W-1:0] a_mat,    // [row][k nibble]
  input  logic [TC_N-1:0][TC_KNIB-1:0][NIB_W-1:0] b_mat,    // [col][k nibble]
  input  logic [TC_M-1:0][TC_N-1:0][31:0]         c_mat,
  input  logic [TC_M-1:0][1:0][7:0]               a_exp,    // [row][block]
  input  logic [TC_N-1:0][1:0][7:0]               b_exp,    // [col][block]
  input  bmidx_t [TC_M-1:0][1:0]                  a_bmidx,
  input  bmidx_t [TC_N-1:0][1:0]                  b_bmidx,
  output logic                                   done,
  output logic [TC_M-1:0][TC_N-1:0][31:0]         d_mat,
  // MX+ activity in the current cycle (any DPE).
  output logic                                   bm_a_active,
  output logic                                   bm_b_active,
  output logic                                   bm_swap_active
);

  // ------------------------------------------------ A Buf / B Buffer / C Buf
  logic [TC_M-1:0][TC_KNIB-1:0][NIB_W-1:0] a_buf;
  logic [TC_N-1:0][TC_KNIB-1:0][NIB_W-1:0] b_buf;
  logic [TC_M-1:0][TC_N-1:0][31:0]         c_buf;
  logic [TC_M-1:0][1:0][7:0]               a_exp_buf;
  logic [TC_N-1:0][1:0][7:0]               b_exp_buf;
  bmidx_t [TC_M-1:0][1:0]                  a_idx_buf;
  bmidx_t [TC_N-1:0][1:0]                  b_idx_buf;
  fmt_e                                    fmt_q;
  logic                                    bm_en_q;

  // ------------------------------------------------ sequencer
  logic       feeding;
  logic [3:0] t;          // feed cycle 0..15: output slot t[3:2], slice t[1:0]
  logic       take;

  assign ready = !feeding || (t == 4'd15);
  assign take  = start && ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      feeding <= 1'b0;
      t       <= '0;
      fmt_q   <= FMT_FP4;
      bm_en_q <= 1'b0;
    end else begin
      if (take) begin
        feeding <= 1'b1;
        t       <= '0;
        fmt_q   <= fmt;
        bm_en_q <= bm_en;
      end else if (feeding) begin
        t <= t + 4'd1;
        if (t == 4'd15)
          feeding <= 1'b0;
      end
    end
  end

  // Operand buffers have no reset: they are only read while feeding, after a
  // capture.
  always_ff @(posedge clk) begin
    if (take) begin
      a_buf     <= a_mat;
      b_buf     <= b_mat;
      c_buf     <= c_mat;
      a_exp_buf <= a_exp;
      b_exp_buf <= b_exp;
      a_idx_buf <= a_bmidx;
      b_idx_buf <= b_bmidx;
    end
  end

  // ------------------------------------------------ DPE array
  logic [1:0] slot, q;
  logic       blk;
  logic [1:0] phase;
  logic       blk_last;

  always_comb begin
    slot     = t[3:2];
    q        = t[1:0];
    blk      = is_wide(fmt_q) ? 1'b0 : q[1];
    phase    = is_wide(fmt_q) ? q : {1'b0, q[0]};
    blk_last = is_wide(fmt_q) ? (q == 2'd3) : q[0];
  end

  logic [N_DPE-1:0]       d_valid;
  logic [N_DPE-1:0][31:0] d_res;
  logic [N_DPE-1:0]       seen_a, seen_b, seen_sw;

  for (genvar oc = 0; oc < N_OCTET; oc++) begin : g_octet
    for (genvar tg = 0; tg < TG_PER_OCTET; tg++) begin : g_tgroup
      for (genvar dp = 0; dp < DPE_PER_TG; dp++) begin : g_dpe
        localparam int unsigned D  = (oc * TG_PER_OCTET + tg) * DPE_PER_TG + dp;
        localparam int unsigned G  = D / 4;
        localparam int unsigned TQ = D % 4;

        logic [3:0] row;
        logic [2:0] col;
        assign row = 4'(G) + {slot[1], 3'b000};
        assign col = 3'(2 * TQ) + 3'(slot[0]);

        dpe u_dpe (
          .clk, .rst_n,
          .in_valid (feeding),
          .fmt      (fmt_q),
          .bm_en    (bm_en_q),
          .a_lanes  (a_buf[row][16*q +: 16]),
          .b_lanes  (b_buf[col][16*q +: 16]),
          .phase,
          .first    (q == 2'd0),
          .blk_last,
          .out_last (q == 2'd3),
          .c_in     (c_buf[row][col]),
          .a_exp    (a_exp_buf[row][blk]),
          .b_exp    (b_exp_buf[col][blk]),
          .a_bmidx  (a_idx_buf[row][blk]),
          .b_bmidx  (b_idx_buf[col][blk]),
          .d_valid  (d_valid[D]),
          .d        (d_res[D]),
          .bm_a_seen    (seen_a[D]),
          .bm_b_seen    (seen_b[D]),
          .bm_swap_seen (seen_sw[D])
        );
      end
    end
  end

  assign bm_a_active    = |seen_a;
  assign bm_b_active    = |seen_b;
  assign bm_swap_active = |seen_sw;

  // ------------------------------------------------ write-back
  logic [TC_M-1:0][TC_N-1:0][31:0] d_buf;
  logic [1:0] wb_slot;
  logic       wb_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_slot <= '0;
      wb_done <= 1'b0;
      done    <= 1'b0;
      d_buf   <= '0;
      d_mat   <= '0;
    end else begin
      wb_done <= 1'b0;
      done    <= wb_done;
      if (wb_done)
        d_mat <= d_buf;
      if (d_valid[0]) begin
        for (int dd = 0; dd < N_DPE; dd++)
          d_buf[(dd / 4) + 8 * wb_slot[1]][2 * (dd % 4) + wb_slot[0]] <= d_res[dd];
        wb_slot <= wb_slot + 2'd1;
        if (wb_slot == 2'd3)
          wb_done <= 1'b1;
      end
    end
  end

  // All DPEs run in lockstep.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               d_valid == '0 || d_valid == '1);

endmodule
