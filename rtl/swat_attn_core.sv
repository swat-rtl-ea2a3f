// swat_attn_core: one attention core of the input-stationary array.
//
// A core keeps the K row and the V row of one token next to the arithmetic
// that uses them. For every query row i it computes
//   S    = Q_i . K_j                  (QK stage, FP16 multiply-accumulate)
//   S'   = exp(S), or 0 if masked     (start of the SV stage)
//   Zs[e] = S' * V_j[e], e = 0..H-1   (SV stage, written into ZBuf)
// and hands S' and its Z slice Zs to the reduction stages, which add the
// slices and S' values of all cores. Only the numerator of the softmax is
// formed here; the division by the row sum happens once, after reduction.
//
// Buffering. The row pipeline keeps up to three rows inside a core at once
// (being loaded, in QK, in SV), so the K/V store has three entries used as a
// ring: LOAD writes entry wp; at the next advance that entry becomes the one
// QK reads (kr), and one advance later the one SV reads (vr <= kr). A core
// whose token changes every row (random attention) is therefore never
// overwritten while in use. Each entry carries a valid bit written with the
// row: an entry for a token outside the sequence, or never loaded, masks
// the core (S' = 0, Z slice = 0). After clear the three pointers name three
// different entries (wp = 0, kr = 2, vr = 1), so the first row written never
// lands in the entry a running QK or SV stage reads. ZBuf has two halves:
// SV writes one while ZRED1 reads the other; they swap at every advance.
// S and S' are likewise copied into hold registers at each advance.
//
// The K/V store holding one row per token and the exp/multiply placement
// follow the architecture; the three-entry ring, the two-half ZBuf and the
// hold registers are this design's way of letting consecutive rows overlap.
//
// Interface and timing (all inputs come from swat_core_array's sequencers):
//   wr_en/wr_addr/wr_k/wr_v   write one element of the incoming row
//   wr_commit/wr_tok_valid    row complete; valid bit of that row
//   adv                       pipeline advance (one cycle, all stages idle)
//   qk_clr, qk_issue/qk_idx/q_data   QK: clear S, then one MAC per issue
//                                    (issues at least 3 cycles apart)
//   sv_exp                    SV: S' = exp(S hold) registered in that cycle
//   sv_issue/sv_idx           SV: ZBuf[sv_idx] = S' * V[sv_idx]
//   zrd_addr -> zrd_data      ZBuf read for ZRED1, one cycle latency
//   sexp                      S' of the row now in ZRED1/ROWSUM1
module swat_attn_core
  import swat_pkg::*;
#(
  parameter int unsigned H  = 64,
  localparam int unsigned AW = $clog2(H)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  fp16_t         wr_k,
  input  fp16_t         wr_v,
  input  logic          wr_commit,
  input  logic          wr_tok_valid,
  input  logic          adv,
  input  logic          qk_clr,
  input  logic          qk_issue,
  input  logic [AW-1:0] qk_idx,
  input  fp16_t         q_data,
  input  logic          sv_exp,
  input  logic          sv_issue,
  input  logic [AW-1:0] sv_idx,
  input  logic [AW-1:0] zrd_addr,
  output fp16_t         zrd_data,
  output fp16_t         sexp
);

  // K/V ring of three row entries
  fp16_t      kbuf [3][H];
  fp16_t      vbuf [3][H];
  logic [2:0] val_q;
  logic [1:0] wp_q, kr_q, vr_q;
  logic       pend_q;   // a committed row waits for the next advance

  // QK datapath
  fp16_t prod_q;
  logic  prod_v_q;
  fp16_t s_acc;
  logic  acc_busy;

  // hold registers handed from stage to stage at each advance
  fp16_t s_hold_q;
  logic  m_hold_q;     // token valid for the row in SV
  fp16_t sexp_q;       // S' computed during SV
  fp16_t sexp_hold_q;  // S' of the row in ZRED1/ROWSUM1

  fp16_t zbuf [2][H];
  logic  zw_q;         // ZBuf half written by SV

  function automatic logic [1:0] ring_next(logic [1:0] p);
    return (p == 2'd2) ? 2'd0 : p + 2'd1;
  endfunction

  // ---------------- K/V store ----------------
  always_ff @(posedge clk) begin
    if (wr_en) begin
      kbuf[wp_q][wr_addr] <= wr_k;
      vbuf[wp_q][wr_addr] <= wr_v;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      val_q  <= '0;
      wp_q   <= 2'd0;
      kr_q   <= 2'd2;
      vr_q   <= 2'd1;
      pend_q <= 1'b0;
    end else if (clear) begin
      val_q  <= '0;
      wp_q   <= 2'd0;
      kr_q   <= 2'd2;
      vr_q   <= 2'd1;
      pend_q <= 1'b0;
    end else begin
      if (wr_commit) begin
        val_q[wp_q] <= wr_tok_valid;
        pend_q      <= 1'b1;
      end
      if (adv) begin
        vr_q <= kr_q;
        if (pend_q) begin
          kr_q   <= wp_q;
          wp_q   <= ring_next(wp_q);
          pend_q <= 1'b0;
        end
      end
    end
  end

  // ---------------- QK: S = Q . K ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod_q   <= FP16_ZERO;
      prod_v_q <= 1'b0;
    end else begin
      prod_v_q <= qk_issue;
      if (qk_issue) prod_q <= fp16_mul(q_data, kbuf[kr_q][qk_idx]);
    end
  end

  swat_fp16_acc u_mac_acc (
    .clk     (clk),
    .rst_n   (rst_n),
    .clr     (qk_clr),
    .in_valid(prod_v_q),
    .in_data (prod_q),
    .busy    (acc_busy),
    .acc     (s_acc)
  );

  // ---------------- SV: S' = exp(S), Zs = S' * V ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_hold_q    <= FP16_ZERO;
      m_hold_q    <= 1'b0;
      sexp_q      <= FP16_ZERO;
      sexp_hold_q <= FP16_ZERO;
      zw_q        <= 1'b0;
    end else if (clear) begin
      m_hold_q    <= 1'b0;
      sexp_q      <= FP16_ZERO;
      sexp_hold_q <= FP16_ZERO;
    end else begin
      if (adv) begin
        s_hold_q    <= s_acc;
        m_hold_q    <= val_q[kr_q];
        sexp_hold_q <= sexp_q;
        zw_q        <= ~zw_q;
      end
      if (sv_exp) sexp_q <= m_hold_q ? fp16_exp(s_hold_q) : FP16_ZERO;
    end
  end

  always_ff @(posedge clk) begin
    if (sv_issue) zbuf[zw_q][sv_idx] <= fp16_mul(sexp_q, vbuf[vr_q][sv_idx]);
  end

  // ---------------- ports towards the reduction stages ----------------
  always_ff @(posedge clk) zrd_data <= zbuf[~zw_q][zrd_addr];
  assign sexp = sexp_hold_q;

  a_no_adv_in_mac : assert property (@(posedge clk) disable iff (!rst_n)
                                     adv |-> !(acc_busy || prod_v_q));

endmodule
