// swat_core_array: the attention cores and the QK / SV stage sequencers.
//
// NC = W2 + NG + NR cores: W2 = 2w sliding-window cores (core c holds the
// token t with t mod 2w = c), then NG global-attention cores and NR
// random-attention cores. Which token a core holds is decided by the loader;
// the cores themselves are identical.
//
// QK stage: on qk_start every core clears its S accumulator; then one Q
// element is broadcast every II cycles (index on q_rd_idx, the element
// returned by the loader's Q buffer on q_rd_data in the same cycle) and each
// core multiplies it with the same element of its K row. SV stage: on
// sv_start every core computes S' = exp(S); then every II cycles one index
// is broadcast and each core writes S' * V[idx] into its ZBuf. Both stages
// take about 3*H cycles with II = 3 (Table of stage timings: QK 201,
// SV 197 cycles for H = 64).
//
// Writes from the loader are decoded here: wr_core selects the one core
// that takes wr_en / wr_commit.
module swat_core_array
  import swat_pkg::*;
#(
  parameter int unsigned H  = 64,
  parameter int unsigned W2 = 512,
  parameter int unsigned NG = 0,
  parameter int unsigned NR = 0,
  parameter int unsigned II = 3,
  localparam int unsigned NC = W2 + NG + NR,
  localparam int unsigned AW = $clog2(H),
  localparam int unsigned CW = $clog2(NC)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          adv,
  // write bus from the loader
  input  logic          wr_en,
  input  logic [CW-1:0] wr_core,
  input  logic [AW-1:0] wr_addr,
  input  fp16_t         wr_k,
  input  fp16_t         wr_v,
  input  logic          wr_commit,
  input  logic          wr_tok_valid,
  // Q row held for the QK stage
  output logic [AW-1:0] q_rd_idx,
  input  fp16_t         q_rd_data,
  // stage control
  input  logic          qk_start,
  output logic          qk_busy,
  input  logic          sv_start,
  output logic          sv_busy,
  // towards ZRED1 / ROWSUM1
  input  logic [AW-1:0] zrd_addr [NC],
  output fp16_t         zrd_data [NC],
  output fp16_t         sexp     [NC]
);

  logic          qk_issue, sv_issue;
  logic [AW-1:0] qk_idx, sv_idx;

  // MAC: 1 multiply register + 3 adder stages after the last issue
  swat_issue_seq #(.N(H), .II(II), .TAIL(4)) u_qk_seq (
    .clk(clk), .rst_n(rst_n), .start(qk_start), .issue(qk_issue), .idx(qk_idx), .busy(qk_busy)
  );

  swat_issue_seq #(.N(H), .II(II), .TAIL(1)) u_sv_seq (
    .clk(clk), .rst_n(rst_n), .start(sv_start), .issue(sv_issue), .idx(sv_idx), .busy(sv_busy)
  );

  assign q_rd_idx = qk_idx;

  for (genvar c = 0; c < NC; c++) begin : g_core
    swat_attn_core #(.H(H)) u_core (
      .clk         (clk),
      .rst_n       (rst_n),
      .clear       (clear),
      .wr_en       (wr_en && (wr_core == CW'(c))),
      .wr_addr     (wr_addr),
      .wr_k        (wr_k),
      .wr_v        (wr_v),
      .wr_commit   (wr_commit && (wr_core == CW'(c))),
      .wr_tok_valid(wr_tok_valid),
      .adv         (adv),
      .qk_clr      (qk_start),
      .qk_issue    (qk_issue),
      .qk_idx      (qk_idx),
      .q_data      (q_rd_data),
      .sv_exp      (sv_start),
      .sv_issue    (sv_issue),
      .sv_idx      (sv_idx),
      .zrd_addr    (zrd_addr[c]),
      .zrd_data    (zrd_data[c]),
      .sexp        (sexp[c])
    );
  end

endmodule
