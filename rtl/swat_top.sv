// swat_top: SWAT sliding-window attention accelerator, one attention head.
//
// Computes, for every query row i of a sequence,
//   Z_i = sum_j exp(Q_i . K_j) V_j / sum_j exp(Q_i . K_j)
// over the 2w tokens j = i-w .. i+w-1 of its window (plus NG global and NR
// random tokens when configured), in FP16. The softmax denominator is
// applied after the weighted sum ("kernel fusion"), so one row is computed
// in a single pass, and consecutive rows overlap in a six-stage pipeline:
//
//   LOAD     swat_loader      Q row i; K/V row i+w-1 into core (i+w-1) mod 2w
//   QK       swat_core_array  S = Q_i . K_j in every core (II = 3 MAC)
//   SV       swat_core_array  S' = exp(S), Z slice = S' * V_j in every core
//   ZRED1    swat_zred1       G = NC/H groups of H cores -> G partial Z rows
//   ROWSUM1  swat_rowsum      G partial sums of S'          (beside ZRED1)
//   ZRED2    swat_zred2       partial rows -> Z row
//   ROWSUM2  swat_rowsum      partial sums -> row sum       (beside ZRED2)
//   DIV&OUT  swat_div_out     Z / row sum, written to memory
//
// The attention cores are input-stationary: each keeps one token's K and V
// rows and the arithmetic that uses them, and a K/V row is read from memory
// exactly once per sequence. swat_ctrl advances all rows one stage at a time.
//
// Interface: start (one cycle, with seq_len >= 1) runs one sequence; done
// pulses when its last output element has been written. Q rows are read on
// the q_* channel and K/V rows on the kv_* channel (request: token index
// with valid/ready; response: exactly H beats in order, k and v together on
// kv). Output elements leave on out_* (valid/ready, row, element index,
// FP16 value). Off-chip memory is outside this design.
//
// Parameters default to the architecture's main configuration: H = 64,
// 2w = 512 window cores, no global or random cores, II = 3.
//
// The controller's per-stage valid bits (st_valid) are not needed here: the
// stage start pulses already carry them. All modules use the asynchronous
// active-low reset rst_n for their registers and also as the disable
// condition of their assertions, which lint reports as a net used both
// synchronously and asynchronously; no register uses it synchronously.
module swat_top
  import swat_pkg::*;
#(
  parameter int unsigned H  = 64,
  parameter int unsigned W2 = 512,
  parameter int unsigned NG = 0,
  parameter int unsigned NR = 0,
  parameter int unsigned II = 3,
  parameter logic [15:0] GLOBAL_IDX [NG > 0 ? NG : 1] = '{default: 16'd0},
  parameter logic [15:0] RND_OFF    [NR > 0 ? NR : 1] = '{default: 16'd1},
  localparam int unsigned NC = W2 + NG + NR,
  localparam int unsigned G  = NC / H,
  localparam int unsigned AW = $clog2(H),
  localparam int unsigned CW = $clog2(NC)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [15:0]   seq_len,
  output logic          busy,
  output logic          done,
  output logic          q_req_valid,
  input  logic          q_req_ready,
  output logic [15:0]   q_req_tok,
  input  logic          q_resp_valid,
  input  fp16_t         q_resp_data,
  output logic          kv_req_valid,
  input  logic          kv_req_ready,
  output logic [15:0]   kv_req_tok,
  input  logic          kv_resp_valid,
  input  fp16_t         kv_resp_k,
  input  fp16_t         kv_resp_v,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [15:0]   out_row,
  output logic [AW-1:0] out_idx,
  output fp16_t         out_data
);

  logic              clear, adv;
  logic [NSTAGE-1:0] st_start, st_busy;
  logic [15:0]       st_row [NSTAGE];

  logic          wr_en, wr_commit, wr_tok_valid;
  logic [CW-1:0] wr_core;
  logic [AW-1:0] wr_addr, q_rd_idx;
  fp16_t         wr_k, wr_v, q_rd_data;

  logic [AW-1:0] zrd_addr [NC];
  fp16_t         zrd_data [NC];
  fp16_t         sexp     [NC];
  fp16_t         part     [G][H];
  fp16_t         zrow     [H];
  fp16_t         rowsum;

  logic b_load, b_qk, b_sv, b_zr1, b_rs1, b_zr2, b_rs2, b_div;

  assign st_busy = {b_div, b_zr2 | b_rs2, b_zr1 | b_rs1, b_sv, b_qk, b_load};

  swat_ctrl u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .seq_len(seq_len), .st_busy(st_busy),
    .clear(clear), .adv(adv), .st_start(st_start), .st_valid(), .st_row(st_row),
    .running(busy), .done(done)
  );

  swat_loader #(.H(H), .W2(W2), .NG(NG), .NR(NR), .GLOBAL_IDX(GLOBAL_IDX), .RND_OFF(RND_OFF)) u_load (
    .clk(clk), .rst_n(rst_n), .start(st_start[ST_LOAD]), .row(st_row[ST_LOAD]), .seq_len(seq_len),
    .adv(adv), .busy(b_load),
    .q_req_valid(q_req_valid), .q_req_ready(q_req_ready), .q_req_tok(q_req_tok),
    .q_resp_valid(q_resp_valid), .q_resp_data(q_resp_data),
    .kv_req_valid(kv_req_valid), .kv_req_ready(kv_req_ready), .kv_req_tok(kv_req_tok),
    .kv_resp_valid(kv_resp_valid), .kv_resp_k(kv_resp_k), .kv_resp_v(kv_resp_v),
    .wr_en(wr_en), .wr_core(wr_core), .wr_addr(wr_addr), .wr_k(wr_k), .wr_v(wr_v),
    .wr_commit(wr_commit), .wr_tok_valid(wr_tok_valid),
    .q_rd_idx(q_rd_idx), .q_rd_data(q_rd_data)
  );

  swat_core_array #(.H(H), .W2(W2), .NG(NG), .NR(NR), .II(II)) u_cores (
    .clk(clk), .rst_n(rst_n), .clear(clear), .adv(adv),
    .wr_en(wr_en), .wr_core(wr_core), .wr_addr(wr_addr), .wr_k(wr_k), .wr_v(wr_v),
    .wr_commit(wr_commit), .wr_tok_valid(wr_tok_valid),
    .q_rd_idx(q_rd_idx), .q_rd_data(q_rd_data),
    .qk_start(st_start[ST_QK]), .qk_busy(b_qk), .sv_start(st_start[ST_SV]), .sv_busy(b_sv),
    .zrd_addr(zrd_addr), .zrd_data(zrd_data), .sexp(sexp)
  );

  swat_zred1 #(.H(H), .NC(NC), .II(II)) u_zred1 (
    .clk(clk), .rst_n(rst_n), .start(st_start[ST_RED1]), .adv(adv), .busy(b_zr1),
    .zrd_addr(zrd_addr), .zrd_data(zrd_data), .part(part)
  );

  swat_rowsum #(.H(H), .NC(NC), .II(II)) u_rowsum (
    .clk(clk), .rst_n(rst_n), .adv(adv),
    .start1(st_start[ST_RED1]), .busy1(b_rs1), .start2(st_start[ST_RED2]), .busy2(b_rs2),
    .sexp(sexp), .rowsum(rowsum)
  );

  swat_zred2 #(.H(H), .G(G)) u_zred2 (
    .clk(clk), .rst_n(rst_n), .start(st_start[ST_RED2]), .adv(adv), .busy(b_zr2),
    .part(part), .z(zrow)
  );

  swat_div_out #(.H(H), .DIV_II(2)) u_div (
    .clk(clk), .rst_n(rst_n), .start(st_start[ST_DIV]), .row(st_row[ST_DIV]), .busy(b_div),
    .z(zrow), .rowsum(rowsum),
    .out_valid(out_valid), .out_ready(out_ready), .out_row(out_row), .out_idx(out_idx),
    .out_data(out_data)
  );

  a_no_start_busy : assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
