// swat_loader: the LOAD stage of the row pipeline.
//
// For query row i of a sequence of seq_len tokens the loader
//   * reads the Q row i (H elements) into a Q buffer; the buffer has two
//     halves and the row moves to the half read by the QK stage at the next
//     pipeline advance (q_rd_idx -> q_rd_data, combinational);
//   * writes into the core array the K/V rows that enter the attention
//     window. The window of row i is tokens i-w .. i+w-1 (2w = W2 cores), so
//     row i brings in token t = i+w-1, into core t mod W2. Taking the core
//     index modulo the window size makes the window cores a FIFO whose
//     pointer evicts exactly the token that left the window, so every K/V
//     row is read from memory once. Row 0 also brings tokens 0..w-2, which
//     row 0 already needs, and the NG global tokens GLOBAL_IDX[k] into the
//     global cores W2+k, which then keep them for the whole sequence. A
//     window token beyond the sequence end is committed as invalid (masked)
//     without a memory read;
//   * reloads each random-attention core W2+NG+k with token
//     (i + RND_OFF[k]) mod seq_len every row.
//
// The FIFO policy, the modulo core selection and the fixed global / dynamic
// random cores follow the architecture. The window bounds, the row-0
// preload, the random index formula (a static pattern set by parameters)
// and the memory protocol are this design's own.
//
// Memory channels (one element per cycle, as in the 66-cycle LOAD stage for
// H = 64): a request (valid/ready, token index) is answered by exactly H
// response beats, in order, at any later time. The Q and KV channels run in
// parallel. busy rises the cycle after start and falls when the Q row and
// all K/V rows of the row are in.
//
// Lint notes: with NG = 0 or NR = 0 the comparisons k < NG / k < NR are
// constant (no global or random jobs), which is intended. wr_k and wr_v are
// the memory response passed straight on to the cores.
module swat_loader
  import swat_pkg::*;
#(
  parameter int unsigned H  = 64,
  parameter int unsigned W2 = 512,
  parameter int unsigned NG = 0,
  parameter int unsigned NR = 0,
  parameter logic [15:0] GLOBAL_IDX [NG > 0 ? NG : 1] = '{default: 16'd0},
  parameter logic [15:0] RND_OFF    [NR > 0 ? NR : 1] = '{default: 16'd1},
  localparam int unsigned NC = W2 + NG + NR,
  localparam int unsigned AW = $clog2(H),
  localparam int unsigned CW = $clog2(NC)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [15:0]   row,
  input  logic [15:0]   seq_len,
  input  logic          adv,
  output logic          busy,
  // Q read channel
  output logic          q_req_valid,
  input  logic          q_req_ready,
  output logic [15:0]   q_req_tok,
  input  logic          q_resp_valid,
  input  fp16_t         q_resp_data,
  // K/V read channel
  output logic          kv_req_valid,
  input  logic          kv_req_ready,
  output logic [15:0]   kv_req_tok,
  input  logic          kv_resp_valid,
  input  fp16_t         kv_resp_k,
  input  fp16_t         kv_resp_v,
  // write bus into the core array
  output logic          wr_en,
  output logic [CW-1:0] wr_core,
  output logic [AW-1:0] wr_addr,
  output fp16_t         wr_k,
  output fp16_t         wr_v,
  output logic          wr_commit,
  output logic          wr_tok_valid,
  // Q row for the QK stage
  input  logic [AW-1:0] q_rd_idx,
  output fp16_t         q_rd_data
);

  localparam int unsigned W  = W2 / 2;
  localparam int unsigned GN = (NG > 0) ? NG : 1;
  localparam int unsigned RN = (NR > 0) ? NR : 1;

  typedef enum logic [1:0] {PH_GLOBAL, PH_WINDOW, PH_RANDOM, PH_END} phase_e;
  typedef enum logic [1:0] {KV_IDLE, KV_NEXT, KV_REQ, KV_RECV} kv_state_e;
  typedef enum logic [1:0] {Q_IDLE, Q_REQ, Q_RECV} q_state_e;

  kv_state_e     kv_st_q;
  q_state_e      q_st_q;
  phase_e        ph_q;
  logic [15:0]   k_q;
  logic [15:0]   row_q, n_q;
  logic [15:0]   tok_q;
  logic [CW-1:0] core_q;
  logic [AW-1:0] beat_q, qbeat_q;

  fp16_t qld [H];   // Q row being loaded
  fp16_t qqk [H];   // Q row of the QK stage

  // ---------------- job of the current (phase, k) ----------------
  logic          job_here;   // (phase, k) names a job
  logic [15:0]   job_tok;
  logic [CW-1:0] job_core;
  logic          job_valid;  // the token exists
  logic [31:0]   t_win;

  always_comb begin
    job_here  = 1'b0;
    job_tok   = '0;
    job_core  = '0;
    job_valid = 1'b0;
    t_win     = '0;
    unique case (ph_q)
      PH_GLOBAL: begin
        job_here = (row_q == 16'd0) && (32'(k_q) < 32'(NG));
        job_tok   = GLOBAL_IDX[32'(k_q) % GN];
        job_core  = CW'(W2 + 32'(k_q));
        job_valid = job_tok < n_q;
      end
      PH_WINDOW: begin
        if (row_q == 16'd0) begin
          job_here = 32'(k_q) < W;
          t_win    = 32'(k_q);
        end else begin
          job_here = (k_q == 16'd0);
          t_win    = 32'(row_q) + W - 1;
        end
        job_tok   = t_win[15:0];
        job_core  = CW'(t_win % W2);
        job_valid = t_win < 32'(n_q);
      end
      PH_RANDOM: begin
        job_here = 32'(k_q) < 32'(NR);
        job_tok   = 16'((32'(row_q) + 32'(RND_OFF[32'(k_q) % RN])) % 32'(n_q));
        job_core  = CW'(W2 + NG + 32'(k_q));
        job_valid = 1'b1;
      end
      default: ;
    endcase
  end

  // ---------------- K/V fetch ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kv_st_q <= KV_IDLE;
      ph_q    <= PH_END;
      k_q     <= '0;
      row_q   <= '0;
      n_q     <= '0;
      tok_q   <= '0;
      core_q  <= '0;
      beat_q  <= '0;
    end else if (start) begin
      kv_st_q <= KV_NEXT;
      ph_q    <= PH_GLOBAL;
      k_q     <= '0;
      row_q   <= row;
      n_q     <= seq_len;
    end else begin
      unique case (kv_st_q)
        KV_NEXT: begin
          if (ph_q == PH_END) begin
            kv_st_q <= KV_IDLE;
          end else if (!job_here) begin
            ph_q <= phase_e'(ph_q + 2'd1);
            k_q  <= '0;
          end else if (!job_valid) begin
            k_q <= k_q + 16'd1;           // masked token: committed below
          end else begin
            tok_q   <= job_tok;
            core_q  <= job_core;
            kv_st_q <= KV_REQ;
          end
        end
        KV_REQ: if (kv_req_ready) begin
          kv_st_q <= KV_RECV;
          beat_q  <= '0;
        end
        KV_RECV: if (kv_resp_valid) begin
          beat_q <= beat_q + AW'(1);
          if (beat_q == AW'(H - 1)) begin
            k_q     <= k_q + 16'd1;
            kv_st_q <= KV_NEXT;
          end
        end
        default: ;
      endcase
    end
  end

  assign kv_req_valid = (kv_st_q == KV_REQ);
  assign kv_req_tok   = tok_q;

  wire masked_commit = (kv_st_q == KV_NEXT) && (ph_q != PH_END) && job_here && !job_valid;
  wire last_beat     = (kv_st_q == KV_RECV) && kv_resp_valid && (beat_q == AW'(H - 1));

  assign wr_en        = (kv_st_q == KV_RECV) && kv_resp_valid;
  assign wr_addr      = beat_q;
  assign wr_k         = kv_resp_k;
  assign wr_v         = kv_resp_v;
  assign wr_core      = masked_commit ? job_core : core_q;
  assign wr_commit    = masked_commit || last_beat;
  assign wr_tok_valid = !masked_commit;

  // ---------------- Q fetch ----------------
  logic [15:0] qtok_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_st_q  <= Q_IDLE;
      qbeat_q <= '0;
      qtok_q  <= '0;
    end else if (start) begin
      q_st_q <= Q_REQ;
      qtok_q <= row;
    end else begin
      unique case (q_st_q)
        Q_REQ: if (q_req_ready) begin
          q_st_q  <= Q_RECV;
          qbeat_q <= '0;
        end
        Q_RECV: if (q_resp_valid) begin
          qbeat_q <= qbeat_q + AW'(1);
          if (qbeat_q == AW'(H - 1)) q_st_q <= Q_IDLE;
        end
        default: ;
      endcase
    end
  end

  assign q_req_valid = (q_st_q == Q_REQ);
  assign q_req_tok   = qtok_q;

  always_ff @(posedge clk) begin
    if (q_st_q == Q_RECV && q_resp_valid) qld[qbeat_q] <= q_resp_data;
    if (adv) qqk <= qld;
  end

  assign q_rd_data = qqk[q_rd_idx];
  assign busy      = (kv_st_q != KV_IDLE) || (q_st_q != Q_IDLE);

  a_no_start_busy : assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  a_no_adv_busy   : assert property (@(posedge clk) disable iff (!rst_n) adv |-> !busy);
  a_req_stable    : assert property (@(posedge clk) disable iff (!rst_n)
                                     kv_req_valid && !kv_req_ready |=> kv_req_valid && $stable(kv_req_tok));

endmodule
