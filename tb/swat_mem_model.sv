// swat_mem_model: behavioural off-chip memory for the SWAT testbenches.
//
// Serves the Q and K/V read channels from the test matrices of swat_tb_pkg:
// a request is accepted when ready is high (ready drops at random when
// STALL is set), and after a random latency of 1..4 cycles exactly H
// response beats follow, with random one-cycle gaps when STALL is set. The
// two channels are independent. Counts the cycles a request or a beat was
// held back.
module swat_mem_model
  import swat_tb_pkg::*;
#(
  parameter int unsigned H     = 4,
  parameter bit          STALL = 1'b1
) (
  input  logic        clk,
  input  logic        q_req_valid,
  output logic        q_req_ready,
  input  logic [15:0] q_req_tok,
  output logic        q_resp_valid,
  output logic [15:0] q_resp_data,
  input  logic        kv_req_valid,
  output logic        kv_req_ready,
  input  logic [15:0] kv_req_tok,
  output logic        kv_resp_valid,
  output logic [15:0] kv_resp_k,
  output logic [15:0] kv_resp_v,
  output int          stalls,
  output int          kv_reads
);

  int q_tok = -1, q_beat = 0, q_wait = 0;
  int kv_tok = -1, kv_beat = 0, kv_wait = 0;

  initial begin
    q_req_ready   = 1'b0;
    kv_req_ready  = 1'b0;
    q_resp_valid  = 1'b0;
    kv_resp_valid = 1'b0;
    q_resp_data   = '0;
    kv_resp_k     = '0;
    kv_resp_v     = '0;
    stalls        = 0;
    kv_reads      = 0;
  end

  always @(posedge clk) begin
    // ---- Q channel ----
    if (q_req_valid && q_req_ready) begin
      q_tok  = int'(q_req_tok);
      q_beat = 0;
      q_wait = 1 + int'($urandom_range(3));
    end
    if (q_resp_valid) q_beat++;
    if (q_tok >= 0 && q_beat == int'(H)) q_tok = -1;
    if (q_wait > 0) q_wait--;
    q_resp_valid <= (q_tok >= 0) && (q_wait == 0) && !(STALL && $urandom_range(7) == 0);
    q_resp_data  <= (q_tok >= 0) ? tb_elem(0, q_tok, q_beat) : '0;
    q_req_ready  <= (q_tok < 0) && !(q_req_valid && q_req_ready) && !(STALL && $urandom_range(3) == 0);
    // ---- K/V channel ----
    if (kv_req_valid && kv_req_ready) begin
      kv_tok  = int'(kv_req_tok);
      kv_beat = 0;
      kv_wait = 1 + int'($urandom_range(3));
      kv_reads++;
    end
    if (kv_resp_valid) kv_beat++;
    if (kv_tok >= 0 && kv_beat == int'(H)) kv_tok = -1;
    if (kv_wait > 0) kv_wait--;
    kv_resp_valid <= (kv_tok >= 0) && (kv_wait == 0) && !(STALL && $urandom_range(7) == 0);
    kv_resp_k     <= (kv_tok >= 0) ? tb_elem(1, kv_tok, kv_beat) : '0;
    kv_resp_v     <= (kv_tok >= 0) ? tb_elem(2, kv_tok, kv_beat) : '0;
    kv_req_ready  <= (kv_tok < 0) && !(kv_req_valid && kv_req_ready) && !(STALL && $urandom_range(3) == 0);
    if ((kv_req_valid && !kv_req_ready) || (kv_tok >= 0 && kv_wait == 0 && !kv_resp_valid)) stalls++;
  end

endmodule
