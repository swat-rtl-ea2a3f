// tb_swat_bigbird: end-to-end test of the SWAT accelerator with global and
// random attention cores (the BigBird-style configuration).
//
// A small instance with H = 4, 2w = 8 window cores, NG = 4 global cores
// (tokens 0, 5, 10 and 15, one of them beyond the shorter sequences) and
// NR = 4 random cores (offsets 3, 7, 11, 13) runs sequences of 21, 3 and 1
// tokens. The global cores are loaded once per sequence at row 0, the random
// cores every row. Every output is compared with a double-precision
// reference that attends to the same token set, and the number of K/V rows
// read per sequence is checked against window + global + random loads.
module tb_swat_bigbird;
  import swat_pkg::*;

  localparam int unsigned H  = 4;
  localparam int unsigned W2 = 8;
  localparam int unsigned NG = 4;
  localparam int unsigned NR = 4;
  localparam logic [15:0] GIDX [NG] = '{16'd0, 16'd5, 16'd10, 16'd15};
  localparam logic [15:0] ROFF [NR] = '{16'd3, 16'd7, 16'd11, 16'd13};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start = 1'b0;
  logic [15:0] seq_len = '0;
  logic        busy, done;
  logic        q_req_valid, q_req_ready, q_resp_valid;
  logic [15:0] q_req_tok;
  fp16_t       q_resp_data;
  logic        kv_req_valid, kv_req_ready, kv_resp_valid;
  logic [15:0] kv_req_tok;
  fp16_t       kv_resp_k, kv_resp_v;
  logic        out_valid, out_ready;
  logic [15:0] out_row;
  logic [$clog2(H)-1:0] out_idx;
  fp16_t       out_data;
  int          mem_stalls, kv_reads, sb_checks, sb_fail, sb_elems;

  swat_top #(.H(H), .W2(W2), .NG(NG), .NR(NR), .GLOBAL_IDX(GIDX), .RND_OFF(ROFF)) dut (.*);

  swat_mem_model #(.H(H), .STALL(1'b1)) u_mem (
    .clk, .q_req_valid, .q_req_ready, .q_req_tok, .q_resp_valid, .q_resp_data,
    .kv_req_valid, .kv_req_ready, .kv_req_tok, .kv_resp_valid, .kv_resp_k, .kv_resp_v,
    .stalls(mem_stalls), .kv_reads(kv_reads)
  );

  swat_ref_check #(.H(H), .W2(W2), .NG(NG), .NR(NR), .GLOBAL_IDX(GIDX), .RND_OFF(ROFF)) u_sb (
    .clk, .seq_len, .out_valid, .out_ready, .out_row, .out_idx, .out_data,
    .checks(sb_checks), .failures(sb_fail), .elems(sb_elems)
  );

  int checks = 0, failures = 0;
  int n_glob = 0, n_rnd = 0;
  int n_full = 0, n_masked = 0, n_wrap = 0, n_bp = 0, n_adv = 0;

  always @(posedge clk) begin
    out_ready <= rst_n && ($urandom_range(4) != 0);
    if (dut.u_ctrl.st_valid == '1 && dut.adv) n_full++;
    if (dut.wr_commit && !dut.wr_tok_valid) n_masked++;
    if (kv_req_valid && kv_req_ready && kv_req_tok >= 16'(W2)) n_wrap++;
    if (out_valid && !out_ready) n_bp++;
    if (dut.adv) n_adv++;
    if (dut.wr_commit && dut.wr_tok_valid && 32'(dut.wr_core) >= W2 && 32'(dut.wr_core) < W2 + NG) n_glob++;
    if (dut.wr_commit && 32'(dut.wr_core) >= W2 + NG) n_rnd++;
  end

  function automatic int n_glob_in(int n);
    int c = 0;
    for (int k = 0; k < int'(NG); k++) if (int'(GIDX[k]) < n) c++;
    return c;
  endfunction

  task automatic run_seq(int n);
    int reads0, cyc;
    reads0 = kv_reads;
    @(negedge clk);
    seq_len = 16'(n);
    start   = 1'b1;
    @(negedge clk);
    start   = 1'b0;
    cyc = 0;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (kv_reads - reads0 != n + n_glob_in(n) + n * int'(NR)) begin
      failures++;
      $display("ERROR: seq_len %0d read %0d K/V rows", n, kv_reads - reads0);
    end
    $display("seq_len %0d done in %0d cycles", n, cyc);
  endtask

  task automatic expect_seen(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("ERROR: mechanism never exercised: %s", what);
    end else $display("mechanism %-28s seen %0d times", what, n);
  endtask

  initial begin
    out_ready = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_seq(21);
    run_seq(3);
    run_seq(1);
    checks++;
    if (sb_elems != (21 + 3 + 1) * int'(H)) begin
      failures++;
      $display("ERROR: %0d output elements", sb_elems);
    end
    expect_seen("full six-stage pipeline", n_full);
    expect_seen("global core preload", n_glob);
    expect_seen("random core reload", n_rnd);
    expect_seen("masked token commit", n_masked);
    expect_seen("window FIFO wrap-around", n_wrap);
    expect_seen("memory stall", mem_stalls);
    expect_seen("output back-pressure", n_bp);
    checks   += sb_checks;
    failures += sb_fail;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + sb_checks, failures + sb_fail);
    $finish;
  end

endmodule
