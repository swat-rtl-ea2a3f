// tb_swat_bigbird_full: the BigBird configuration at its full size.
//
// swat_top with H = 64, 192 sliding-window cores, 128 global cores and 192
// random cores (512 cores in all, the BigBird set-up the architecture was
// synthesised in) runs one 40-token sequence. Global core k holds token 3k,
// so the first 14 global cores see real tokens and the rest are masked;
// random core k attends token (i + 1 + 7k) mod n. Every output element is
// compared with a double-precision reference over the same token set, and
// the number of K/V rows read is checked: one per window token, one per
// global token inside the sequence, and NR per row for the random cores.
// The sequence is short because every row reloads 192 random K/V rows
// (about 12,400 cycles of LOAD per row in this design).
module tb_swat_bigbird_full;
  import swat_pkg::*;

  localparam int unsigned H  = 64;
  localparam int unsigned W2 = 192;
  localparam int unsigned NG = 128;
  localparam int unsigned NR = 192;
  localparam int          N  = 40;

  typedef logic [15:0] gidx_t [NG];
  typedef logic [15:0] roff_t [NR];

  function automatic gidx_t mk_gidx();
    gidx_t g;
    for (int k = 0; k < int'(NG); k++) g[k] = 16'(3 * k);
    return g;
  endfunction

  function automatic roff_t mk_roff();
    roff_t r;
    for (int k = 0; k < int'(NR); k++) r[k] = 16'(1 + 7 * k);
    return r;
  endfunction

  localparam gidx_t GIDX = mk_gidx();
  localparam roff_t ROFF = mk_roff();

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
  int n_glob = 0, n_rnd = 0, n_full = 0, n_masked = 0, n_bp = 0;

  always @(posedge clk) begin
    out_ready <= rst_n && ($urandom_range(4) != 0);
    if (dut.u_ctrl.st_valid == '1 && dut.adv) n_full++;
    if (dut.wr_commit && !dut.wr_tok_valid) n_masked++;
    if (out_valid && !out_ready) n_bp++;
    if (dut.wr_commit && dut.wr_tok_valid && 32'(dut.wr_core) >= W2 && 32'(dut.wr_core) < W2 + NG) n_glob++;
    if (dut.wr_commit && 32'(dut.wr_core) >= W2 + NG) n_rnd++;
  end

  function automatic int n_glob_in(int n);
    int c = 0;
    for (int k = 0; k < int'(NG); k++) if (int'(GIDX[k]) < n) c++;
    return c;
  endfunction

  task automatic expect_seen(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("ERROR: mechanism never exercised: %s", what);
    end else $display("mechanism %-28s seen %0d times", what, n);
  endtask

  initial begin
    int cyc;
    out_ready = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    seq_len = 16'(N);
    start   = 1'b1;
    @(negedge clk);
    start   = 1'b0;
    cyc = 0;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    $display("seq_len %0d done in %0d cycles", N, cyc);
    checks++;
    if (kv_reads != N + n_glob_in(N) + N * int'(NR)) begin
      failures++;
      $display("ERROR: read %0d K/V rows, expected %0d", kv_reads, N + n_glob_in(N) + N * int'(NR));
    end
    checks++;
    if (sb_elems != N * int'(H)) begin
      failures++;
      $display("ERROR: %0d output elements", sb_elems);
    end
    expect_seen("full six-stage pipeline", n_full);
    expect_seen("global core preload", n_glob);
    expect_seen("random core reload", n_rnd);
    expect_seen("masked token commit", n_masked);
    expect_seen("memory stall", mem_stalls);
    expect_seen("output back-pressure", n_bp);
    checks   += sb_checks;
    failures += sb_fail;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + sb_checks, failures + sb_fail);
    $finish;
  end

endmodule
