// tb_swat_loader: test of the LOAD stage.
//
// H = 4, 2w = 8 window cores, NG = 2 global cores (tokens 1 and 30, the
// second beyond the 12-token sequence) and NR = 1 random core (offset 5),
// served by the behavioural memory with random stalls. For every row of the
// sequence the testbench compares the rows committed on the write bus, in
// order, with the expected list (core index, valid bit, and the K and V
// elements of the right token), and after the advance reads the Q buffer
// back. Row 0 must bring the global tokens and tokens 0..w-1, later rows the
// single token i+w-1 (masked past the end) and the random token.
module tb_swat_loader;
  import swat_pkg::*;
  import swat_tb_pkg::*;

  localparam int unsigned H  = 4;
  localparam int unsigned W2 = 8;
  localparam int unsigned NG = 2;
  localparam int unsigned NR = 1;
  localparam int unsigned N  = 12;
  localparam logic [15:0] GIDX [NG] = '{16'd1, 16'd30};
  localparam logic [15:0] ROFF [NR] = '{16'd5};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start = 1'b0, adv = 1'b0, busy;
  logic [15:0] row = '0, seq_len = 16'(N);
  logic        q_req_valid, q_req_ready, q_resp_valid;
  logic [15:0] q_req_tok;
  fp16_t       q_resp_data;
  logic        kv_req_valid, kv_req_ready, kv_resp_valid;
  logic [15:0] kv_req_tok;
  fp16_t       kv_resp_k, kv_resp_v;
  logic        wr_en, wr_commit, wr_tok_valid;
  logic [3:0]  wr_core;
  logic [1:0]  wr_addr, q_rd_idx = '0;
  fp16_t       wr_k, wr_v, q_rd_data;
  int          stalls, kv_reads;

  swat_loader #(.H(H), .W2(W2), .NG(NG), .NR(NR), .GLOBAL_IDX(GIDX), .RND_OFF(ROFF)) dut (.*);

  swat_mem_model #(.H(H), .STALL(1'b1)) u_mem (.*);

  typedef struct { int core; bit valid; int tok; } job_t;
  job_t  got_q [$];
  fp16_t wk [16][H];
  fp16_t wv [16][H];
  int    checks = 0, failures = 0;

  always @(posedge clk) begin
    if (wr_en) begin
      wk[wr_core][wr_addr] <= wr_k;
      wv[wr_core][wr_addr] <= wr_v;
    end
  end

  // commits are checked one cycle later, when the last element is stored
  logic       c_d = 1'b0, cv_d;
  logic [3:0] cc_d;
  always @(posedge clk) begin
    c_d  <= wr_commit;
    cv_d <= wr_tok_valid;
    cc_d <= wr_core;
    if (c_d) got_q.push_back('{int'(cc_d), cv_d, -1});
  end

  function automatic void expect_jobs(int r, ref job_t exp_q [$]);
    int w = int'(W2) / 2;
    exp_q.delete();
    if (r == 0) begin
      for (int k = 0; k < int'(NG); k++) exp_q.push_back('{int'(W2) + k, int'(GIDX[k]) < int'(N), int'(GIDX[k])});
      for (int t = 0; t < w; t++) exp_q.push_back('{t % int'(W2), 1'b1, t});
    end else begin
      exp_q.push_back('{(r + w - 1) % int'(W2), (r + w - 1) < int'(N), r + w - 1});
    end
    for (int k = 0; k < int'(NR); k++) exp_q.push_back('{int'(W2 + NG) + k, 1'b1, (r + int'(ROFF[k])) % int'(N)});
  endfunction

  initial begin
    job_t exp_q [$];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < int'(N); r++) begin
      got_q.delete();
      @(negedge clk);
      row = 16'(r);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (busy) @(negedge clk);
      @(negedge clk);
      expect_jobs(r, exp_q);
      checks++;
      if (got_q.size() != exp_q.size()) begin
        failures++;
        $display("ERROR: row %0d committed %0d rows, expected %0d", r, got_q.size(), exp_q.size());
      end else begin
        foreach (exp_q[j]) begin
          checks++;
          if (got_q[j].core != exp_q[j].core || got_q[j].valid != exp_q[j].valid) begin
            failures++;
            $display("ERROR: row %0d commit %0d: core %0d valid %0d, expected core %0d valid %0d",
                     r, j, got_q[j].core, got_q[j].valid, exp_q[j].core, exp_q[j].valid);
          end
        end
        // data of the last valid commit to each core of this row
        foreach (exp_q[j]) if (exp_q[j].valid && exp_q[j].core < int'(W2 + NG)) begin
          for (int e = 0; e < int'(H); e++) begin
            checks++;
            if (wk[exp_q[j].core][e] != tb_elem(1, exp_q[j].tok, e) || wv[exp_q[j].core][e] != tb_elem(2, exp_q[j].tok, e)) begin
              failures++;
              $display("ERROR: row %0d core %0d element %0d holds wrong K/V", r, exp_q[j].core, e);
            end
          end
        end
        for (int e = 0; e < int'(H); e++) begin
          int c = int'(W2 + NG);
          checks++;
          if (wk[c][e] != tb_elem(1, (r + int'(ROFF[0])) % int'(N), e)) begin
            failures++;
            $display("ERROR: row %0d random core holds wrong K", r);
          end
        end
      end
      adv = 1'b1;
      @(negedge clk);
      adv = 1'b0;
      for (int e = 0; e < int'(H); e++) begin
        q_rd_idx = 2'(e);
        #1;
        checks++;
        if (q_rd_data != tb_elem(0, r, e)) begin
          failures++;
          $display("ERROR: row %0d Q[%0d] = %h, expected %h", r, e, q_rd_data, tb_elem(0, r, e));
        end
      end
    end
    checks++;
    if (kv_reads != 1 + int'(W2) / 2 + int'(N) - int'(W2) / 2 + int'(N) * int'(NR)) begin
      failures++;
      $display("ERROR: %0d K/V rows read", kv_reads);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
