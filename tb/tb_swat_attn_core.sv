// tb_swat_attn_core: test of one attention core (H = 8).
//
// Acts as the loader, the stage sequencers and the ZRED1 reader around a
// single core and pushes a stream of rows through it the way the pipeline
// does: in every interval one new K/V row is written (valid or masked),
// the previous row runs QK against a random Q row, the row before runs SV,
// and the one before that is read out of ZBuf and S'. A new K/V row every
// interval is the random-attention case and checks that the three-entry
// ring never overwrites a row still in use. For each row, S' must equal
// exp(Q.K) (0 when masked) and ZBuf[e] = S' * V[e], both against a
// double-precision model, and the QK issues are spaced three cycles apart.
module tb_swat_attn_core;
  import swat_pkg::*;
  import swat_tb_pkg::*;

  localparam int unsigned H  = 8;
  localparam int unsigned NT = 40;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       clear = 1'b0, wr_en = 1'b0, wr_commit = 1'b0, wr_tok_valid = 1'b0, adv = 1'b0;
  logic [2:0] wr_addr = '0, qk_idx = '0, sv_idx = '0, zrd_addr = '0;
  fp16_t      wr_k = '0, wr_v = '0, q_data = '0;
  logic       qk_clr = 1'b0, qk_issue = 1'b0, sv_exp = 1'b0, sv_issue = 1'b0;
  fp16_t      zrd_data, sexp;

  swat_attn_core #(.H(H)) dut (.*);

  int checks = 0, failures = 0;

  fp16_t kk [NT][H];
  fp16_t vv [NT][H];
  fp16_t qq [NT][H];
  bit    ok [NT];

  task automatic tick();
    @(negedge clk);
  endtask

  // one pipeline interval: load row r, QK row r-1, SV row r-2, read row r-3
  task automatic interval(int r);
    // load row r (element writes), commit
    if (r < NT) begin
      for (int e = 0; e < H; e++) begin
        wr_en = 1'b1; wr_addr = 3'(e); wr_k = kk[r][e]; wr_v = vv[r][e];
        tick();
      end
      wr_en = 1'b0;
      wr_commit = 1'b1; wr_tok_valid = ok[r];
      tick();
      wr_commit = 1'b0;
    end
    // QK of row r-1
    qk_clr = 1'b1;
    tick();
    qk_clr = 1'b0;
    for (int e = 0; e < H; e++) begin
      qk_issue = 1'b1; qk_idx = 3'(e); q_data = (r >= 1 && r - 1 < NT) ? qq[r-1][e] : '0;
      tick();
      qk_issue = 1'b0;
      tick(); tick();
    end
    repeat (4) tick();
    // SV of row r-2
    sv_exp = 1'b1;
    tick();
    sv_exp = 1'b0;
    for (int e = 0; e < H; e++) begin
      sv_issue = 1'b1; sv_idx = 3'(e);
      tick();
      sv_issue = 1'b0;
      tick(); tick();
    end
    // read back row r-3
    if (r >= 3 && r - 3 < NT) begin
      real s, p;
      int  j;
      j = r - 3;
      s = 0.0;
      for (int e = 0; e < H; e++) s += fp16_to_real(qq[j][e]) * fp16_to_real(kk[j][e]);
      p = ok[j] ? $exp(s) : 0.0;
      checks++;
      if (fp16_to_real(sexp) - p > p / 200.0 + 1e-4 || p - fp16_to_real(sexp) > p / 200.0 + 1e-4) begin
        failures++;
        $display("ERROR: row %0d S' = %f, expected %f", j, fp16_to_real(sexp), p);
      end
      for (int e = 0; e < H; e++) begin
        real want, got;
        zrd_addr = 3'(e);
        tick();
        want = p * fp16_to_real(vv[j][e]);
        got  = fp16_to_real(zrd_data);
        checks++;
        if (got - want > 0.005 * p + 1e-4 || want - got > 0.005 * p + 1e-4) begin
          failures++;
          $display("ERROR: row %0d Z slice[%0d] = %f, expected %f", j, e, got, want);
        end
      end
    end
    adv = 1'b1;
    tick();
    adv = 1'b0;
  endtask

  initial begin
    for (int r = 0; r < NT; r++) begin
      ok[r] = ($urandom_range(4) != 0);
      for (int e = 0; e < H; e++) begin
        kk[r][e] = real_to_fp16((real'(int'($urandom_range(64))) - 32.0) / 32.0);
        vv[r][e] = real_to_fp16((real'(int'($urandom_range(64))) - 32.0) / 16.0);
        qq[r][e] = real_to_fp16((real'(int'($urandom_range(64))) - 32.0) / 32.0);
      end
    end
    repeat (2) tick();
    rst_n = 1'b1;
    clear = 1'b1;
    tick();
    clear = 1'b0;
    for (int r = 0; r < NT + 3; r++) interval(r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
