// tb_swat_core_array: test of the attention-core array and its QK / SV
// sequencers.
//
// 2w = 8 window cores plus one global and one random core (NC = 10),
// H = 4. Each round writes fresh K/V rows into a random subset of cores
// through the shared write bus (some masked), then runs LOAD -> QK -> SV ->
// read-out over three advances while the testbench serves the Q row on
// q_rd_idx / q_rd_data. Checks: every core's S' equals exp(Q.K) of the row
// it holds (0 if masked), every ZBuf element equals S' * V, a core that was
// not written keeps its previous row, and the QK and SV stages are busy for
// 1 + 3(H-1) + 4 and 1 + 3(H-1) + 1 cycles (one element every 3 cycles).
module tb_swat_core_array;
  import swat_pkg::*;
  import swat_tb_pkg::*;

  localparam int unsigned H  = 4;
  localparam int unsigned W2 = 8;
  localparam int unsigned NC = W2 + 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       clear = 1'b0, adv = 1'b0, wr_en = 1'b0, wr_commit = 1'b0, wr_tok_valid = 1'b0;
  logic [3:0] wr_core = '0;
  logic [1:0] wr_addr = '0, q_rd_idx;
  fp16_t      wr_k = '0, wr_v = '0, q_rd_data;
  logic       qk_start = 1'b0, sv_start = 1'b0, qk_busy, sv_busy;
  logic [1:0] zrd_addr [NC];
  fp16_t      zrd_data [NC];
  fp16_t      sexp [NC];

  swat_core_array #(.H(H), .W2(W2), .NG(1), .NR(1)) dut (.*);

  fp16_t qrow [H];
  fp16_t kk [NC][H];
  fp16_t vv [NC][H];
  bit    ok [NC];
  int    checks = 0, failures = 0;

  assign q_rd_data = qrow[q_rd_idx];

  task automatic tick();
    @(negedge clk);
  endtask

  task automatic pulse_adv();
    adv = 1'b1; tick(); adv = 1'b0;
  endtask

  task automatic run_stage(bit qk, output int cyc);
    if (qk) qk_start = 1'b1; else sv_start = 1'b1;
    tick();
    qk_start = 1'b0; sv_start = 1'b0;
    cyc = 0;
    while (qk_busy || sv_busy) begin tick(); cyc++; end
  endtask

  initial begin
    int cyc;
    for (int c = 0; c < NC; c++) begin
      zrd_addr[c] = '0;
      ok[c] = 1'b0;
      for (int e = 0; e < H; e++) begin kk[c][e] = '0; vv[c][e] = '0; end
    end
    repeat (2) tick();
    rst_n = 1'b1;
    clear = 1'b1; tick(); clear = 1'b0;
    for (int round = 0; round < 12; round++) begin
      // LOAD: write a random subset of cores
      for (int c = 0; c < NC; c++) begin
        if (round == 0 || $urandom_range(2) == 0) begin
          ok[c] = ($urandom_range(3) != 0);
          for (int e = 0; e < H; e++) begin
            kk[c][e] = real_to_fp16((real'(int'($urandom_range(32))) - 16.0) / 16.0);
            vv[c][e] = real_to_fp16((real'(int'($urandom_range(32))) - 16.0) / 8.0);
            wr_en = 1'b1; wr_core = 4'(c); wr_addr = 2'(e); wr_k = kk[c][e]; wr_v = vv[c][e];
            tick();
          end
          wr_en = 1'b0;
          wr_commit = 1'b1; wr_tok_valid = ok[c]; wr_core = 4'(c);
          tick();
          wr_commit = 1'b0;
        end
      end
      for (int e = 0; e < H; e++) qrow[e] = real_to_fp16((real'(int'($urandom_range(32))) - 16.0) / 16.0);
      pulse_adv();
      run_stage(1'b1, cyc);
      checks++;
      if (cyc != 1 + 3 * (int'(H) - 1) + 4) begin failures++; $display("ERROR: QK busy %0d cycles", cyc); end
      pulse_adv();
      run_stage(1'b0, cyc);
      checks++;
      if (cyc != 1 + 3 * (int'(H) - 1) + 1) begin failures++; $display("ERROR: SV busy %0d cycles", cyc); end
      pulse_adv();
      for (int c = 0; c < NC; c++) begin
        real s, p;
        s = 0.0;
        for (int e = 0; e < H; e++) s += fp16_to_real(qrow[e]) * fp16_to_real(kk[c][e]);
        p = ok[c] ? $exp(s) : 0.0;
        checks++;
        if (fp16_to_real(sexp[c]) - p > p / 200.0 + 1e-4 || p - fp16_to_real(sexp[c]) > p / 200.0 + 1e-4) begin
          failures++;
          $display("ERROR: round %0d core %0d S' = %f, expected %f", round, c, fp16_to_real(sexp[c]), p);
        end
        for (int e = 0; e < H; e++) begin
          real want, got;
          zrd_addr[c] = 2'(e);
          tick();
          want = p * fp16_to_real(vv[c][e]);
          got  = fp16_to_real(zrd_data[c]);
          checks++;
          if (got - want > 0.005 * p + 1e-4 || want - got > 0.005 * p + 1e-4) begin
            failures++;
            $display("ERROR: round %0d core %0d Z[%0d] = %f, expected %f", round, c, e, got, want);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
