// tb_swat_ctrl: test of the row-pipeline controller.
//
// The six stages are modelled by busy counters with random durations
// (0..40 cycles) started by st_start. For sequences of 1, 4 and 13 rows the
// testbench checks that the controller clears once per sequence, advances
// only when no stage is busy, starts exactly the occupied stages with the
// right row numbers (row r reaches stage s r + s advances after the first),
// lets every row pass every stage once, and pulses done after the last row
// has left the last stage.
module tb_swat_ctrl;
  import swat_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              start = 1'b0;
  logic [15:0]       seq_len = '0;
  logic [NSTAGE-1:0] st_busy, st_start, st_valid;
  logic              clear, adv, running, done;
  logic [15:0]       st_row [NSTAGE];

  swat_ctrl dut (.*);

  int cnt [NSTAGE];
  int visits [NSTAGE][32];
  int checks = 0, failures = 0, n_adv = 0, n_clear = 0;

  always_comb for (int s = 0; s < NSTAGE; s++) st_busy[s] = (cnt[s] > 0);

  always @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < NSTAGE; s++) cnt[s] <= 0;
    end else begin
      if (adv) begin
        n_adv++;
        checks++;
        if (st_busy != '0) begin failures++; $display("ERROR: adv while busy %b", st_busy); end
      end
      if (clear) n_clear++;
      for (int s = 0; s < NSTAGE; s++) begin
        if (st_start[s]) begin
          cnt[s] <= int'($urandom_range(40));
          visits[s][st_row[s]]++;
          checks++;
          if (!st_valid[s]) begin failures++; $display("ERROR: start of an empty stage %0d", s); end
          checks++;
          if (int'(st_row[s]) != n_adv - 1 - s) begin
            failures++;
            $display("ERROR: stage %0d started with row %0d after %0d advances", s, st_row[s], n_adv);
          end
        end else if (cnt[s] > 0) cnt[s] <= cnt[s] - 1;
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    foreach (cnt[s]) cnt[s] = 0;
    foreach (visits[s, r]) visits[s][r] = 0;
    foreach (seq_len_list[t]) begin
      int n;
      n = seq_len_list[t];
      foreach (visits[s, r]) visits[s][r] = 0;
      n_adv = 0;
      n_clear = 0;
      @(negedge clk);
      seq_len = 16'(n);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (!done) @(negedge clk);
      checks++;
      if (n_clear != 1) begin failures++; $display("ERROR: %0d clears", n_clear); end
      checks++;
      if (n_adv != n + int'(NSTAGE)) begin failures++; $display("ERROR: %0d advances for %0d rows", n_adv, n); end
      for (int s = 0; s < NSTAGE; s++)
        for (int r = 0; r < 32; r++) begin
          checks++;
          if (visits[s][r] != ((r < n) ? 1 : 0)) begin
            failures++;
            $display("ERROR: row %0d visited stage %0d %0d times", r, s, visits[s][r]);
          end
        end
      @(negedge clk);
      checks++;
      if (running) begin failures++; $display("ERROR: still running after done"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seq_len_list [3] = '{1, 4, 13};

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
