// tb_swat_rowsum: test of the two-phase row sum (ROWSUM1 / ROWSUM2).
//
// NC = 32 cores in G = 4 groups of H = 8. Rows of random S' values are fed
// through the two phases in overlapped pipeline intervals (ROWSUM1 of row r
// beside ROWSUM2 of row r-1), and each row sum is compared with the
// double-precision sum. ROWSUM1 must be busy for 1 + 3(H-1) + 3 cycles and
// ROWSUM2 for 1 + 3(G-1) + 3 cycles (accumulation every 3 cycles).
module tb_swat_rowsum;
  import swat_pkg::*;
  import swat_tb_pkg::*;

  localparam int unsigned H  = 8;
  localparam int unsigned NC = 32;
  localparam int unsigned G  = NC / H;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  adv = 1'b0, start1 = 1'b0, start2 = 1'b0, busy1, busy2;
  fp16_t sexp [NC];
  fp16_t rowsum;

  swat_rowsum #(.H(H), .NC(NC)) dut (.*);

  int  checks = 0, failures = 0;
  real want [0:15];

  initial begin
    for (int c = 0; c < NC; c++) sexp[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 12; r++) begin
      int c1, c2;
      want[r] = 0.0;
      for (int c = 0; c < NC; c++) begin
        sexp[c] = ($urandom_range(5) == 0) ? 16'h0000 : real_to_fp16(real'($urandom_range(3000)) / 1000.0);
        want[r] += fp16_to_real(sexp[c]);
      end
      @(negedge clk);
      start1 = 1'b1;
      start2 = (r >= 1);
      @(negedge clk);
      start1 = 1'b0;
      start2 = 1'b0;
      c1 = 1; c2 = 1;
      while (busy1 || busy2) begin
        @(negedge clk);
        if (busy1) c1++;
        if (busy2) c2++;
      end
      checks++;
      if (c1 != 1 + 3 * (int'(H) - 1) + 3) begin failures++; $display("ERROR: ROWSUM1 took %0d cycles", c1); end
      if (r >= 1) begin
        checks++;
        if (c2 != 1 + 3 * (int'(G) - 1) + 3) begin failures++; $display("ERROR: ROWSUM2 took %0d cycles", c2); end
      end
      adv = 1'b1;
      @(negedge clk);
      adv = 1'b0;
      if (r >= 1) begin
        real got;
        got = fp16_to_real(rowsum);
        checks++;
        if (got - want[r-1] > want[r-1] / 200.0 || want[r-1] - got > want[r-1] / 200.0) begin
          failures++;
          $display("ERROR: row %0d sum %f, expected %f", r - 1, got, want[r-1]);
        end
      end
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
