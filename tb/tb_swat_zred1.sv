// tb_swat_zred1: test of the first Z reduction phase.
//
// NC = 32 cores in G = 4 groups of H = 8. The testbench plays the cores: it
// holds a Z slice per core and answers each core's ZBuf read address with
// one cycle of latency, like the core's buffer. It checks that in every
// read cycle each core is asked for a different element of its slice in a
// diagonal pattern, i.e. that over the stage every element of every core is
// read exactly once, that each partial row equals the double-precision sum
// of its group's slices, and that the stage takes 1 + 3(H-1) + 1 + 4 cycles.
module tb_swat_zred1;
  import swat_pkg::*;
  import swat_tb_pkg::*;

  localparam int unsigned H  = 8;
  localparam int unsigned NC = 32;
  localparam int unsigned G  = NC / H;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       start = 1'b0, adv = 1'b0, busy;
  logic [2:0] zrd_addr [NC];
  fp16_t      zrd_data [NC];
  fp16_t      part [G][H];

  swat_zred1 #(.H(H), .NC(NC)) dut (.*);

  fp16_t slice [NC][H];
  int    reads [NC][H];
  int    checks = 0, failures = 0;

  always @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      zrd_data[c] <= slice[c][zrd_addr[c]];
      if (dut.issue) reads[c][zrd_addr[c]]++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 10; t++) begin
      int cyc;
      for (int c = 0; c < NC; c++)
        for (int e = 0; e < H; e++) begin
          slice[c][e] = real_to_fp16((real'(int'($urandom_range(2000))) - 1000.0) / 256.0);
          reads[c][e] = 0;
        end
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (busy) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 1 + 3 * (int'(H) - 1) + 1 + 4) begin failures++; $display("ERROR: stage took %0d cycles", cyc); end
      for (int c = 0; c < NC; c++)
        for (int e = 0; e < H; e++) begin
          checks++;
          if (reads[c][e] != 1) begin failures++; $display("ERROR: core %0d elem %0d read %0d times", c, e, reads[c][e]); end
        end
      adv = 1'b1;
      @(negedge clk);
      adv = 1'b0;
      for (int g = 0; g < G; g++)
        for (int e = 0; e < H; e++) begin
          real want, mag, got;
          want = 0.0; mag = 0.0;
          for (int p = 0; p < H; p++) begin
            want += fp16_to_real(slice[g*H+p][e]);
            mag  += (fp16_to_real(slice[g*H+p][e]) < 0.0) ? -fp16_to_real(slice[g*H+p][e]) : fp16_to_real(slice[g*H+p][e]);
          end
          got = fp16_to_real(part[g][e]);
          checks++;
          if (got - want > mag / 200.0 || want - got > mag / 200.0) begin
            failures++;
            $display("ERROR: part[%0d][%0d] = %f, expected %f", g, e, got, want);
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
