// tb_swat_zred2: test of the second Z reduction phase.
//
// G = 8 partial rows of H = 16 random FP16 values are reduced; after the
// stage and an advance, every z element must match the double-precision sum
// of its column within the FP16 rounding of a three-level adder tree. The
// stage must take H + log2(G) + 2 cycles from start to busy falling, and
// z must not change before the advance.
module tb_swat_zred2;
  import swat_pkg::*;
  import swat_tb_pkg::*;

  localparam int unsigned H = 16;
  localparam int unsigned G = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  start = 1'b0, adv = 1'b0, busy;
  fp16_t part [G][H];
  fp16_t z [H];

  swat_zred2 #(.H(H), .G(G)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    for (int g = 0; g < G; g++) for (int e = 0; e < H; e++) part[g][e] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 20; t++) begin
      int    cyc;
      fp16_t z_before [H];
      for (int g = 0; g < G; g++)
        for (int e = 0; e < H; e++)
          part[g][e] = real_to_fp16((real'(int'($urandom_range(2000))) - 1000.0) / 128.0);
      z_before = z;
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (busy) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != int'(H) + 3 + 2) begin failures++; $display("ERROR: stage took %0d cycles", cyc); end
      checks++;
      if (z != z_before) begin failures++; $display("ERROR: z changed before adv"); end
      adv = 1'b1;
      @(negedge clk);
      adv = 1'b0;
      for (int e = 0; e < H; e++) begin
        real want, got, mag;
        want = 0.0;
        mag  = 0.0;
        for (int g = 0; g < G; g++) begin
          want += fp16_to_real(part[g][e]);
          mag  += (fp16_to_real(part[g][e]) < 0.0) ? -fp16_to_real(part[g][e]) : fp16_to_real(part[g][e]);
        end
        got = fp16_to_real(z[e]);
        checks++;
        if ((got - want) > mag / 256.0 || (want - got) > mag / 256.0) begin
          failures++;
          $display("ERROR: z[%0d] = %f, expected %f", e, got, want);
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
