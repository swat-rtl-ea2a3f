// tb_swat_div_out: test of the division and output stage.
//
// Loads random Z rows and row sums (H = 8), starts the stage and collects
// the output channel under random back-pressure. Each element must equal
// Z[e] / rowsum to within one FP16 rounding, arrive once and in order, carry
// the row number, and, with the channel always ready, the elements must
// follow each other exactly two cycles apart (division interval 2).
module tb_swat_div_out;
  import swat_pkg::*;
  import swat_tb_pkg::*;

  localparam int unsigned H = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start = 1'b0;
  logic [15:0] row = '0;
  logic        busy;
  fp16_t       z [H];
  fp16_t       rowsum;
  logic        out_valid, out_ready;
  logic [15:0] out_row;
  logic [2:0]  out_idx;
  fp16_t       out_data;

  swat_div_out #(.H(H)) dut (.*);

  int checks = 0, failures = 0;
  bit bp = 1'b0;
  int last_t = 0, nexp = 0, gap_bad = 0;

  always @(posedge clk) begin
    out_ready <= bp ? ($urandom_range(2) != 0) : 1'b1;
    if (out_valid && out_ready) begin
      real want, got, err;
      want = fp16_to_real(z[out_idx]) / fp16_to_real(rowsum);
      got  = fp16_to_real(out_data);
      err  = (got > want) ? got - want : want - got;
      checks++;
      if (err > ((want < 0.0) ? -want : want) / 1000.0 + 1.0e-7 || int'(out_idx) != nexp || out_row != row) begin
        failures++;
        $display("ERROR: row %0d elem %0d = %f, expected elem %0d = %f", out_row, out_idx, got, nexp, want);
      end
      if (!bp && nexp > 0 && $time - last_t != 20) gap_bad++;
      last_t = $time;
      nexp++;
    end
  end

  initial begin
    out_ready = 1'b0;
    rowsum = FP16_ONE;
    for (int e = 0; e < H; e++) z[e] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 20; t++) begin
      bp = (t % 2 == 1);
      for (int e = 0; e < H; e++) z[e] = real_to_fp16((real'(int'($urandom_range(2000))) - 1000.0) / 37.0);
      rowsum = real_to_fp16(0.5 + real'($urandom_range(5000)) / 100.0);
      row    = 16'(t);
      nexp   = 0;
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (busy) @(negedge clk);
      checks++;
      if (nexp != H) begin failures++; $display("ERROR: %0d elements for row %0d", nexp, t); end
    end
    checks++;
    if (gap_bad != 0) begin failures++; $display("ERROR: %0d outputs not two cycles apart", gap_bad); end
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
