// tb_swat_fp16_acc: test of the FP16 pipelined accumulator.
//
// Runs 200 random accumulations of 1..12 addends, issuing one addend every
// three cycles (the accumulator's initiation interval), and compares the
// final sum with a double-precision sum of the same FP16 addends. Single
// additions are also checked to within one unit in the last place, and the
// latency is checked: busy is high for exactly the two cycles after an
// addend and the sum is ready in the third.
module tb_swat_fp16_acc;
  import swat_pkg::*;
  import swat_tb_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  clr = 1'b0, in_valid = 1'b0;
  fp16_t in_data = '0;
  logic  busy;
  fp16_t acc;

  swat_fp16_acc dut (.*);

  int checks = 0, failures = 0;

  function automatic real absr(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  task automatic add_one(fp16_t v);
    @(negedge clk);
    in_valid = 1'b1;
    in_data  = v;
    @(negedge clk);
    in_valid = 1'b0;
    checks++;
    if (!busy) begin failures++; $display("ERROR: busy low 1 cycle after issue"); end
    @(negedge clk);
    checks++;
    if (!busy) begin failures++; $display("ERROR: busy low 2 cycles after issue"); end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("ERROR: busy high 3 cycles after issue"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      int    n;
      real   ref_sum, got, first;
      fp16_t a;
      n = 1 + int'($urandom_range(11));
      @(negedge clk);
      clr = 1'b1;
      @(negedge clk);
      clr = 1'b0;
      ref_sum = 0.0;
      for (int k = 0; k < n; k++) begin
        a = real_to_fp16((real'(int'($urandom_range(4000))) - 2000.0) / 64.0);
        ref_sum += fp16_to_real(a);
        add_one(a);
        if (k == 0) begin
          first = fp16_to_real(acc);
          checks++;
          if (acc != a) begin failures++; $display("ERROR: 0 + %h = %h", a, acc); end
        end
        if (k == 1) begin
          got = fp16_to_real(acc);
          checks++;
          if (absr(got - ref_sum) > absr(ref_sum) / 1024.0 + 1.0 / 65536.0) begin
            failures++;
            $display("ERROR: single add gives %f, expected %f", got, ref_sum);
          end
        end
      end
      got = fp16_to_real(acc);
      checks++;
      if (absr(got - ref_sum) > 0.004 * absr(ref_sum) + real'(n) * 0.02) begin
        failures++;
        $display("ERROR: sum of %0d terms %f, expected %f", n, got, ref_sum);
      end
    end
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
