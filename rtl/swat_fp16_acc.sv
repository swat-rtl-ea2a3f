// swat_fp16_acc: FP16 accumulator with a three-stage pipelined adder.
//
// acc <- acc + in_data for every in_valid. The adder is cut into three
// registered pieces (exponent compare and mantissa align, mantissa add,
// normalise and round), so one addition takes three cycles and the next one
// needs its result: the accumulator accepts one addend every 3 cycles
// (initiation interval II = 3). This is the FP16 accumulation loop used by
// the QK multiply-accumulate, the ZRED1 channels and the row-sum stages; the
// II of 3 is the figure the architecture is built around, the split of the
// adder into these three stages is this design's own.
//
// Interface: clr (one cycle) sets acc to +0 and must not coincide with an
// addition in flight. in_valid adds in_data; it is only legal while busy is
// low (an assertion checks this). busy is high in the two cycles after
// in_valid while the sum is in flight; acc holds the result from the cycle
// busy falls, three cycles after in_valid.
module swat_fp16_acc
  import swat_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  in_valid,
  input  fp16_t in_data,
  output logic  busy,
  output fp16_t acc
);

  add_align_t s1_q;
  add_sum_t   s2_q;
  logic [1:0] vld_q;   // valid bits of the first two adder stages

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q <= '0;
      acc   <= FP16_ZERO;
      s1_q  <= '0;
      s2_q  <= '0;
    end else begin
      vld_q <= {vld_q[0], in_valid};
      if (in_valid) s1_q <= fp16_add_align(acc, in_data);
      if (vld_q[0]) s2_q <= fp16_add_sum(s1_q);
      if (clr)           acc <= FP16_ZERO;
      else if (vld_q[1]) acc <= fp16_add_norm(s2_q);
    end
  end

  assign busy = |vld_q;

  // An addend may only enter when no addition is in flight (II = 3).
  a_ii : assert property (@(posedge clk) disable iff (!rst_n)
                          in_valid |-> !(vld_q[0] || vld_q[1]));
  a_clr : assert property (@(posedge clk) disable iff (!rst_n)
                           clr |-> !(vld_q[0] || vld_q[1] || in_valid));

endmodule
