// swat_ref_check: scoreboard for the SWAT output channel.
//
// Computes the expected attention row in double precision from the same
// FP16 test matrices the memory model serves: for row i the attended tokens
// are the window i-w .. i+w-1 clipped to the sequence, the NG global tokens
// (those inside the sequence) and the NR random tokens (i + RND_OFF[k]) mod
// seq_len, each counted once per core that holds it, and
//   Z_i[e] = sum_j exp(Q_i.K_j) V_j[e] / sum_j exp(Q_i.K_j).
// Every accepted output element is compared with it (absolute tolerance
// TOL); it also checks that each (row, element) arrives exactly once and
// that rows leave in order.
module swat_ref_check
  import swat_tb_pkg::*;
#(
  parameter int unsigned H   = 4,
  parameter int unsigned W2  = 8,
  parameter int unsigned NG  = 0,
  parameter int unsigned NR  = 0,
  parameter logic [15:0] GLOBAL_IDX [NG > 0 ? NG : 1] = '{default: 16'd0},
  parameter logic [15:0] RND_OFF    [NR > 0 ? NR : 1] = '{default: 16'd1},
  parameter real         TOL = 0.006,
  localparam int unsigned AW = $clog2(H)
) (
  input  logic          clk,
  input  logic [15:0]   seq_len,
  input  logic          out_valid,
  input  logic          out_ready,
  input  logic [15:0]   out_row,
  input  logic [AW-1:0] out_idx,
  input  logic [15:0]   out_data,
  output int            checks,
  output int            failures,
  output int            elems
);

  real exp_row [H];
  int  cur_row = -1;
  int  next_idx = 0;
  real max_err = 0.0;

  initial begin
    checks = 0;
    failures = 0;
    elems = 0;
  end

  function automatic void add_token(int i, int t, ref real num [H], ref real den);
    real s, p;
    s = 0.0;
    for (int e = 0; e < int'(H); e++)
      s += fp16_to_real(tb_elem(0, i, e)) * fp16_to_real(tb_elem(1, t, e));
    p = $exp(s);
    den += p;
    for (int e = 0; e < int'(H); e++) num[e] += p * fp16_to_real(tb_elem(2, t, e));
  endfunction

  task automatic compute_row(int i);
    real num [H];
    real den;
    int  n, w;
    n = int'(seq_len);
    w = int'(W2) / 2;
    den = 0.0;
    for (int e = 0; e < int'(H); e++) num[e] = 0.0;
    for (int t = i - w; t <= i + w - 1; t++)
      if (t >= 0 && t < n) add_token(i, t, num, den);
    for (int k = 0; k < int'(NG); k++)
      if (int'(GLOBAL_IDX[k]) < n) add_token(i, int'(GLOBAL_IDX[k]), num, den);
    for (int k = 0; k < int'(NR); k++)
      add_token(i, (i + int'(RND_OFF[k])) % n, num, den);
    for (int e = 0; e < int'(H); e++) exp_row[e] = num[e] / den;
  endtask

  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      real got, err;
      if (int'(out_idx) == 0) begin
        checks++;
        if (int'(out_row) != cur_row + 1 && out_row != 16'd0) begin
          failures++;
          $display("ERROR: row %0d follows row %0d", out_row, cur_row);
        end
        cur_row  = int'(out_row);
        next_idx = 0;
        compute_row(cur_row);
      end
      checks++;
      if (int'(out_idx) != next_idx) begin
        failures++;
        $display("ERROR: row %0d element %0d arrived, expected element %0d", out_row, out_idx, next_idx);
      end
      next_idx = int'(out_idx) + 1;
      got = fp16_to_real(out_data);
      err = got - exp_row[out_idx];
      if (err < 0.0) err = -err;
      if (err > max_err) max_err = err;
      elems++;
      checks++;
      if (err > TOL) begin
        failures++;
        if (failures < 20)
          $display("ERROR: Z[%0d][%0d] = %f, expected %f", out_row, out_idx, got, exp_row[out_idx]);
      end
    end
  end

  final $display("scoreboard: %0d elements, largest error %f", elems, max_err);

endmodule
