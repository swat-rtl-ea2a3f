// swat_zred2: second phase of the Z reduction (ZRED2).
//
// Adds the G partial Z vectors left by ZRED1 into the final, still
// unnormalised, Z row. One element index enters per cycle and flows through
// a balanced FP16 adder tree with one register per level (G is padded to a
// power of two with zeros), so the stage takes H + log2(G) + 2 cycles: 69
// for H = 64 and G = 8, close to the 66 cycles of the architecture's stage
// table. The tree and its pipelining are this design's choice.
//
// Timing: start in cycle s, busy from s+1 until the last element is written
// into the result row; at the next adv the row is copied to z for the
// division stage.
module swat_zred2
  import swat_pkg::*;
#(
  parameter int unsigned H = 64,
  parameter int unsigned G = 8,
  localparam int unsigned AW = $clog2(H),
  localparam int unsigned L  = (G > 1) ? $clog2(G) : 0,
  localparam int unsigned GP = 1 << L
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  adv,
  output logic  busy,
  input  fp16_t part [G][H],
  output fp16_t z    [H]
);

  logic          issue;
  logic [AW-1:0] idx;

  swat_issue_seq #(.N(H), .II(1), .TAIL(L + 1)) u_seq (
    .clk(clk), .rst_n(rst_n), .start(start), .issue(issue), .idx(idx), .busy(busy)
  );

  // tree levels: lvl[0] holds the operands, lvl[l] the registered sums
  fp16_t         lvl   [L + 1][GP];
  logic          vld   [L + 1];
  logic [AW-1:0] lidx  [L + 1];
  fp16_t         zacc  [H];

  always_comb begin
    for (int j = 0; j < GP; j++) lvl[0][j] = (j < G) ? part[j][idx] : FP16_ZERO;
    vld[0]  = issue;
    lidx[0] = idx;
  end

  for (genvar l = 1; l <= L; l++) begin : g_lvl
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld[l]  <= 1'b0;
        lidx[l] <= '0;
        for (int j = 0; j < GP; j++) lvl[l][j] <= FP16_ZERO;
      end else begin
        vld[l]  <= vld[l-1];
        lidx[l] <= lidx[l-1];
        for (int j = 0; j < (GP >> l); j++) lvl[l][j] <= fp16_add(lvl[l-1][2*j], lvl[l-1][2*j+1]);
        for (int j = (GP >> l); j < GP; j++) lvl[l][j] <= FP16_ZERO;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (vld[L]) zacc[lidx[L]] <= lvl[L][0];
    if (adv) z <= zacc;
  end

endmodule
