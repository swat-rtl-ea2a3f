// swat_rowsum: the softmax denominator, sum of the S' values of one row.
//
// ROWSUM1 runs beside ZRED1: the NC cores are grouped by H and each of the
// G = NC/H groups has one FP16 accumulator that adds the S' of its H cores
// one after another, every II = 3 cycles (about 3*H cycles). ROWSUM2 runs
// beside ZRED2 in the next pipeline interval and adds the G group sums with
// a single accumulator (about 3*G cycles). For H = 64 and NC = 512 this
// gives the 195 and 27 cycles of the architecture's stage table; grouping
// by H is this design's reading of "a similar two-stage approach".
//
// Timing: start1/start2 are the stage starts of ROWSUM1/ROWSUM2 (different
// rows, same interval); busy1/busy2 as for the other stages. At adv the
// group sums move on to ROWSUM2 and the row sum to rowsum, read by the
// division stage.
//
// The accumulators' busy outputs are left open: the issue sequencers' tails
// already cover the adder latency.
module swat_rowsum
  import swat_pkg::*;
#(
  parameter int unsigned H  = 64,
  parameter int unsigned NC = 512,
  parameter int unsigned II = 3,
  localparam int unsigned G  = NC / H,
  localparam int unsigned AW = $clog2(H),
  localparam int unsigned GW = (G > 1) ? $clog2(G) : 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  adv,
  input  logic  start1,
  output logic  busy1,
  input  logic  start2,
  output logic  busy2,
  input  fp16_t sexp [NC],
  output fp16_t rowsum
);

  // ---------------- ROWSUM1 ----------------
  logic          iss1;
  logic [AW-1:0] k1;
  fp16_t         gsum      [G];
  fp16_t         gsum_hold [G];

  swat_issue_seq #(.N(H), .II(II), .TAIL(3)) u_seq1 (
    .clk(clk), .rst_n(rst_n), .start(start1), .issue(iss1), .idx(k1), .busy(busy1)
  );

  for (genvar g = 0; g < G; g++) begin : g_grp
    swat_fp16_acc u_acc (
      .clk(clk), .rst_n(rst_n), .clr(start1), .in_valid(iss1),
      .in_data(sexp[g * H + 32'(k1)]), .busy(), .acc(gsum[g])
    );
  end

  // ---------------- ROWSUM2 ----------------
  logic          iss2;
  logic [GW-1:0] k2;
  fp16_t         total;

  swat_issue_seq #(.N(G), .II(II), .TAIL(3)) u_seq2 (
    .clk(clk), .rst_n(rst_n), .start(start2), .issue(iss2), .idx(k2), .busy(busy2)
  );

  swat_fp16_acc u_acc2 (
    .clk(clk), .rst_n(rst_n), .clr(start2), .in_valid(iss2),
    .in_data(gsum_hold[32'(k2) % G]), .busy(), .acc(total)
  );

  always_ff @(posedge clk) begin
    if (adv) begin
      gsum_hold <= gsum;
      rowsum    <= total;
    end
  end

endmodule
