// swat_zred1: first phase of the Z reduction (ZRED1).
//
// Every attention core holds an H-element slice of Z. The NC cores are
// grouped by H (G = NC/H groups); each group owns H accumulation channels,
// one per Z element, so the whole stage has G*H FP16 accumulators and
// finishes in about 3*H cycles (II = 3) instead of the 3*NC cycles a single
// set of H channels would need. The result is G partial Z vectors.
//
// Read schedule (this design's choice): in step k = 0..H-1, channel e of a
// group adds element e of core (e + k) mod H of that group. Each core is
// thus asked for exactly one ZBuf element per step, at address
// (p - k) mod H where p is its position in the group, which is what a
// single-port row buffer can deliver. H must be a power of two.
//
// Timing: start in cycle s; busy from s+1 for H steps three cycles apart,
// plus one cycle of ZBuf read latency and three of accumulation. At the
// next adv the partial vectors are copied to part, where ZRED2 reads them
// while this stage already reduces the following row.
//
// The accumulators' busy outputs are left open: the sequencer's tail already
// covers the adder latency.
module swat_zred1
  import swat_pkg::*;
#(
  parameter int unsigned H  = 64,
  parameter int unsigned NC = 512,
  parameter int unsigned II = 3,
  localparam int unsigned G  = NC / H,
  localparam int unsigned AW = $clog2(H)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          adv,
  output logic          busy,
  output logic [AW-1:0] zrd_addr [NC],
  input  fp16_t         zrd_data [NC],
  output fp16_t         part     [G][H]
);

  logic          issue, issue_d;
  logic [AW-1:0] step, step_d;

  swat_issue_seq #(.N(H), .II(II), .TAIL(4)) u_seq (
    .clk(clk), .rst_n(rst_n), .start(start), .issue(issue), .idx(step), .busy(busy)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issue_d <= 1'b0;
      step_d  <= '0;
    end else begin
      issue_d <= issue;
      step_d  <= step;
    end
  end

  for (genvar c = 0; c < NC; c++) begin : g_addr
    assign zrd_addr[c] = AW'(c % H) - step;
  end

  for (genvar g = 0; g < G; g++) begin : g_grp
    for (genvar e = 0; e < H; e++) begin : g_ch
      fp16_t acc;
      logic [AW-1:0] src;
      assign src = AW'(e) + step_d;
      swat_fp16_acc u_acc (
        .clk     (clk),
        .rst_n   (rst_n),
        .clr     (start),
        .in_valid(issue_d),
        .in_data (zrd_data[g * H + 32'(src)]),
        .busy    (),
        .acc     (acc)
      );
      always_ff @(posedge clk) if (adv) part[g][e] <= acc;
    end
  end

  initial begin
    if ((H & (H - 1)) != 0 || NC % H != 0)
      $fatal(1, "swat_zred1: H must be a power of two dividing NC");
  end

endmodule
