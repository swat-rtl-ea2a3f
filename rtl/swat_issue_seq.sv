// swat_issue_seq: issue sequencer shared by the pipeline stages.
//
// A start pulse (cycle s) launches N issue pulses, one every II cycles,
// starting in cycle s+1, each tagged with its index 0..N-1. After the last
// issue busy stays high for TAIL more cycles, the time the stage's datapath
// needs to drain. busy is high from cycle s+1 until the stage is finished,
// so a stage built on it takes 1 + (N-1)*II + 1 + TAIL cycles.
//
// The stages of the row pipeline use it with the intervals of the
// architecture: II = 3 for the FP16 multiply-accumulate loops (QK, SV,
// ZRED1, ROWSUM1, ROWSUM2), II = 1 for ZRED2 and II = 2 for the division.
module swat_issue_seq #(
  parameter int unsigned N    = 64,
  parameter int unsigned II   = 3,
  parameter int unsigned TAIL = 3,
  localparam int unsigned IW  = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          issue,
  output logic [IW-1:0] idx,
  output logic          busy
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_TAIL} state_e;

  state_e      state_q;
  logic [7:0]  phase_q;
  logic [15:0] tail_q;

  assign issue = (state_q == S_RUN) && (phase_q == 8'd0);
  assign busy  = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      phase_q <= '0;
      tail_q  <= '0;
      idx     <= '0;
    end else if (start) begin
      state_q <= S_RUN;
      phase_q <= '0;
      idx     <= '0;
    end else begin
      case (state_q)
        S_RUN: begin
          if (issue && idx == IW'(N - 1)) begin
            state_q <= (TAIL == 0) ? S_IDLE : S_TAIL;
            tail_q  <= 16'(TAIL);
            phase_q <= '0;
          end else begin
            if (phase_q == 8'(II - 1)) phase_q <= '0;
            else                       phase_q <= phase_q + 8'd1;
            if (phase_q == 8'(II - 1)) idx <= idx + IW'(1);
          end
        end
        S_TAIL: begin
          tail_q <= tail_q - 16'd1;
          if (tail_q == 16'd1) state_q <= S_IDLE;
        end
        default: ;
      endcase
    end
  end

  a_no_restart : assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
