// swat_ctrl: controller of the six-stage row pipeline.
//
// Query rows flow through LOAD, QK, SV, ZRED1+ROWSUM1, ZRED2+ROWSUM2 and
// DIV&OUT; each stage holds a different row, so up to six rows are in
// flight. The controller keeps a valid bit and a row number per stage and
// moves all rows one stage on together (adv) once every occupied stage has
// finished, then starts the occupied stages again (st_start). The pipeline
// interval therefore equals the slowest stage plus three control cycles;
// with H = 64 that is the QK stage, as in the architecture's balanced
// pipeline. Lock-step advancing is this design's choice of pipeline
// control.
//
// Sequence: start (with seq_len rows) clears the attention cores (clear),
// the first adv brings row 0 into LOAD; after the last row has left
// DIV&OUT, done pulses for one cycle. adv is one cycle long and is the only
// moment at which stage results are handed over.
module swat_ctrl
  import swat_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] seq_len,
  input  logic [NSTAGE-1:0] st_busy,
  output logic        clear,
  output logic        adv,
  output logic [NSTAGE-1:0] st_start,
  output logic [NSTAGE-1:0] st_valid,
  output logic [15:0] st_row [NSTAGE],
  output logic        running,
  output logic        done
);

  typedef enum logic [2:0] {C_IDLE, C_CLEAR, C_ADV, C_LAUNCH, C_WAIT} state_e;

  state_e      st_q;
  logic [15:0] n_q, next_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q     <= C_IDLE;
      n_q      <= '0;
      next_q   <= '0;
      st_valid <= '0;
      for (int s = 0; s < NSTAGE; s++) st_row[s] <= '0;
    end else begin
      unique case (st_q)
        C_IDLE: if (start) begin
          st_q     <= C_CLEAR;
          n_q      <= seq_len;
          next_q   <= '0;
          st_valid <= '0;
        end
        C_CLEAR: st_q <= C_ADV;
        C_ADV: begin
          st_valid <= {st_valid[NSTAGE-2:0], next_q < n_q};
          for (int s = 1; s < NSTAGE; s++) st_row[s] <= st_row[s-1];
          st_row[0] <= next_q;
          if (next_q < n_q) next_q <= next_q + 16'd1;
          st_q <= C_LAUNCH;
        end
        C_LAUNCH: st_q <= (st_valid == '0) ? C_IDLE : C_WAIT;
        C_WAIT: if (st_busy == '0) st_q <= C_ADV;
        default: st_q <= C_IDLE;
      endcase
    end
  end

  assign clear    = (st_q == C_CLEAR);
  assign adv      = (st_q == C_ADV);
  assign st_start = (st_q == C_LAUNCH) ? st_valid : '0;
  assign running  = (st_q != C_IDLE);
  assign done     = (st_q == C_LAUNCH) && (st_valid == '0);

  a_adv_idle : assert property (@(posedge clk) disable iff (!rst_n) adv |-> st_busy == '0);

endmodule
