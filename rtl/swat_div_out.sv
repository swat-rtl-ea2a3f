// swat_div_out: division and output stage.
//
// Applies the softmax denominator after the fact: every element of the
// reduced Z row is divided by the row sum of S' (Z[e] / rowsum), one
// division every DIV_II = 2 cycles as in the architecture, and the result
// row is written to memory through a valid/ready channel carrying the row
// number, the element index and the FP16 value. The divider is one
// combinational FP16 division followed by an output register; a stalled
// write (out_ready low) holds the stage.
//
// Timing: start in cycle s; the first element is offered in cycle s+2 and
// one more every DIV_II cycles while out_ready is high. busy falls after
// the last element has been accepted.
module swat_div_out
  import swat_pkg::*;
#(
  parameter int unsigned H      = 64,
  parameter int unsigned DIV_II = 2,
  localparam int unsigned AW    = $clog2(H)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [15:0]   row,
  output logic          busy,
  input  fp16_t         z [H],
  input  fp16_t         rowsum,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [15:0]   out_row,
  output logic [AW-1:0] out_idx,
  output fp16_t         out_data
);

  typedef enum logic [1:0] {D_IDLE, D_CALC, D_SEND} state_e;

  state_e        st_q;
  logic [AW-1:0] idx_q;
  logic [7:0]    gap_q;   // cycles since the last division started

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q     <= D_IDLE;
      idx_q    <= '0;
      gap_q    <= '0;
      out_row  <= '0;
      out_data <= FP16_ZERO;
    end else begin
      unique case (st_q)
        D_IDLE: if (start) begin
          st_q    <= D_CALC;
          idx_q   <= '0;
          gap_q   <= '0;
          out_row <= row;
        end
        D_CALC: begin
          out_data <= fp16_div(z[idx_q], rowsum);
          st_q     <= D_SEND;
          gap_q    <= 8'd1;
        end
        D_SEND: begin
          if (gap_q != 8'hFF) gap_q <= gap_q + 8'd1;
          if (out_ready && gap_q >= 8'(DIV_II - 1)) begin
            if (idx_q == AW'(H - 1)) begin
              st_q <= D_IDLE;
            end else begin
              idx_q <= idx_q + AW'(1);
              st_q  <= D_CALC;
            end
          end
        end
        default: ;
      endcase
    end
  end

  assign busy      = (st_q != D_IDLE);
  assign out_valid = (st_q == D_SEND) && gap_q >= 8'(DIV_II - 1);
  assign out_idx   = idx_q;

  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
                            out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_idx));

endmodule
