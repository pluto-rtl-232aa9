// pluto_row_decoder: the pLUTo-enabled row decoder's Row Sweep sequencer.
//
// A single sweep command activates rows 0 .. count-1 of the pLUTo-enabled
// subarray in order, as a self-refresh-like burst. For every row it holds the
// wordline for tRCD cycles and raises `sense` in the last of them, when the
// sense amplifiers hold the row; the row index is also given to the match
// logic. What follows depends on the row-buffer design:
//   * BSA: every activation is followed by a precharge of tRP cycles, so a
//     sweep lasts (tRCD + tRP) * count cycles.
//   * GSA / GMC: unmatched bitlines stay precharged, so activations follow each
//     other directly and one precharge closes the sweep: tRCD * count + tRP.
// Interface: start (one cycle, when !busy) with count; busy while sweeping;
// row_idx / wl_active give the open row; done pulses in the sweep's last cycle.
// A count of zero finishes in one cycle without activating anything.
// Both latency formulas are the design's; the cycle values of tRCD and tRP
// come from the evaluated DDR4-2400 timing (17 cycles each).
module pluto_row_decoder
  import pluto_pkg::*;
#(
  parameter int unsigned T_RCD  = T_RCD_DEF,
  parameter int unsigned T_RP   = T_RP_DEF,
  parameter design_e     DESIGN = DESIGN_BSA
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] count,
  output logic              busy,
  output logic [ADDR_W-1:0] row_idx,
  output logic              wl_active,
  output logic              sense,
  output logic              done
);

  typedef enum logic [1:0] {S_IDLE, S_ACT, S_PRE, S_ZERO} state_e;
  state_e            state;
  logic [15:0]       timer;
  logic [ADDR_W-1:0] remaining;

  localparam bit PRE_EACH = (DESIGN == DESIGN_BSA);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      timer     <= '0;
      remaining <= '0;
      row_idx   <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          row_idx   <= '0;
          remaining <= count;
          timer     <= 16'(T_RCD - 1);
          state     <= (count == 0) ? S_ZERO : S_ACT;
        end
        S_ZERO: state <= S_IDLE;
        S_ACT: begin
          if (timer != 0) timer <= timer - 1'b1;
          else if (PRE_EACH || remaining == 1) begin
            timer <= 16'(T_RP - 1);
            state <= S_PRE;
          end else begin
            remaining <= remaining - 1'b1;
            row_idx   <= row_idx + 1'b1;
            timer     <= 16'(T_RCD - 1);
          end
        end
        S_PRE: begin
          if (timer != 0) timer <= timer - 1'b1;
          else if (remaining == 1) state <= S_IDLE;
          else begin
            remaining <= remaining - 1'b1;
            row_idx   <= row_idx + 1'b1;
            timer     <= 16'(T_RCD - 1);
            state     <= S_ACT;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign wl_active = (state == S_ACT);
  assign sense     = (state == S_ACT) && (timer == 0);
  assign done      = (state == S_ZERO) || ((state == S_PRE) && (timer == 0) && (remaining == 1));

  initial begin
    assert (T_RCD >= 1 && T_RP >= 1) else $fatal(1, "timings must be at least one cycle");
  end

endmodule
