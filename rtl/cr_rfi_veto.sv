// cr_rfi_veto: decides whether a core coincidence becomes a trigger.  Air
// showers are beamed and light up only part of the array, while much
// impulsive interference lights up all of it; a trigger is therefore
// cancelled when enough distant veto antennas also saw a pulse.
//
// How it works: the rising edge of core_coinc (while idle and enabled)
// raises raw_trig for one cycle and opens a decision interval covering that
// cycle and the next win_veto cycles.  If veto_coinc is high in any cycle of
// the interval the trigger is cancelled (vetoed pulses), otherwise trig
// pulses.  Since veto hits are themselves stretched by win_veto cycles, veto
// hits from win_veto cycles before to win_veto cycles after the core edge
// cancel the trigger.  Core edges during an open interval are ignored.
//
// Timing: raw_trig after the edge that samples the core rising edge; trig or
// vetoed exactly win_veto + 1 cycles later.
//
// The cancel rule and the longer veto window are from the paper; the exact
// timing of the decision is a choice of this implementation.
module cr_rfi_veto
  import cr_pkg::*;
#(
  parameter int unsigned W = WIN_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enable,
  input  logic         core_coinc,
  input  logic         veto_coinc,
  input  logic [W-1:0] win_veto,
  output logic         raw_trig,
  output logic         vetoed,
  output logic         trig,
  output logic         pending
);

  logic         core_d;
  logic         seen;
  logic [W-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      core_d <= 1'b0; seen <= 1'b0; cnt <= '0; pending <= 1'b0;
      raw_trig <= 1'b0; vetoed <= 1'b0; trig <= 1'b0;
    end else begin
      core_d   <= core_coinc;
      raw_trig <= 1'b0;
      vetoed   <= 1'b0;
      trig     <= 1'b0;
      if (!pending) begin
        if (enable && core_coinc && !core_d) begin
          raw_trig <= 1'b1;
          pending  <= 1'b1;
          seen     <= veto_coinc;
          cnt      <= win_veto;
        end
      end else begin
        if (cnt == '0) begin
          pending <= 1'b0;
          vetoed  <= seen;
          trig    <= !seen;
        end else begin
          seen <= seen | veto_coinc;
          cnt  <= cnt - 1'b1;
        end
      end
    end
  end

endmodule
