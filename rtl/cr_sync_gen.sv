// cr_sync_gen: synchronisation pulse source on the board that receives the
// observatory pulse-per-second (PPS).  When armed by software it emits a
// one-clock pulse on the first PPS rising edge and then on every
// period-th PPS edge; the pulse goes through a splitter to all boards,
// itself included, where it loads the timestamp counters.
//
// How it works: PPS passes a 2-flop synchroniser; a rising edge advances a
// PPS counter that wraps at period (0 is treated as 1).  Disarming resets the
// counter so the next arm again fires on the following PPS.
//
// Timing: sync_out is high for exactly one clock, 3 clocks after the PPS
// rising edge reaches the pin.
//
// From the paper: PPS input, single-cycle pulse, software-set period longer
// than one second.  Own choices: period counted in PPS edges, the arm bit.
module cr_sync_gen
  import cr_pkg::*;
#(
  parameter int unsigned PW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          pps,
  input  logic          arm,
  input  logic [PW-1:0] period,
  output logic          sync_out
);

  logic [2:0]    ps;
  logic          pps_rise;
  logic [PW-1:0] cnt;

  assign pps_rise = ps[1] & ~ps[2];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ps <= '0; cnt <= '0; sync_out <= 1'b0;
    end else begin
      ps       <= {ps[1:0], pps};
      sync_out <= 1'b0;
      if (!arm) cnt <= '0;
      else if (pps_rise) begin
        sync_out <= (cnt == '0);
        cnt      <= (cnt + 1'b1 >= period) ? '0 : cnt + 1'b1;
      end
    end
  end

endmodule
