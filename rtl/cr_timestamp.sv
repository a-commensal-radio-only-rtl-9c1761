// cr_timestamp: 64-bit sample-clock timestamp shared by the boards.  On the
// synchronisation pulse the counter is loaded with the value software wrote
// beforehand (the time of that pulse in clock cycles since the Unix epoch);
// afterwards it increments once per clock.  Because every board receives the
// same pulse over equal-length cables, all boards' timestamps refer to one
// time base.  synced goes high at the first pulse.
//
// Timing: ts equals load_val in the cycle after the edge that samples sync,
// then load_val+1, load_val+2, ...
//
// From the paper: 64-bit width, load on the sync pulse, count up each clock.
// Own choice: free-running from 0 before the first pulse.
module cr_timestamp
  import cr_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sync,
  input  logic [TS_W-1:0] load_val,
  output logic [TS_W-1:0] ts,
  output logic            synced
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ts     <= '0;
      synced <= 1'b0;
    end else if (sync) begin
      ts     <= load_val;
      synced <= 1'b1;
    end else begin
      ts     <= ts + 1'b1;
    end
  end

endmodule
