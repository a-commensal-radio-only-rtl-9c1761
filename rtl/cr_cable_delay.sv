// cr_cable_delay: per-signal programmable delay that lines up the 64 ADC
// timeseries so that a plane wave from the zenith reaches every signal at the
// same sample despite different cable and fibre lengths.
//
// How it works: every signal has its own circular RAM of DEPTH samples.  All
// RAMs share one write pointer; signal i is read at (write pointer - 1 -
// delay[i]).  The read happens before the write of the same clock, so any
// delay from 0 to DEPTH-1 is valid.
//
// Interface and timing: one sample row per clock on adc_in.  The row sampled
// at clock edge n reappears on dout for signal i after edge n + 1 + delay[i].
// Delays may change at any time; the output is then briefly a mix of old and
// new alignment.
//
// The paper gives the function (delay compensation before the trigger and
// buffer, initial values from cable lengths); the RAM structure and the depth
// of 2048 samples (10.4 us) are choices of this implementation.
module cr_cable_delay
  import cr_pkg::*;
#(
  parameter int unsigned N     = NSIG,
  parameter int unsigned W     = SAMPLE_W,
  parameter int unsigned DEPTH = DLY_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0][W-1:0]  adc_in,
  input  logic [N-1:0][AW-1:0] delay,
  output logic [N-1:0][W-1:0]  dout
);

  logic [W-1:0]  mem [N][DEPTH];
  logic [AW-1:0] wp;

  always_ff @(posedge clk) begin
    if (!rst_n) wp <= '0;
    else        wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
  end

  // Read address wraps modulo DEPTH (DEPTH need not be a power of two).
  function automatic logic [AW-1:0] rd_addr(input logic [AW-1:0] p, input logic [AW-1:0] d);
    logic [AW:0] a;
    a = {1'b0, p} + AW'(DEPTH) - 1'b1 - {1'b0, d};
    if (a >= (AW+1)'(DEPTH)) a = a - (AW+1)'(DEPTH);
    return a[AW-1:0];
  endfunction

  for (genvar i = 0; i < N; i++) begin : g_lane
    always_ff @(posedge clk) begin
      dout[i]       <= mem[i][rd_addr(wp, delay[i])];
      mem[i][wp]    <= adc_in[i];
    end
  end

endmodule
