// cr_pulse_extend: stretches each signal's threshold hit over the coincidence
// window, so that hits on different antennas that fall within one window
// overlap in time and can be counted together.  Trigger antennas use the
// core window (light travel time across the core radius); veto antennas use
// the longer veto window (light travel across the whole array).
//
// How it works: a per-signal down-counter is loaded with the window length on
// every hit and counts down to zero; ext[i] is 1 while the counter is
// non-zero.  A hit sampled at edge n keeps ext high after edges n .. n+win-1
// (win cycles; a later hit restarts the window).
//
// Extension by the window length is the paper's method; the counter
// realisation is a choice of this implementation.
module cr_pulse_extend
  import cr_pkg::*;
#(
  parameter int unsigned N = NSIG,
  parameter int unsigned W = WIN_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  hit,
  input  logic [N-1:0]  veto_role,
  input  logic [W-1:0]  win_core,
  input  logic [W-1:0]  win_veto,
  output logic [N-1:0]  ext
);

  logic [W-1:0] cnt [N];

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (!rst_n)           cnt[i] <= '0;
      else if (hit[i])      cnt[i] <= veto_role[i] ? win_veto : win_core;
      else if (cnt[i] != 0) cnt[i] <= cnt[i] - 1'b1;
    end
  end

  always_comb
    for (int i = 0; i < N; i++) ext[i] = (cnt[i] != '0);

endmodule
