// cr_threshold_detect: per-signal power threshold.  hit[i] is 1 when the
// smoothed power of signal i is strictly above its threshold; trigger (core)
// antennas use th_core and RFI veto antennas use th_veto, selected by
// veto_role[i].
//
// Timing: one register stage; p sampled at edge n gives hit after edge n.
//
// The comparison p > p_th and the separate trigger and veto thresholds are
// from the paper; the register stage is a choice of this implementation.
module cr_threshold_detect
  import cr_pkg::*;
#(
  parameter int unsigned N = NSIG
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0][P_W-1:0] p,
  input  logic [N-1:0]         veto_role,
  input  power_t               th_core,
  input  power_t               th_veto,
  output logic [N-1:0]         hit
);

  always_ff @(posedge clk) begin
    if (!rst_n) hit <= '0;
    else
      for (int i = 0; i < N; i++)
        hit[i] <= p[i] > (veto_role[i] ? th_veto : th_core);
  end

endmodule
