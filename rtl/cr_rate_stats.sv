// cr_rate_stats: rate-monitoring counters read by software to tune the
// thresholds (trigger, veto and readout rates, veto and readout dead time,
// and how often each antenna crosses its power threshold).  Software reads
// the counts twice and divides the difference by the elapsed time.
//
// Counters: raw triggers (core coincidences before the veto), vetoed
// triggers, snapshots taken, cycles with the veto coincidence active (veto
// dead time), cycles not armed (readout dead time), and per-signal rising
// edges of the threshold hit.  clear zeroes all of them.  Counters wrap.
//
// Timing: each input is counted in the cycle it is sampled; counts are
// visible after the next edge.
//
// The list of statistics follows the paper; counting events and cycles (not
// rates) is a choice of this implementation.
module cr_rate_stats
  import cr_pkg::*;
#(
  parameter int unsigned N = NSIG
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         raw_trig,
  input  logic         vetoed,
  input  logic         readout,
  input  logic         veto_active,
  input  logic         not_armed,
  input  logic [N-1:0] hit,
  output stats_t       st
);

  logic [N-1:0] hit_d;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      st    <= '0;
      hit_d <= '0;
    end else begin
      hit_d <= hit;
      if (raw_trig)    st.n_raw_trig <= st.n_raw_trig + 1'b1;
      if (vetoed)      st.n_vetoed   <= st.n_vetoed + 1'b1;
      if (readout)     st.n_readout  <= st.n_readout + 1'b1;
      if (veto_active) st.veto_dead  <= st.veto_dead + 1'b1;
      if (not_armed)   st.ro_dead    <= st.ro_dead + 1'b1;
      for (int i = 0; i < N; i++)
        if (hit[i] && !hit_d[i]) st.n_hit[i] <= st.n_hit[i] + 1'b1;
    end
  end

endmodule
