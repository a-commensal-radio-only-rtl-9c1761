// cr_coincidence: sums the extended hits over antennas.  core_cnt counts the
// trigger (core) antennas whose extended hit is high, veto_cnt the veto
// antennas.  core_coinc is set when core_cnt >= n_trig and veto_coinc when
// veto_cnt >= n_veto (the paper's operating point: 8 and 3).
//
// Timing: one register stage; ext sampled at edge n gives counts and flags
// after edge n.
//
// Summing across dipoles and the two coincidence thresholds are from the
// paper.  The paper words the trigger rule both as "more than a threshold
// number" and as "eight dipoles ... to trigger" (>= 8 of 64); the registers
// here hold the number required, so the test is >=.
module cr_coincidence
  import cr_pkg::*;
#(
  parameter int unsigned N  = NSIG,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  ext,
  input  logic [N-1:0]  veto_role,
  input  logic [CW-1:0] n_trig,
  input  logic [CW-1:0] n_veto,
  output logic [CW-1:0] core_cnt,
  output logic [CW-1:0] veto_cnt,
  output logic          core_coinc,
  output logic          veto_coinc
);

  logic [CW-1:0] c_core, c_veto;

  always_comb begin
    c_core = '0;
    c_veto = '0;
    for (int i = 0; i < N; i++) begin
      if (ext[i] &&  veto_role[i]) c_veto += 1'b1;
      if (ext[i] && !veto_role[i]) c_core += 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      core_cnt <= '0; veto_cnt <= '0; core_coinc <= 1'b0; veto_coinc <= 1'b0;
    end else begin
      core_cnt   <= c_core;
      veto_cnt   <= c_veto;
      core_coinc <= c_core >= n_trig;
      veto_coinc <= c_veto >= n_veto;
    end
  end

endmodule
