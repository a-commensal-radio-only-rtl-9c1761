// Testbench for cr_coincidence: random extended-hit patterns and roles on 64
// signals, thresholds around the counts (the paper's 8 and 3 among them).
// Reference: $countones of the masked patterns and >= comparison, one cycle
// after the inputs are sampled.
module tb_cr_coincidence;
  localparam int N = 64, CW = 7;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] ext, veto_role;
  logic [CW-1:0] n_trig, n_veto, core_cnt, veto_cnt;
  logic core_coinc, veto_coinc;
  int checks = 0, failures = 0, ncore = 0, nveto = 0;

  cr_coincidence #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ext = '0; veto_role = '0; n_trig = 8; n_veto = 3;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int cc, vc;
      veto_role = '0;
      for (int i = 0; i < N; i++) veto_role[i] = ($urandom_range(0, 7) == 0);
      for (int i = 0; i < N; i++) ext[i] = ($urandom_range(0, 99) < (t % 25));
      n_trig = (t % 3 == 0) ? 8 : CW'($urandom_range(0, 20));
      n_veto = (t % 3 == 0) ? 3 : CW'($urandom_range(0, 6));
      cc = $countones(ext & ~veto_role);
      vc = $countones(ext & veto_role);
      @(negedge clk);
      checks += 4;
      if (int'(core_cnt) != cc) failures++;
      if (int'(veto_cnt) != vc) failures++;
      if (core_coinc !== (cc >= int'(n_trig))) failures++;
      if (veto_coinc !== (vc >= int'(n_veto))) failures++;
      ncore += core_coinc; nveto += veto_coinc;
    end
    checks++;
    if (ncore == 0 || nveto == 0 || ncore == 2000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
