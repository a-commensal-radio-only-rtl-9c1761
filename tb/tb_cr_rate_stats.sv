// Testbench for cr_rate_stats: random event and level inputs, with a clear in
// the middle.  Reference counters kept in the testbench: events and active
// cycles counted directly, per-signal crossings counted as 0->1 transitions
// of the hit input.
module tb_cr_rate_stats;
  import cr_pkg::*;
  localparam int N = NSIG;
  logic clk = 0, rst_n = 0;
  logic clear, raw_trig, vetoed, readout, veto_active, not_armed;
  logic [N-1:0] hit, hit_prev;
  stats_t st;
  longint e_raw, e_veto, e_ro, e_vd, e_rd;
  longint e_hit [N];
  int checks = 0, failures = 0;

  cr_rate_stats dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic zero();
    e_raw = 0; e_veto = 0; e_ro = 0; e_vd = 0; e_rd = 0;
    for (int i = 0; i < N; i++) e_hit[i] = 0;
    hit_prev = '0;
  endtask

  task automatic compare();
    checks += 5 + N;
    if (longint'(st.n_raw_trig) != e_raw)  failures++;
    if (longint'(st.n_vetoed)   != e_veto) failures++;
    if (longint'(st.n_readout)  != e_ro)   failures++;
    if (longint'(st.veto_dead)  != e_vd)   failures++;
    if (longint'(st.ro_dead)    != e_rd)   failures++;
    for (int i = 0; i < N; i++) if (longint'(st.n_hit[i]) != e_hit[i]) failures++;
  endtask

  initial begin
    {clear, raw_trig, vetoed, readout, veto_active, not_armed} = '0; hit = '0;
    zero();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      clear = (t == 1500);
      raw_trig = ($urandom_range(0, 9) == 0);
      vetoed = ($urandom_range(0, 19) == 0);
      readout = ($urandom_range(0, 29) == 0);
      veto_active = ($urandom_range(0, 3) == 0);
      not_armed = ($urandom_range(0, 1) == 0);
      for (int i = 0; i < N; i++) hit[i] = ($urandom_range(0, 5) == 0) ? ~hit[i] : hit[i];
      if (clear) zero();
      else begin
        e_raw += raw_trig; e_veto += vetoed; e_ro += readout; e_vd += veto_active; e_rd += not_armed;
        for (int i = 0; i < N; i++) if (hit[i] && !hit_prev[i]) e_hit[i]++;
        hit_prev = hit;
      end
      @(negedge clk);
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
