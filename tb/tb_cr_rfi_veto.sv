// Testbench for cr_rfi_veto: directed cases.  A core coincidence rising edge
// with no veto must give trig exactly win+1 cycles after raw_trig; a veto
// coincidence at the edge, inside the window or at its last cycle must give
// vetoed instead; a veto one cycle after the window must not cancel; a
// second core edge during a pending decision is ignored; disable blocks all.
module tb_cr_rfi_veto;
  localparam int W = 16;
  logic clk = 0, rst_n = 0;
  logic enable, core_coinc, veto_coinc;
  logic [W-1:0] win_veto;
  logic raw_trig, vetoed, trig, pending;
  int checks = 0, failures = 0;
  int n_raw = 0, n_trig = 0, n_veto = 0;

  cr_rfi_veto #(.W(W)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    n_raw  <= n_raw + int'(raw_trig);
    n_trig <= n_trig + int'(trig);
    n_veto <= n_veto + int'(vetoed);
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One case: core edge at cycle 0 held for 'hold' cycles; veto high for one
  // cycle at offset voff (relative to the core edge cycle) if voff >= 0.
  // expect_veto selects the expected outcome.
  task automatic run_case(int win, int voff, bit expect_veto, int hold = 3);
    int c_raw, out_at, raw_at;
    bit got_v, got_t;
    win_veto = W'(win);
    got_v = 0; got_t = 0; out_at = -1; raw_at = -1;
    for (int c = 0; c < win + 20; c++) begin
      core_coinc = (c >= 0 && c < hold);
      veto_coinc = (voff >= 0 && c == voff);
      @(negedge clk);
      if (raw_trig) raw_at = c;
      if (trig)   begin got_t = 1; out_at = c; end
      if (vetoed) begin got_v = 1; out_at = c; end
    end
    core_coinc = 0; veto_coinc = 0;
    checks += 3;
    if (raw_at != 0) begin failures++; $display("win %0d voff %0d: raw_trig at %0d", win, voff, raw_at); end
    if (got_v != expect_veto || got_t == expect_veto) begin
      failures++; $display("win %0d voff %0d: vetoed=%0d trig=%0d", win, voff, got_v, got_t);
    end
    if (out_at - raw_at != win + 1) begin
      failures++; $display("win %0d: decision after %0d cycles", win, out_at - raw_at);
    end
    repeat (3) @(negedge clk);
  endtask

  initial begin
    enable = 1; core_coinc = 0; veto_coinc = 0; win_veto = 10;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run_case(10, -1, 0);
    run_case(10, 0, 1);
    run_case(10, 5, 1);
    run_case(10, 10, 1);
    run_case(10, 11, 0);
    run_case(0, -1, 0);
    run_case(0, 0, 1);
    run_case(1568, -1, 0);
    run_case(1568, 1500, 1);
    for (int k = 0; k < 20; k++) begin
      automatic int w = $urandom_range(0, 40);
      automatic int v = $urandom_range(0, 60) - 10;
      run_case(w, v, (v >= 0 && v <= w));
    end
    // Second core edge during pending is ignored: one raw trigger only.
    begin
      automatic int r0 = n_raw;
      win_veto = 20;
      core_coinc = 1; @(negedge clk); core_coinc = 0; repeat (5) @(negedge clk);
      core_coinc = 1; @(negedge clk); core_coinc = 0; repeat (40) @(negedge clk);
      checks++;
      if (n_raw - r0 != 1) begin failures++; $display("re-trigger during pending counted"); end
    end
    // Disabled: nothing happens.
    begin
      automatic int r0 = n_raw;
      enable = 0;
      core_coinc = 1; repeat (3) @(negedge clk); core_coinc = 0; repeat (40) @(negedge clk);
      checks++;
      if (n_raw != r0) begin failures++; $display("disabled veto logic triggered"); end
      enable = 1;
    end
    checks++;
    if (n_raw != n_trig + n_veto) begin failures++; $display("raw %0d != trig %0d + veto %0d", n_raw, n_trig, n_veto); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
