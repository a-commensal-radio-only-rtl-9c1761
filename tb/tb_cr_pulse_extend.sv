// Testbench for cr_pulse_extend: sparse random hits on 8 signals, half of
// them veto antennas with a longer window.  Reference: ext[i] after edge n is
// 1 exactly when a hit was sampled at one of the edges n-win+1 .. n, with win
// the window of the signal's role.
module tb_cr_pulse_extend;
  localparam int N = 8, W = 16;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] hit, veto_role, ext;
  logic [W-1:0] win_core, win_veto;
  int checks = 0, failures = 0, n = 0;
  logic [N-1:0] hh [0:8191];

  cr_pulse_extend #(.N(N), .W(W)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) n <= n + 1;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 8192; k++) hh[k] = '0;
    hit = '0; veto_role = 8'hF0; win_core = 5; win_veto = 23;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      if (t > 2) begin
        logic [N-1:0] e;
        for (int i = 0; i < N; i++) begin
          automatic int w = veto_role[i] ? int'(win_veto) : int'(win_core);
          e[i] = 1'b0;
          for (int k = n - w + 1; k <= n; k++) if (k >= 0 && hh[k][i]) e[i] = 1'b1;
        end
        checks++;
        if (ext !== e) begin
          failures++;
          if (failures < 5) $display("n=%0d ext %b exp %b", n, ext, e);
        end
      end
      for (int i = 0; i < N; i++) hit[i] = ($urandom_range(0, 40) == 0);
      hh[n+1] = hit;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
