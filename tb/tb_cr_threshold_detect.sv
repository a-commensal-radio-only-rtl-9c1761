// Testbench for cr_threshold_detect: random powers, roles and thresholds,
// including powers equal to the threshold (must not count as a hit).
// Reference: hit[i] = p[i] > (veto_role[i] ? th_veto : th_core), one cycle
// after the inputs are sampled.
module tb_cr_threshold_detect;
  import cr_pkg::*;
  localparam int N = NSIG;
  logic clk = 0, rst_n = 0;
  logic [N-1:0][P_W-1:0] p;
  logic [N-1:0] veto_role, hit, exp_hit;
  power_t th_core, th_veto;
  int checks = 0, failures = 0;

  cr_threshold_detect dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    p = '0; veto_role = '0; th_core = '1; th_veto = '1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      th_core = $urandom_range(0, 1000);
      th_veto = $urandom_range(0, 1000);
      veto_role = {$urandom, $urandom};
      for (int i = 0; i < N; i++) begin
        case ($urandom_range(0, 3))
          0: p[i] = veto_role[i] ? th_veto : th_core;
          1: p[i] = (veto_role[i] ? th_veto : th_core) + 1;
          default: p[i] = $urandom_range(0, 1000);
        endcase
        exp_hit[i] = p[i] > (veto_role[i] ? th_veto : th_core);
      end
      @(negedge clk);
      checks++;
      if (hit !== exp_hit) begin
        failures++;
        if (failures < 5) $display("t=%0d hit %h exp %h", t, hit, exp_hit);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
