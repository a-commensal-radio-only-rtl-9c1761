// Testbench for cr_sync_gen: PPS modelled as a 5-cycle-high pulse every 100
// clocks (a scaled second).  Unarmed: no sync.  Armed with period 3: a
// one-cycle sync 3 clocks after the first PPS rising edge and then on every
// third PPS.  Period 0 behaves as 1.  Re-arming restarts on the next PPS.
module tb_cr_sync_gen;
  localparam int SEC = 100;
  logic clk = 0, rst_n = 0, pps, arm, sync_out;
  logic [15:0] period;
  int checks = 0, failures = 0, cyc = 0;
  int pps_edges [$];
  int syncs [$];

  cr_sync_gen dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (sync_out) syncs.push_back(cyc);
  end
  // PPS rises when cyc % SEC == 50 (driven at the negedge)
  always @(negedge clk) begin
    pps <= ((cyc % SEC) >= 50) && ((cyc % SEC) < 55);
    if ((cyc % SEC) == 50) pps_edges.push_back(cyc);
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_syncs(int first_pps_idx, int per, int npps);
    // syncs expected on PPS edges first, first+per, ... within npps edges
    int e = 0;
    for (int i = first_pps_idx; i < first_pps_idx + npps; i += per) begin
      checks++;
      if (e >= syncs.size() || syncs[e] != pps_edges[i] + 3) begin
        failures++;
        $display("sync %0d: got %0d exp %0d", e, (e < syncs.size()) ? syncs[e] : -1, pps_edges[i] + 3);
      end
      e++;
    end
    checks++;
    if (syncs.size() != e) begin failures++; $display("%0d syncs, expected %0d", syncs.size(), e); end
  endtask

  initial begin
    arm = 0; period = 3; pps = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3 * SEC) @(negedge clk);
    checks++;
    if (syncs.size() != 0) begin failures++; $display("sync while unarmed"); end
    // arm between PPS edges
    while ((cyc % SEC) != 80) @(negedge clk);
    arm = 1;
    begin
      automatic int first = pps_edges.size();
      repeat (10 * SEC) @(negedge clk);
      expect_syncs(first, 3, 10);
    end
    arm = 0; @(negedge clk); syncs.delete();
    while ((cyc % SEC) != 80) @(negedge clk);
    period = 0; arm = 1;
    begin
      automatic int first = pps_edges.size();
      repeat (4 * SEC) @(negedge clk);
      expect_syncs(first, 1, 4);
    end
    // one cycle wide
    checks++;
    for (int i = 1; i < syncs.size(); i++) if (syncs[i] == syncs[i-1] + 1) begin failures++; break; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
