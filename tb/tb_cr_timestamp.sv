// Testbench for cr_timestamp: before a sync pulse the counter free-runs from
// 0 with synced low; a sync pulse loads the software value (seen the cycle
// after) and the count then rises by exactly one per clock; a second pulse
// reloads.  Reference: expected value tracked in the testbench.
module tb_cr_timestamp;
  logic clk = 0, rst_n = 0, sync, synced;
  logic [63:0] load_val, ts, expv;
  int checks = 0, failures = 0;

  cr_timestamp dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sync = 0; load_val = 64'h0006_3A1B_2C3D_4E5F;
    repeat (2) @(negedge clk);
    rst_n = 1;
    expv = 0;
    for (int k = 0; k < 10; k++) begin
      @(negedge clk); expv++;
      checks += 2;
      if (ts !== expv) failures++;
      if (synced) failures++;
    end
    for (int round = 0; round < 3; round++) begin
      sync = 1; @(negedge clk); sync = 0;
      expv = load_val;
      checks += 2;
      if (ts !== expv) begin failures++; $display("load: got %h exp %h", ts, expv); end
      if (!synced) failures++;
      for (int k = 0; k < 500; k++) begin
        @(negedge clk); expv++;
        checks++;
        if (ts !== expv) begin failures++; if (failures < 5) $display("count: got %h exp %h", ts, expv); end
      end
      load_val = {$urandom, $urandom};
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
