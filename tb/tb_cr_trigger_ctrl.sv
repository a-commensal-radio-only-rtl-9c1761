// Testbench for cr_trigger_ctrl with a 32-row buffer.  Checks: arming only
// after DEPTH samples; local trigger -> taken, source 0, loop_out pulse,
// writes continue for post_trig+1 cycles (post_trig = 30) then stop with ro_start; re-arm
// DEPTH cycles after ro_done; a loop pulse returning within the guard is not
// forwarded, one arriving later is forwarded (loop_out 3 edges after loop_in) and starts
// a snapshot with source 2; software trigger gives source 1; triggers while
// not armed are ignored.
module tb_cr_trigger_ctrl;
  localparam int DEPTH = 32;
  logic clk = 0, rst_n = 0;
  logic local_trig, sw_trig, loop_in, ro_done;
  logic [15:0] post_trig, loop_guard;
  logic loop_out, wr_en, ro_start, armed, taken;
  logic [1:0] src;
  int checks = 0, failures = 0, cyc = 0, n_loop_out = 0;

  cr_trigger_ctrl #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin cyc <= cyc + 1; n_loop_out <= n_loop_out + int'(loop_out); end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  task automatic wait_armed(output int cycles);
    cycles = 0;
    while (!armed) begin @(negedge clk); cycles++; end
  endtask

  // Run a snapshot after the trigger cycle: count write cycles until ro_start.
  task automatic finish_snapshot(int exp_post);
    int w = 0;
    while (!ro_start) begin @(negedge clk); w++; if (w > 1000) break; end
    chk(w == exp_post + 1, $sformatf("post-trigger cycles %0d exp %0d", w, exp_post + 1));
    chk(!wr_en, "writes stopped in readout");
    repeat (7) begin @(negedge clk); chk(!wr_en && !armed, "held in readout"); end
    ro_done = 1; @(negedge clk); ro_done = 0;
  endtask

  initial begin
    int c;
    local_trig = 0; sw_trig = 0; loop_in = 0; ro_done = 0;
    post_trig = 30; loop_guard = 20;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // trigger while filling is ignored
    @(negedge clk); local_trig = 1; @(negedge clk); local_trig = 0;
    chk(!taken, "no snapshot while filling");
    wait_armed(c);
    chk(c + 2 == DEPTH, $sformatf("armed after %0d cycles", c + 2));
    chk(wr_en, "writing while armed");
    // local trigger
    local_trig = 1; @(negedge clk); local_trig = 0;
    chk(taken && src == 2'd0, "local snapshot taken");
    chk(loop_out, "loop pulse sent on local trigger");
    // own pulse comes back round the ring after 8 cycles: absorbed
    repeat (7) @(negedge clk);
    begin
      automatic int lo0 = n_loop_out;
      loop_in = 1; @(negedge clk); loop_in = 0; repeat (6) @(negedge clk);
      chk(n_loop_out == lo0, "returning pulse absorbed within guard");
    end
    finish_snapshot(30 - 14);  // 14 cycles of the post count already passed
    wait_armed(c);
    chk(c == DEPTH, $sformatf("re-armed %0d cycles after readout", c));
    // loop trigger from another board: forwarded and taken
    begin
      automatic int lo0 = n_loop_out, lat = 0;
      loop_in = 1; @(negedge clk); loop_in = 0;
      while (!loop_out) begin @(negedge clk); lat++; if (lat > 10) break; end
      chk(lat == 2, $sformatf("forward latency %0d edges", lat + 1));
      chk(taken && src == 2'd2, "loop snapshot with source 2");
      finish_snapshot(30);
    end
    wait_armed(c);
    // software trigger
    sw_trig = 1; @(negedge clk); sw_trig = 0;
    chk(taken && src == 2'd1, "software snapshot with source 1");
    chk(loop_out, "loop pulse on software trigger");
    // a pulse from elsewhere after the guard expired is forwarded even while busy
    repeat (25) @(negedge clk);
    begin
      automatic int lo0 = n_loop_out;
      loop_in = 1; @(negedge clk); loop_in = 0; repeat (6) @(negedge clk);
      chk(n_loop_out == lo0 + 1, "pulse forwarded after guard while busy");
    end
    ro_done = 1; @(negedge clk); ro_done = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
