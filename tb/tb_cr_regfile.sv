// Testbench for cr_regfile: checks reset values, writes and read-back of
// every configuration register, that each write lands in the right cfg
// field (coefficients sign-extended on read), that software trigger and
// statistics clear are single-cycle pulses, and that statistics, timestamp
// and status are readable at their addresses.
module tb_cr_regfile;
  import cr_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [8:0] bus_addr;
  logic bus_we;
  logic [31:0] bus_wdata, bus_rdata;
  cfg_t cfg;
  logic sw_trig, stats_clear, armed, synced;
  stats_t st;
  logic [63:0] ts;
  int checks = 0, failures = 0, n_sw = 0, n_clr = 0;

  cr_regfile dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin n_sw <= n_sw + int'(sw_trig); n_clr <= n_clr + int'(stats_clear); end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, logic [31:0] d);
    bus_addr = 9'(a); bus_we = 1; bus_wdata = d; @(negedge clk); bus_we = 0;
  endtask
  task automatic rd(int a, output logic [31:0] d);
    bus_addr = 9'(a); bus_we = 0; @(negedge clk); d = bus_rdata;
  endtask
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    logic [31:0] d;
    bus_addr = 0; bus_we = 0; bus_wdata = 0; armed = 1; synced = 0; ts = 64'h1234_5678_9abc_def0;
    st = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    rd(0, d); chk(d == 32'h4352_0001, "id");
    chk(cfg.n_trig == 8 && cfg.n_veto == 3, "reset coincidence numbers 8/3");
    chk(cfg.win_core == 65 && cfg.win_veto == 1568, "reset windows");
    chk(cfg.th_core == '1 && cfg.th_veto == '1, "reset thresholds");
    chk(cfg.trig_en && cfg.veto_role == '0, "reset enable/roles");
    chk(cfg.post_trig == 300 && cfg.loop_guard == 256, "reset post-trigger count and loop guard");
    wr(2, 32'd4321);  chk(cfg.th_core == 4321, "th_core");
    wr(3, 32'd777);   chk(cfg.th_veto == 777, "th_veto");
    wr(4, 32'd9);     chk(cfg.n_trig == 9, "n_trig");
    wr(5, 32'd2);     chk(cfg.n_veto == 2, "n_veto");
    wr(6, 32'd70);    chk(cfg.win_core == 70, "win_core");
    wr(7, 32'd1600);  chk(cfg.win_veto == 1600, "win_veto");
    wr(8, 32'd100);   chk(cfg.post_trig == 100, "post_trig");
    wr(9, 32'd33);    chk(cfg.loop_guard == 33, "loop_guard");
    wr(10, 32'hF000_000F); wr(11, 32'h8000_0001);
    chk(cfg.veto_role == 64'h8000_0001_F000_000F, "veto roles");
    wr(12, 32'h0000_2A00); chk(!cfg.trig_en && cfg.board_id == 8'h2A, "enable/board id");
    wr(13, 32'h0001_0005); chk(cfg.sync_arm && cfg.sync_period == 5, "sync settings");
    wr(14, 32'hDEAD_BEEF); wr(15, 32'h0000_0001); chk(cfg.ts_load == 64'h1_DEAD_BEEF, "ts_load");
    wr(16, 32'h0A00_0001); wr(17, 32'd4015); chk(cfg.dest_ip == 32'h0A00_0001 && cfg.dest_port == 4015, "network");
    for (int k = 0; k < NTAPS; k++) wr(32 + k, 32'(k * 1000 - 9000));
    for (int k = 0; k < NTAPS; k++) begin
      chk($signed(cfg.coef[k]) == 16'(k * 1000 - 9000), $sformatf("coef %0d", k));
      rd(32 + k, d); chk(d == 32'(k * 1000 - 9000), $sformatf("coef %0d readback", k));
    end
    for (int i = 0; i < NSIG; i++) wr(64 + i, 32'((i * 37) % 2048));
    for (int i = 0; i < NSIG; i++) begin
      chk(cfg.delay[i] == DLY_W'((i * 37) % 2048), $sformatf("delay %0d", i));
      rd(64 + i, d); chk(d == 32'((i * 37) % 2048), "delay readback");
    end
    rd(2, d); chk(d == 4321, "th_core readback");
    rd(7, d); chk(d == 1600, "win_veto readback");
    rd(11, d); chk(d == 32'h8000_0001, "role readback");
    rd(13, d); chk(d == 32'h0001_0005, "sync readback");
    wr(1, 32'h1); wr(1, 32'h2); @(negedge clk);
    chk(n_sw == 1 && n_clr == 1, $sformatf("control pulses sw=%0d clr=%0d", n_sw, n_clr));
    st.n_raw_trig = 11; st.n_vetoed = 22; st.n_readout = 33; st.veto_dead = 44; st.ro_dead = 55;
    for (int i = 0; i < NSIG; i++) st.n_hit[i] = 32'(1000 + i);
    rd(128, d); chk(d == 11, "raw trig count");
    rd(129, d); chk(d == 22, "veto count");
    rd(130, d); chk(d == 33, "readout count");
    rd(131, d); chk(d == 44, "veto dead");
    rd(132, d); chk(d == 55, "readout dead");
    rd(133, d); chk(d == 32'h9abc_def0, "ts lo");
    rd(134, d); chk(d == 32'h1234_5678, "ts hi");
    for (int i = 0; i < NSIG; i++) begin rd(256 + i, d); chk(d == 32'(1000 + i), "hit count"); end
    synced = 1; armed = 0; rd(1, d); chk(d == 32'h2, "status");
    rd(200, d); chk(d == 0, "unmapped reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
