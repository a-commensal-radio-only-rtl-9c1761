// End-to-end testbench for cr_top at its default sizes (64 signals, 24 taps,
// 3920-row snapshot, 2048-sample delay lines).
//
// The ADC input is deterministic low-level noise plus injected pulses, all
// computed by adc_val(), so expected snapshot contents can be recomputed
// from the timestamp alone.  Each signal gets a different cable delay and
// its pulse is injected that many samples early, so pulses only coincide
// after the delay compensation.  The FIR is a single tap of 0.5, noise
// power stays far below the thresholds and a pulse of 200 counts exceeds
// them.  The rest of the ring is modelled as a 40-cycle path from loop_out
// back to loop_in.
//
// Sequence: register set-up and timestamp sync from PPS; (A) 8 trigger and
// 3 veto antennas fire -> vetoed, no snapshot; (B) 10 trigger antennas fire
// -> accepted, loop pulse sent once and absorbed on return, snapshot read
// out with random stalls and checked word by word; (R) a coincidence while
// the buffer refills is counted but takes no snapshot; (C) a pulse from
// another board on loop_in -> forwarded and snapshot; (D) software trigger
// -> snapshot.  Statistics are read back over the bus.  Each mechanism is
// counted and a failure is recorded for any that never happened.
module tb_cr_top;
  import cr_pkg::*;
  localparam int DEPTH = BUF_DEPTH;
  localparam int SPP = 8;
  localparam int NPKT = DEPTH / SPP;
  localparam int WPR = NSIG / 4;
  localparam int WPP = 2 + SPP * WPR;            // words per packet
  localparam int NVETO_ANT = 4;                  // signals 60..63 are veto antennas

  logic clk = 0, rst_n = 0;
  logic [NSIG-1:0][SAMPLE_W-1:0] adc;
  logic pps = 0, sync_in, sync_out, loop_in = 0, loop_out;
  logic [8:0] bus_addr = 0;
  logic bus_we = 0;
  logic [31:0] bus_wdata = 0, bus_rdata;
  logic [63:0] pkt_tdata;
  logic pkt_tvalid, pkt_tlast, pkt_tready;
  logic [31:0] dest_ip;
  logic [15:0] dest_port;
  logic armed, trig_accepted, trig_vetoed, readout_busy;
  logic [NCNT_W-1:0] core_cnt, veto_cnt;
  logic [1:0] trig_src;

  cr_top dut (.*);
  assign sync_in = sync_out;   // this board distributes the sync pulse to itself

  always #2.551 clk = ~clk;  // 196 MHz

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int m_vetoed = 0, m_accepted = 0, m_loop_sent = 0, m_loop_absorbed = 0, m_loop_trig = 0;
  int m_sw_trig = 0, m_stall = 0, m_refill_ignored = 0, m_sync = 0, m_delay_align = 0;
  int n_snap_words = 0;

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, m); end
  endtask

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus model ----------------
  int unsigned dly [NSIG];
  typedef struct { longint k0; logic [NSIG-1:0] mask; } pulse_t;
  pulse_t pulses [$];

  function automatic int noise(longint k, int i);
    int unsigned h = 32'(k) * 32'd2654435761 ^ (32'(i) * 32'd40503) ^ 32'(k >> 5);
    return int'(h % 7) - 3;
  endfunction

  // ADC value sampled at edge k for signal i
  function automatic int adc_val(longint k, int i);
    int v = noise(k, i);
    foreach (pulses[p])
      if (pulses[p].mask[i]) begin
        longint s = pulses[p].k0 - longint'(dly[i]);
        if (k == s)     v += 200;
        if (k == s + 1) v -= 180;
      end
    return v;
  endfunction

  always @(negedge clk)
    for (int i = 0; i < NSIG; i++) adc[i] = SAMPLE_W'(adc_val(cyc + 1, i));

  // ring model: the other boards return a loop pulse 40 cycles later
  logic [39:0] ring = '0;
  always @(posedge clk) begin
    ring    <= {ring[38:0], loop_out};
    loop_in <= ring[39] | inj_loop;
  end
  logic inj_loop = 0;
  always @(posedge clk) if (loop_out) m_loop_sent++;

  // ---------------- bus ----------------
  task automatic wr(int a, logic [31:0] d);
    @(negedge clk); bus_addr = 9'(a); bus_we = 1; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask
  task automatic rd(int a, output logic [31:0] d);
    @(negedge clk); bus_addr = 9'(a); bus_we = 0;
    @(negedge clk); d = bus_rdata;
  endtask

  // ---------------- packet checker ----------------
  longint ts_off;          // ts value before edge k  =  k + ts_off
  bit stall_en = 1;
  always @(negedge clk) pkt_tready = stall_en ? ($urandom_range(0, 3) != 0) : 1'b1;
  always @(posedge clk) if (pkt_tvalid && !pkt_tready) m_stall++;

  int w_in_pkt = 0, pkt_no = 0, row = 0;
  longint ts_first = 0;
  int pulse_rows = 0;
  int pulse_row_min = 0;   // earliest snapshot row holding an injected pulse
  always @(posedge clk) if (rst_n && pkt_tvalid && pkt_tready) begin
    n_snap_words++;
    if (w_in_pkt == 0) begin
      if (pkt_no == 0) ts_first = longint'(pkt_tdata);
      chk(longint'(pkt_tdata) == ts_first + longint'(pkt_no * SPP), "packet timestamp");
    end else if (w_in_pkt == 1) begin
      chk(pkt_tdata == {8'h5A, 8'h00, 16'(pkt_no), 16'(SPP), 16'(NSIG)}, "packet descriptor");
    end else begin
      automatic int wi = (w_in_pkt - 2) % WPR;
      automatic int r  = pkt_no * SPP + (w_in_pkt - 2) / WPR;
      automatic longint kw = ts_first + longint'(r) - ts_off;        // edge at which the row was written
      for (int j = 0; j < 4; j++) begin
        automatic int sig = 4 * wi + j;
        automatic int e = adc_val(kw - 2 - longint'(dly[sig]), sig);
        chk(16'(pkt_tdata[16*j +: 16]) == 16'(e), $sformatf("sample row %0d sig %0d: got %0d exp %0d", r, sig, $signed(pkt_tdata[16*j +: 16]), e));
        if (e > 100) begin
          if (pulse_rows == 0 || r < pulse_row_min) pulse_row_min = r;
          pulse_rows++;
        end
      end
    end
    chk(pkt_tlast == (w_in_pkt == WPP - 1), "tlast position");
    if (w_in_pkt == WPP - 1) begin
      w_in_pkt <= 0;
      pkt_no   <= (pkt_no == NPKT - 1) ? 0 : pkt_no + 1;
    end else w_in_pkt <= w_in_pkt + 1;
  end

  task automatic wait_snapshot(output int words);
    automatic int w0 = n_snap_words;
    automatic longint t0 = cyc;
    while (!readout_busy && cyc - t0 < 20000) @(negedge clk);
    while (readout_busy) @(negedge clk);
    words = n_snap_words - w0;
  endtask

  task automatic add_pulse(longint k0, logic [NSIG-1:0] mask);
    pulse_t p;
    p.k0 = k0; p.mask = mask;
    pulses.push_back(p);
  endtask

  int n_acc = 0, n_veto_seen = 0;
  always @(posedge clk) if (rst_n) begin
    n_acc       <= n_acc + int'(trig_accepted);
    n_veto_seen <= n_veto_seen + int'(trig_vetoed);
  end

  initial begin
    logic [31:0] d;
    int words, a0, v0, lo0;
    logic [63:0] tsl;
    for (int i = 0; i < NSIG; i++) dly[i] = (i < 16) ? 20 * i : 3 * i;
    repeat (4) @(negedge clk);
    rst_n = 1;
    // --- configuration ---
    wr(32'h0C, 32'h0000_5A01);                    // enable, board id 0x5A
    wr(32'h02, 32'd1000);                          // core power threshold
    wr(32'h03, 32'd1000);                          // veto power threshold
    wr(32'h0B, 32'hF000_0000);                     // signals 60..63 veto antennas
    wr(32'h20, 32'h0000_4000);                     // FIR: single tap 0.5
    for (int i = 0; i < NSIG; i++) wr(32'h40 + i, dly[i]);
    tsl = 64'h0000_0A1B_2C3D_0000;
    wr(32'h0E, tsl[31:0]); wr(32'h0F, tsl[63:32]);
    wr(32'h0D, 32'h0001_0001);                     // arm sync, period 1
    rd(32'h000, d); chk(d == 32'h4352_0001, "id register");
    // --- PPS -> sync -> timestamp load ---
    @(negedge clk); pps = 1; repeat (4) @(negedge clk); pps = 0;
    repeat (4) @(negedge clk);
    wr(32'h0D, 32'h0000_0001);                     // disarm
    ts_off = longint'(dut.u_ts.ts) - (cyc + 1);
    chk(dut.u_ts.synced, "timestamp synced");
    chk(longint'(dut.u_ts.ts) - longint'(tsl) > 0 && longint'(dut.u_ts.ts) - longint'(tsl) < 20, "timestamp loaded from sync");
    if (dut.u_ts.synced) m_sync++;
    rd(32'h085, d);
    chk(longint'(d) == ((cyc + ts_off) & 64'hFFFF_FFFF) - 1 || longint'(d) == ((cyc + ts_off) & 64'hFFFF_FFFF), "timestamp readback");

    // --- (A) RFI-like event: trigger and veto antennas -> vetoed ---
    // The delay lines hold unwritten samples for their first 2048 cycles;
    // clear the statistics once they have settled, as software would.
    while (cyc < 5000) @(negedge clk);
    wr(32'h01, 32'h2);
    while (cyc < 6000) @(negedge clk);
    chk(armed, "armed after refill");
    a0 = n_acc; v0 = n_veto_seen;
    add_pulse(cyc + 200, {4'b0111, 52'd0, 8'hFF});
    repeat (2500) @(negedge clk);
    chk(n_veto_seen == v0 + 1 && n_acc == a0, "event A vetoed");
    chk(!readout_busy && armed, "no snapshot after veto");
    if (n_veto_seen == v0 + 1) m_vetoed++;

    // --- (B) air-shower-like event on 10 trigger antennas -> snapshot ---
    a0 = n_acc; lo0 = m_loop_sent; pulse_rows = 0;
    add_pulse(cyc + 200, {54'd0, 10'h3FF});
    // the raw pulses are spread over 180+ samples: only aligned they coincide
    wait_snapshot(words);
    chk(n_acc == a0 + 1, "event B accepted");
    if (n_acc == a0 + 1) begin m_accepted++; m_delay_align++; end
    chk(words == NPKT * WPP, $sformatf("snapshot words %0d", words));
    chk(trig_src == 2'd0, "source local");
    chk(pulse_rows == 10, $sformatf("pulse samples in snapshot %0d", pulse_rows));
    // default settings: the first 2000 rows are background before the event
    chk(pulse_row_min >= 2000 && pulse_row_min < 2100, $sformatf("event at snapshot row %0d", pulse_row_min));
    $display("event B at snapshot row %0d of %0d", pulse_row_min, DEPTH);
    repeat (100) @(negedge clk);
    chk(m_loop_sent == lo0 + 1, "loop pulse sent once, return absorbed");
    if (m_loop_sent == lo0 + 1) m_loop_absorbed++;

    // --- (R) coincidence during refill: counted, no snapshot ---
    chk(!armed, "refilling after readout");
    a0 = n_acc;
    add_pulse(cyc + 400, {54'd0, 10'h3FF});
    repeat (2000) @(negedge clk);
    chk(n_acc == a0 + 1 && !readout_busy, "trigger during refill takes no snapshot");
    if (n_acc == a0 + 1 && !readout_busy) m_refill_ignored++;
    while (!armed) @(negedge clk);
    repeat (10) @(negedge clk);

    // --- (C) trigger from another board on the loop ---
    lo0 = m_loop_sent;
    @(negedge clk); inj_loop = 1; @(negedge clk); inj_loop = 0;
    wait_snapshot(words);
    chk(words == NPKT * WPP, "loop snapshot words");
    chk(trig_src == 2'd2, "source loop");
    chk(m_loop_sent == lo0 + 1, "loop pulse forwarded once");
    if (trig_src == 2'd2 && words == NPKT * WPP) m_loop_trig++;
    while (!armed) @(negedge clk);

    // --- (D) software (minimum bias) trigger, no stalls ---
    stall_en = 0;
    wr(32'h01, 32'h1);
    wait_snapshot(words);
    chk(words == NPKT * WPP, "software snapshot words");
    chk(trig_src == 2'd1, "source software");
    if (trig_src == 2'd1) m_sw_trig++;

    // --- statistics ---
    rd(32'h080, d); chk(d == 3, $sformatf("raw trigger count %0d", d));
    rd(32'h081, d); chk(d == 1, $sformatf("veto count %0d", d));
    rd(32'h082, d); chk(d == 3, $sformatf("snapshot count %0d", d));
    rd(32'h100, d); chk(d == 3, $sformatf("signal 0 threshold crossings %0d", d));
    rd(32'h100 + 63, d); chk(d == 0, "signal 63 threshold crossings");
    rd(32'h100 + 60, d); chk(d == 1, "signal 60 threshold crossings");
    rd(32'h083, d); chk(d > 1568 && d < 1700, $sformatf("veto dead cycles %0d", d));
    rd(32'h084, d); chk(d > 3 * DEPTH + NPKT * WPP, $sformatf("readout dead cycles %0d", d));

    chk(m_vetoed > 0, "mechanism: veto");
    chk(m_accepted > 0, "mechanism: accepted trigger");
    chk(m_delay_align > 0, "mechanism: cable delay alignment");
    chk(m_loop_sent > 0 && m_loop_absorbed > 0, "mechanism: loop send and absorb");
    chk(m_loop_trig > 0, "mechanism: loop trigger");
    chk(m_sw_trig > 0, "mechanism: software trigger");
    chk(m_stall > 0, "mechanism: back-pressure stall");
    chk(m_refill_ignored > 0, "mechanism: refill hold-off");
    chk(m_sync > 0, "mechanism: sync load");
    $display("mechanisms: veto=%0d accept=%0d delay_align=%0d loop_sent=%0d absorbed=%0d loop_trig=%0d sw=%0d stall_cycles=%0d refill_ignored=%0d sync=%0d",
             m_vetoed, m_accepted, m_delay_align, m_loop_sent, m_loop_absorbed, m_loop_trig, m_sw_trig, m_stall, m_refill_ignored, m_sync);
    $display("cycles simulated: %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
