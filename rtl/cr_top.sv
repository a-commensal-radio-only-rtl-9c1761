// cr_top: cosmic-ray subsystem of one digitiser board (64 dipole signals).
//
// Data flow, one sample row per 196 MHz clock:
//   adc -> cable delays -+-> capture buffer (20 us circular) -> packetizer -> pkt_* stream
//                        +-> per signal: FIR, square, 4-sample sum -> threshold
//                              -> window extension -> count over antennas
//                              -> core coincidence --+
//                              -> veto coincidence --+-> RFI veto -> trigger control
// Trigger control also takes the software trigger and the one-bit ring
// input from the previous board, drives the ring output to the next board,
// stops buffer writes after the post-trigger count and starts the readout.
// The timestamp counter is loaded by the synchronisation pulse (sync_in);
// on the board that distributes that pulse, sync_out is generated from PPS.
// A register bus sets thresholds, windows, roles, coefficients and delays
// and reads the rate counters (address map in cr_regfile).
//
// Latency from the ADC pin to the core coincidence flag is delay + 8 clocks
// (1 delay line register, 1 tap register, 1 filter, 2 power, 1 threshold,
// 1 extension counter, 1 count).
//
// The chain of blocks follows the paper's trigger flowchart.  The 40 Gb
// Ethernet core, the control processor and the ADCs are outside this module:
// their signals are the ports below.
module cr_top
  import cr_pkg::*;
#(
  parameter int unsigned DEPTH     = BUF_DEPTH,
  parameter int unsigned DLY_DEP   = DLY_DEPTH,
  parameter int unsigned SPP       = 8,
  localparam int unsigned DAW      = $clog2(DLY_DEP)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // ADC samples, 64 signals
  input  logic [NSIG-1:0][SAMPLE_W-1:0] adc,
  // timing
  input  logic                       pps,
  input  logic                       sync_in,
  output logic                       sync_out,
  // inter-board trigger ring (general-purpose pins)
  input  logic                       loop_in,
  output logic                       loop_out,
  // control processor register bus
  input  logic [8:0]                 bus_addr,
  input  logic                       bus_we,
  input  logic [31:0]                bus_wdata,
  output logic [31:0]                bus_rdata,
  // packet payload stream to the 40 Gb Ethernet core
  output logic [63:0]                pkt_tdata,
  output logic                       pkt_tvalid,
  output logic                       pkt_tlast,
  input  logic                       pkt_tready,
  output logic [31:0]                dest_ip,
  output logic [15:0]                dest_port,
  // status
  output logic                       armed,
  output logic                       trig_accepted,
  output logic                       trig_vetoed,
  output logic [NCNT_W-1:0]          core_cnt,
  output logic [NCNT_W-1:0]          veto_cnt,
  output logic [1:0]                 trig_src,
  output logic                       readout_busy
);

  localparam int unsigned BAW = $clog2(DEPTH);

  cfg_t   cfg;
  stats_t st;
  logic   sw_trig, stats_clear;

  logic [NSIG-1:0][SAMPLE_W-1:0] dly;
  logic [NSIG-1:0][DAW-1:0]      dly_set;
  logic [NSIG-1:0][P_W-1:0]      pw;
  logic [NSIG-1:0]               hit, ext;
  logic                          core_coinc, veto_coinc;
  logic                          raw_trig, veto_pending;
  logic                          wr_en, ro_start, ro_done, taken;
  logic                          rd_en;
  logic [BAW-1:0]                rd_idx;
  logic [NSIG*SAMPLE_W-1:0]      rd_data;
  logic [TS_W-1:0]               ts, ts_oldest;
  logic                          synced;

  assign dest_ip   = cfg.dest_ip;
  assign dest_port = cfg.dest_port;

  cr_regfile u_regs (
    .clk, .rst_n, .bus_addr, .bus_we, .bus_wdata, .bus_rdata,
    .cfg, .sw_trig, .stats_clear, .st, .ts, .armed, .synced
  );

  for (genvar i = 0; i < NSIG; i++) begin : g_dset
    assign dly_set[i] = DAW'(cfg.delay[i]);
  end

  cr_cable_delay #(.N(NSIG), .W(SAMPLE_W), .DEPTH(DLY_DEP)) u_delay (
    .clk, .rst_n, .adc_in(adc), .delay(dly_set), .dout(dly)
  );

  for (genvar i = 0; i < NSIG; i++) begin : g_chain
    volt_t x_unused;
    cr_fir_power u_fp (
      .clk, .rst_n, .din(sample_t'(dly[i])), .coef(cfg.coef), .x(x_unused), .p(pw[i])
    );
  end

  cr_threshold_detect #(.N(NSIG)) u_thr (
    .clk, .rst_n, .p(pw), .veto_role(cfg.veto_role),
    .th_core(cfg.th_core), .th_veto(cfg.th_veto), .hit
  );

  cr_pulse_extend #(.N(NSIG)) u_ext (
    .clk, .rst_n, .hit, .veto_role(cfg.veto_role),
    .win_core(cfg.win_core), .win_veto(cfg.win_veto), .ext
  );

  cr_coincidence #(.N(NSIG)) u_coinc (
    .clk, .rst_n, .ext, .veto_role(cfg.veto_role), .n_trig(cfg.n_trig), .n_veto(cfg.n_veto),
    .core_cnt, .veto_cnt, .core_coinc, .veto_coinc
  );

  cr_rfi_veto u_veto (
    .clk, .rst_n, .enable(cfg.trig_en), .core_coinc, .veto_coinc, .win_veto(cfg.win_veto),
    .raw_trig, .vetoed(trig_vetoed), .trig(trig_accepted), .pending(veto_pending)
  );

  cr_trigger_ctrl #(.DEPTH(DEPTH)) u_tctl (
    .clk, .rst_n, .local_trig(trig_accepted), .sw_trig, .loop_in,
    .post_trig(cfg.post_trig), .loop_guard(cfg.loop_guard), .ro_done,
    .loop_out, .wr_en, .ro_start, .armed, .taken, .src(trig_src)
  );

  cr_capture_buffer #(.N(NSIG), .W(SAMPLE_W), .DEPTH(DEPTH)) u_buf (
    .clk, .rst_n, .wr_en, .din(dly), .ts, .rd_en, .rd_idx, .dout(rd_data), .ts_oldest
  );

  cr_packetizer #(.N(NSIG), .W(SAMPLE_W), .DEPTH(DEPTH), .SPP(SPP)) u_pkt (
    .clk, .rst_n, .start(ro_start), .ts_oldest, .board_id(cfg.board_id),
    .rd_en, .rd_idx, .rd_data,
    .tdata(pkt_tdata), .tvalid(pkt_tvalid), .tlast(pkt_tlast), .tready(pkt_tready),
    .busy(readout_busy), .done(ro_done)
  );

  cr_timestamp u_ts (
    .clk, .rst_n, .sync(sync_in), .load_val(cfg.ts_load), .ts, .synced
  );

  cr_sync_gen u_sync (
    .clk, .rst_n, .pps, .arm(cfg.sync_arm), .period(cfg.sync_period), .sync_out
  );

  cr_rate_stats #(.N(NSIG)) u_stats (
    .clk, .rst_n, .clear(stats_clear), .raw_trig, .vetoed(trig_vetoed), .readout(taken),
    .veto_active(veto_coinc), .not_armed(!armed), .hit, .st
  );

endmodule
