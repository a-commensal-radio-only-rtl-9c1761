// cr_pkg: shared constants and types for the radio cosmic-ray trigger of one
// digitiser board.  The board sees 64 single-dipole signals (32 dual-polarised
// antennas) sampled at 196 MHz with 10-bit ADCs.  A sample row is all 64
// signals for one clock.  Sizes marked "paper" come from the published design
// description; the others (word widths, window counter width, delay depth,
// packet size) are choices of this implementation.
package cr_pkg;

  localparam int unsigned NSIG       = 64;    // paper: 64 signals per board
  localparam int unsigned SAMPLE_W   = 10;    // paper: 10-bit ADCs
  localparam int unsigned NTAPS      = 24;    // paper: 24-tap FIR
  localparam int unsigned SMOOTH     = 4;     // paper: 4-sample power sum
  localparam int unsigned BUF_DEPTH  = 3920;  // paper: 20 us at 196 MHz
  localparam int unsigned COEF_W     = 16;    // signed Q1.15 coefficients
  localparam int unsigned X_W        = 16;    // filtered voltage width
  localparam int unsigned P_W        = 32;    // smoothed power width
  localparam int unsigned WIN_W      = 16;    // window length registers
  localparam int unsigned DLY_DEPTH  = 2048;  // cable-delay line depth
  localparam int unsigned DLY_W      = $clog2(DLY_DEPTH);
  localparam int unsigned CNT_W      = 32;    // statistics counters
  localparam int unsigned TS_W       = 64;    // paper: 64-bit timestamp
  localparam int unsigned NCNT_W     = $clog2(NSIG + 1);

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic signed [COEF_W-1:0]   coef_t;
  typedef logic signed [X_W-1:0]      volt_t;
  typedef logic        [P_W-1:0]      power_t;

  // Software-visible configuration, produced by cr_regfile.
  typedef struct packed {
    logic [NSIG-1:0]              veto_role;   // 1 = RFI veto antenna, 0 = trigger (core) antenna
    power_t                       th_core;     // power threshold, trigger antennas
    power_t                       th_veto;     // power threshold, veto antennas
    logic [NCNT_W-1:0]            n_trig;      // trigger antennas required
    logic [NCNT_W-1:0]            n_veto;      // veto antennas required
    logic [WIN_W-1:0]             win_core;    // coincidence window, cycles
    logic [WIN_W-1:0]             win_veto;    // veto window, cycles
    logic [15:0]                  post_trig;   // samples written after a trigger
    logic [15:0]                  loop_guard;  // cycles a sent loop pulse blocks forwarding
    logic                         trig_en;     // local trigger enable
    logic [7:0]                   board_id;
    logic [15:0]                  sync_period; // PPS pulses per sync pulse
    logic                         sync_arm;    // distributing board: emit sync pulses
    logic [TS_W-1:0]              ts_load;     // time of next sync pulse, clock cycles since the Unix epoch
    logic [31:0]                  dest_ip;     // network address for the Ethernet core
    logic [15:0]                  dest_port;
    logic [NTAPS-1:0][COEF_W-1:0] coef;        // FIR coefficients (shared by all signals)
    logic [NSIG-1:0][DLY_W-1:0]   delay;       // per-signal cable delay, samples
  } cfg_t;

  // Statistics read back by software.
  typedef struct packed {
    logic [CNT_W-1:0]            n_raw_trig;   // core coincidences (before veto)
    logic [CNT_W-1:0]            n_vetoed;     // triggers cancelled by the veto
    logic [CNT_W-1:0]            n_readout;    // snapshots read out
    logic [CNT_W-1:0]            veto_dead;    // cycles with veto coincidence active
    logic [CNT_W-1:0]            ro_dead;      // cycles not armed (post-trigger, readout, refill)
    logic [NSIG-1:0][CNT_W-1:0]  n_hit;        // per-signal threshold crossings
  } stats_t;

endpackage
