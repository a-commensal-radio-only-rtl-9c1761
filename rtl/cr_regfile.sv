// cr_regfile: control and status registers of the cosmic-ray subsystem,
// written and read by the board's control processor over a simple 32-bit
// word bus (one access per clock; read data one clock after the address).
//
// Word address map:
//   0x000  R   identification 0x43520001
//   0x001  W   control: bit0 software trigger (pulse), bit1 clear statistics
//              (pulse); R: bit0 armed, bit1 timestamp synced
//   0x002  RW  power threshold, trigger antennas
//   0x003  RW  power threshold, veto antennas
//   0x004  RW  trigger antennas required          (reset 8)
//   0x005  RW  veto antennas required             (reset 3)
//   0x006  RW  coincidence window, cycles         (reset 65)
//   0x007  RW  veto window, cycles                (reset 1568)
//   0x008  RW  post-trigger samples               (reset 300)
//   0x009  RW  loop guard, cycles                 (reset 256)
//   0x00A  RW  veto role, signals 0-31 (1 = veto antenna)
//   0x00B  RW  veto role, signals 32-63
//   0x00C  RW  bit0 trigger enable (reset 1), bits 15:8 board id
//   0x00D  RW  bits 15:0 PPS pulses per sync pulse, bit 16 arm sync
//   0x00E  RW  timestamp of next sync pulse, low word
//   0x00F  RW  timestamp of next sync pulse, high word
//   0x010  RW  destination IP address
//   0x011  RW  destination UDP port
//   0x020+k RW FIR coefficient k, k = 0..23 (signed, 16 bits)
//   0x040+i RW cable delay of signal i, samples
//   0x080..0x084 R raw triggers, vetoed, readouts, veto dead cycles,
//              readout dead cycles
//   0x085  R   timestamp low word, 0x086 high word
//   0x100+i R  threshold crossings of signal i
// Unlisted addresses read 0.
//
// Reset values: power thresholds all ones, so nothing triggers until
// software sets them; coincidence numbers 8 and 3 (the paper's operating
// point); windows 65 and 1568 cycles (light travel over the 100 m core
// radius and the 2.4 km array at 196 MHz); post-trigger count 300, which
// with the default veto window puts the event near row 2040 of the 3920-row
// snapshot (about 10 cycles of trigger latency, 1569 for the veto decision
// and 301 of post-trigger writes follow it), so that the first 2000 rows are
// background before the event; all signals trigger antennas;
// zero coefficients and delays.  The register set follows the paper's list
// of settings; the addresses and reset values are this implementation's.
module cr_regfile
  import cr_pkg::*;
#(
  parameter int unsigned N    = NSIG,
  parameter int unsigned TAPS = NTAPS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [8:0]      bus_addr,
  input  logic            bus_we,
  input  logic [31:0]     bus_wdata,
  output logic [31:0]     bus_rdata,
  output cfg_t            cfg,
  output logic            sw_trig,
  output logic            stats_clear,
  input  stats_t          st,
  input  logic [TS_W-1:0] ts,
  input  logic            armed,
  input  logic            synced
);

  initial begin
    if (N != NSIG || TAPS != NTAPS) $error("cr_regfile: sizes must match cr_pkg");
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cfg             <= '0;
      cfg.th_core     <= '1;
      cfg.th_veto     <= '1;
      cfg.n_trig      <= NCNT_W'(8);
      cfg.n_veto      <= NCNT_W'(3);
      cfg.win_core    <= WIN_W'(65);
      cfg.win_veto    <= WIN_W'(1568);
      cfg.post_trig   <= 16'd300;
      cfg.loop_guard  <= 16'd256;
      cfg.trig_en     <= 1'b1;
      cfg.sync_period <= 16'd1;
      sw_trig         <= 1'b0;
      stats_clear     <= 1'b0;
    end else begin
      sw_trig     <= 1'b0;
      stats_clear <= 1'b0;
      if (bus_we) begin
        unique casez (bus_addr)
          9'h001: begin sw_trig <= bus_wdata[0]; stats_clear <= bus_wdata[1]; end
          9'h002: cfg.th_core   <= bus_wdata;
          9'h003: cfg.th_veto   <= bus_wdata;
          9'h004: cfg.n_trig    <= bus_wdata[NCNT_W-1:0];
          9'h005: cfg.n_veto    <= bus_wdata[NCNT_W-1:0];
          9'h006: cfg.win_core  <= bus_wdata[WIN_W-1:0];
          9'h007: cfg.win_veto  <= bus_wdata[WIN_W-1:0];
          9'h008: cfg.post_trig <= bus_wdata[15:0];
          9'h009: cfg.loop_guard <= bus_wdata[15:0];
          9'h00A: cfg.veto_role[31:0]  <= bus_wdata;
          9'h00B: cfg.veto_role[63:32] <= bus_wdata;
          9'h00C: begin cfg.trig_en <= bus_wdata[0]; cfg.board_id <= bus_wdata[15:8]; end
          9'h00D: begin cfg.sync_period <= bus_wdata[15:0]; cfg.sync_arm <= bus_wdata[16]; end
          9'h00E: cfg.ts_load[31:0]  <= bus_wdata;
          9'h00F: cfg.ts_load[63:32] <= bus_wdata;
          9'h010: cfg.dest_ip   <= bus_wdata;
          9'h011: cfg.dest_port <= bus_wdata[15:0];
          9'b0001?????: if (bus_addr[4:0] < 5'(TAPS)) cfg.coef[bus_addr[4:0]] <= bus_wdata[COEF_W-1:0];
          9'b001??????: cfg.delay[bus_addr[5:0]] <= bus_wdata[DLY_W-1:0];
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) bus_rdata <= '0;
    else begin
      bus_rdata <= '0;
      unique casez (bus_addr)
        9'h000: bus_rdata <= 32'h4352_0001;
        9'h001: bus_rdata <= {30'd0, synced, armed};
        9'h002: bus_rdata <= cfg.th_core;
        9'h003: bus_rdata <= cfg.th_veto;
        9'h004: bus_rdata <= 32'(cfg.n_trig);
        9'h005: bus_rdata <= 32'(cfg.n_veto);
        9'h006: bus_rdata <= 32'(cfg.win_core);
        9'h007: bus_rdata <= 32'(cfg.win_veto);
        9'h008: bus_rdata <= 32'(cfg.post_trig);
        9'h009: bus_rdata <= 32'(cfg.loop_guard);
        9'h00A: bus_rdata <= cfg.veto_role[31:0];
        9'h00B: bus_rdata <= cfg.veto_role[63:32];
        9'h00C: bus_rdata <= {16'd0, cfg.board_id, 7'd0, cfg.trig_en};
        9'h00D: bus_rdata <= {15'd0, cfg.sync_arm, cfg.sync_period};
        9'h00E: bus_rdata <= cfg.ts_load[31:0];
        9'h00F: bus_rdata <= cfg.ts_load[63:32];
        9'h010: bus_rdata <= cfg.dest_ip;
        9'h011: bus_rdata <= 32'(cfg.dest_port);
        9'b0001?????: if (bus_addr[4:0] < 5'(TAPS)) bus_rdata <= 32'($signed(cfg.coef[bus_addr[4:0]]));
        9'b001??????: bus_rdata <= 32'(cfg.delay[bus_addr[5:0]]);
        9'h080: bus_rdata <= st.n_raw_trig;
        9'h081: bus_rdata <= st.n_vetoed;
        9'h082: bus_rdata <= st.n_readout;
        9'h083: bus_rdata <= st.veto_dead;
        9'h084: bus_rdata <= st.ro_dead;
        9'h085: bus_rdata <= ts[31:0];
        9'h086: bus_rdata <= ts[63:32];
        9'b1????????: if (bus_addr[7:6] == 2'b00) bus_rdata <= st.n_hit[bus_addr[5:0]];
        default: ;
      endcase
    end
  end

endmodule
