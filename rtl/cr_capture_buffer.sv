// cr_capture_buffer: circular snapshot buffer holding the most recent DEPTH
// sample rows (20 us of all 64 delayed signals at 196 MHz, 3920 rows of 640
// bits).  While wr_en is high a row is written every clock, overwriting the
// oldest.  When writing stops, row index 0 on the read port is the oldest
// sample and DEPTH-1 the newest.
//
// The buffer also keeps the timestamp of the last row written, so the
// timestamp of the oldest row is ts_last - (DEPTH - 1).
//
// Timing: read data appear on dout one clock after rd_en.  Reading while
// writing is allowed but indexes a moving window.
//
// From the paper: 20 us depth, circular overwrite in block RAM, writes halted
// by the trigger.  Own choice: one wide row per clock.
module cr_capture_buffer
  import cr_pkg::*;
#(
  parameter int unsigned N     = NSIG,
  parameter int unsigned W     = SAMPLE_W,
  parameter int unsigned DEPTH = BUF_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic [N*W-1:0]       din,
  input  logic [TS_W-1:0]      ts,
  input  logic                 rd_en,
  input  logic [AW-1:0]        rd_idx,
  output logic [N*W-1:0]       dout,
  output logic [TS_W-1:0]      ts_oldest
);

  logic [N*W-1:0]  mem [DEPTH];
  logic [AW-1:0]   wp;          // next row to write = oldest row
  logic [TS_W-1:0] ts_last;
  logic [AW:0]     ra_full;
  logic [AW-1:0]   ra;

  always_comb begin
    ra_full = {1'b0, wp} + {1'b0, rd_idx};
    if (ra_full >= (AW+1)'(DEPTH)) ra_full = ra_full - (AW+1)'(DEPTH);
    ra = ra_full[AW-1:0];
  end

  assign ts_oldest = ts_last - TS_W'(DEPTH - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp      <= '0;
      ts_last <= '0;
    end else if (wr_en) begin
      wp      <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      ts_last <= ts;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wp] <= din;
    if (rd_en) dout    <= mem[ra];
  end

endmodule
