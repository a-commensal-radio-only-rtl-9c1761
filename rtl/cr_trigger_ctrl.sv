// cr_trigger_ctrl: snapshot controller and inter-board trigger loop.
//
// The boards of the array are chained in a ring by a one-bit wire between
// general-purpose pins, so that a trigger on any board makes every board read
// out its buffer and the whole array is captured.  This block starts a
// snapshot on an accepted local trigger, a software ("minimum bias")
// trigger, or a pulse arriving on loop_in, and sends a one-cycle pulse on
// loop_out.  A received pulse is forwarded unless this board itself sent a
// pulse within the last loop_guard cycles; the board that started the pulse
// thus absorbs it when it comes back round the ring.
//
// States: FILL (buffer being filled after reset or a readout; no triggers
// until DEPTH new samples are written), ARMED, POST (a trigger was taken;
// writing continues for post_trig more samples so the event sits inside the
// snapshot), READOUT (writes stopped, packetizer running until ro_done).
//
// Timing: loop_in passes a 2-flop synchroniser; its rising edge is seen 3
// cycles after it arrives and, if forwarded, loop_out pulses the next cycle.
// wr_en is low exactly while in READOUT.
//
// From the paper: the ring, the one-bit trigger, software triggers, writes
// stopping on a trigger and resuming after readout.  Own choices: the guard
// rule that ends circulation, the post-trigger count, the refill wait.
module cr_trigger_ctrl
  import cr_pkg::*;
#(
  parameter int unsigned DEPTH = BUF_DEPTH
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        local_trig,
  input  logic        sw_trig,
  input  logic        loop_in,
  input  logic [15:0] post_trig,
  input  logic [15:0] loop_guard,
  input  logic        ro_done,
  output logic        loop_out,
  output logic        wr_en,
  output logic        ro_start,
  output logic        armed,
  output logic        taken,      // one cycle: a snapshot was started
  output logic [1:0]  src         // cause of the last snapshot: 0 local, 1 software, 2 loop
);

  typedef enum logic [1:0] {S_FILL, S_ARMED, S_POST, S_READOUT} state_t;
  state_t state;

  logic [2:0]  lsync;
  logic        loop_rise;
  logic [15:0] guard;
  logic [15:0] cnt;

  assign loop_rise = lsync[1] & ~lsync[2];
  assign wr_en     = (state != S_READOUT);
  assign armed     = (state == S_ARMED);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_FILL; lsync <= '0; guard <= '0; cnt <= '0;
      loop_out <= 1'b0; ro_start <= 1'b0; taken <= 1'b0; src <= '0;
    end else begin
      lsync    <= {lsync[1:0], loop_in};
      loop_out <= 1'b0;
      ro_start <= 1'b0;
      taken    <= 1'b0;
      if (guard != 0) guard <= guard - 1'b1;

      // Forward a pulse coming round the ring (independent of local state).
      if (loop_rise && guard == 0) begin
        loop_out <= 1'b1;
        guard    <= loop_guard;
      end

      unique case (state)
        S_FILL: begin
          if (cnt == 16'(DEPTH - 1)) begin
            state <= S_ARMED;
            cnt   <= '0;
          end else cnt <= cnt + 1'b1;
        end
        S_ARMED: begin
          if (local_trig || sw_trig || loop_rise) begin
            state <= S_POST;
            cnt   <= '0;
            taken <= 1'b1;
            src   <= local_trig ? 2'd0 : sw_trig ? 2'd1 : 2'd2;
            if (local_trig || sw_trig) begin
              loop_out <= 1'b1;
              guard    <= loop_guard;
            end
          end
        end
        S_POST: begin
          if (cnt >= post_trig) begin
            state    <= S_READOUT;
            ro_start <= 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        S_READOUT: begin
          if (ro_done) begin
            state <= S_FILL;
            cnt   <= '0;
          end
        end
        default: state <= S_FILL;
      endcase
    end
  end

endmodule
