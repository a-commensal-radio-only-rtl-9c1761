// cr_packetizer: reads a frozen snapshot out of the capture buffer and forms
// the payloads of the UDP packets sent to the receiving computer.  The
// UDP/IP/Ethernet framing itself belongs to the 40 Gb Ethernet core that
// consumes this stream.
//
// Packet layout (64-bit words, SPP = samples per packet):
//   word 0      timestamp of the packet's first sample (clock cycles since
//               the Unix epoch)
//   word 1      {board_id[63:56], 8'h0, packet_index[47:32],
//                samples_in_packet[31:16], signals[15:0]}
//   then, for each of the SPP sample rows, N/4 words; word w of a row holds
//   signals 4w .. 4w+3, signal 4w+j sign-extended to 16 bits in bits
//   [16j+15:16j].
// A snapshot of DEPTH rows gives DEPTH/SPP packets, oldest first.
//
// How it works: a small state machine emits the two header words, then for
// each row issues a buffer read, waits the one-cycle read latency, latches
// the row and emits its N/4 words.  tvalid/tready is an AXI4-Stream style
// handshake: a word moves when both are high, and tdata/tlast hold while
// tvalid is high and tready low.  Each row costs N/4 + 2 cycles when tready
// stays high.  done pulses for one cycle after the last word.
//
// The paper states that the snapshot is sent as UDP packets carrying the
// 64-bit timestamp; the layout above is this implementation's own.
module cr_packetizer
  import cr_pkg::*;
#(
  parameter int unsigned N     = NSIG,
  parameter int unsigned W     = SAMPLE_W,
  parameter int unsigned DEPTH = BUF_DEPTH,
  parameter int unsigned SPP   = 8,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned WPR  = N / 4            // words per row
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [TS_W-1:0]    ts_oldest,
  input  logic [7:0]         board_id,
  output logic               rd_en,
  output logic [AW-1:0]      rd_idx,
  input  logic [N*W-1:0]     rd_data,
  output logic [63:0]        tdata,
  output logic               tvalid,
  output logic               tlast,
  input  logic               tready,
  output logic               busy,
  output logic               done
);

  localparam int unsigned NPKT = DEPTH / SPP;
  initial begin
    if (DEPTH % SPP != 0) $error("cr_packetizer: DEPTH must be a multiple of SPP");
    if (N % 4 != 0)       $error("cr_packetizer: N must be a multiple of 4");
  end

  typedef enum logic [2:0] {P_IDLE, P_H0, P_H1, P_FETCH, P_WAIT, P_DATA} pstate_t;
  pstate_t state;

  logic [TS_W-1:0]  ts0;
  logic [15:0]      pkt;
  logic [15:0]      srow;      // row within packet
  logic [AW-1:0]    row;       // row within snapshot
  logic [$clog2(WPR+1)-1:0] word;
  logic [N*W-1:0]   row_q;

  assign busy   = (state != P_IDLE);
  assign tvalid = (state == P_H0) || (state == P_H1) || (state == P_DATA);
  assign tlast  = (state == P_DATA) && (srow == 16'(SPP - 1)) && (32'(word) == WPR - 1);
  assign rd_en  = (state == P_FETCH);
  assign rd_idx = row;

  always_comb begin
    tdata = '0;
    unique case (state)
      P_H0:   tdata = ts0 + TS_W'(pkt) * TS_W'(SPP);
      P_H1:   tdata = {board_id, 8'h00, pkt, 16'(SPP), 16'(N)};
      P_DATA:
        for (int j = 0; j < 4; j++)
          tdata[16*j +: 16] = 16'($signed(row_q[(4*word + j)*W +: W]));
      default: tdata = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= P_IDLE; ts0 <= '0; pkt <= '0; srow <= '0; row <= '0; word <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        P_IDLE:
          if (start) begin
            ts0   <= ts_oldest;
            pkt   <= '0;
            row   <= '0;
            state <= P_H0;
          end
        P_H0: if (tready) state <= P_H1;
        P_H1: if (tready) begin state <= P_FETCH; srow <= '0; end
        P_FETCH: state <= P_WAIT;
        P_WAIT: begin
          row_q <= rd_data;
          word  <= '0;
          state <= P_DATA;
        end
        P_DATA:
          if (tready) begin
            if (32'(word) == WPR - 1) begin
              row <= row + 1'b1;
              if (srow == 16'(SPP - 1)) begin
                if (pkt == 16'(NPKT - 1)) begin
                  state <= P_IDLE;
                  done  <= 1'b1;
                end else begin
                  pkt   <= pkt + 1'b1;
                  state <= P_H0;
                end
              end else begin
                srow  <= srow + 1'b1;
                state <= P_FETCH;
              end
            end else word <= word + 1'b1;
          end
        default: state <= P_IDLE;
      endcase
    end
  end

  // Stream rule: once offered, a word stays until accepted.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (tvalid && !tready) |=> (tvalid && $stable(tdata) && $stable(tlast));
  endproperty
  a_hold: assert property (p_hold);

endmodule
