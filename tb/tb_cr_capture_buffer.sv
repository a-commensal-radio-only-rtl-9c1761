// Testbench for cr_capture_buffer with 20 rows (not a power of two) of 4
// signals.  Rows are written with random data and increasing timestamps for
// a random number of cycles (always more than the depth, so the pointer has
// wrapped), writing stops, and every index is read back.  Reference: the
// last 20 rows written, oldest at index 0; ts_oldest = timestamp of the row
// at index 0 (the timestamp advances by one per written row, as it does in
// the design, where writes pause only for a readout followed by a refill).  Repeated with pauses in writing.
module tb_cr_capture_buffer;
  localparam int N = 4, W = 10, DEPTH = 20, AW = 5;
  logic clk = 0, rst_n = 0;
  logic wr_en, rd_en;
  logic [N*W-1:0] din, dout;
  logic [63:0] ts, ts_oldest;
  logic [AW-1:0] rd_idx;
  int checks = 0, failures = 0;
  logic [N*W-1:0] rows [$];
  logic [63:0]    tss  [$];

  cr_capture_buffer #(.N(N), .W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; din = '0; ts = 64'd1000; rd_idx = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 12; round++) begin
      automatic int nw = $urandom_range(DEPTH + 1, 3 * DEPTH + 7);
      for (int k = 0; k < nw; k++) begin
        wr_en = ($urandom_range(0, 4) != 0) || k == nw - 1 || round == 0;
        din   = {$urandom, $urandom};
        if (wr_en) begin ts = ts + 1; end
        if (wr_en) begin rows.push_back(din); tss.push_back(ts); end
        @(negedge clk);
      end
      wr_en = 0;
      while (rows.size() > DEPTH) begin void'(rows.pop_front()); void'(tss.pop_front()); end
      for (int i = 0; i < DEPTH; i++) begin
        rd_en = 1; rd_idx = AW'(i);
        @(negedge clk);
        rd_en = 0;
        checks++;
        if (dout !== rows[i]) begin
          failures++;
          if (failures < 5) $display("round %0d idx %0d got %h exp %h", round, i, dout, rows[i]);
        end
      end
      checks++;
      if (ts_oldest !== tss[0]) begin failures++; $display("ts_oldest %0d exp %0d", ts_oldest, tss[0]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
