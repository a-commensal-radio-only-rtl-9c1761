// Testbench for cr_packetizer: 8 signals, a 16-row snapshot, 4 rows per
// packet.  A behavioural buffer answers reads one cycle later.  The stream
// is collected (first with tready always high, then with random stalls) and
// compared word by word with the layout built independently here: header
// timestamp and descriptor, then 2 words per row of four sign-extended
// samples; tlast on the last word of each packet; done once at the end.
// With tready high the readout must take NPKT*(2 + SPP*(N/4 + 2)) cycles.
module tb_cr_packetizer;
  localparam int N = 8, W = 10, DEPTH = 16, SPP = 4, AW = 4, WPR = N / 4;
  localparam int NPKT = DEPTH / SPP;
  localparam int NWORDS = NPKT * (2 + SPP * WPR);
  logic clk = 0, rst_n = 0;
  logic start, rd_en, tvalid, tlast, tready, busy, done;
  logic [63:0] ts_oldest, tdata;
  logic [7:0] board_id;
  logic [AW-1:0] rd_idx;
  logic [N*W-1:0] rd_data;
  logic [N*W-1:0] snap [DEPTH];
  logic [63:0] expw [NWORDS];
  bit          expl [NWORDS];
  int checks = 0, failures = 0;

  cr_packetizer #(.N(N), .W(W), .DEPTH(DEPTH), .SPP(SPP)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rd_en) rd_data <= snap[rd_idx];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic build_expected();
    int k = 0;
    for (int pk = 0; pk < NPKT; pk++) begin
      expw[k] = ts_oldest + 64'(pk * SPP); expl[k] = 0; k++;
      expw[k] = {board_id, 8'h00, 16'(pk), 16'(SPP), 16'(N)}; expl[k] = 0; k++;
      for (int r = 0; r < SPP; r++)
        for (int w = 0; w < WPR; w++) begin
          logic [63:0] v = '0;
          for (int j = 0; j < 4; j++) begin
            logic signed [W-1:0] s = snap[pk*SPP + r][(4*w + j)*W +: W];
            v[16*j +: 16] = 16'(s);
          end
          expw[k] = v; expl[k] = (r == SPP - 1) && (w == WPR - 1); k++;
        end
    end
  endtask

  task automatic run(bit stalls);
    int k = 0, cycles = 0, ndone = 0;
    for (int r = 0; r < DEPTH; r++) snap[r] = {$urandom, $urandom, $urandom};
    ts_oldest = {$urandom, $urandom}; board_id = 8'($urandom);
    build_expected();
    start = 1; @(negedge clk); start = 0;
    while (k < NWORDS && cycles < 5000) begin
      tready = stalls ? ($urandom_range(0, 2) != 0) : 1'b1;
      #1;
      if (tvalid && tready) begin
        checks += 2;
        if (tdata !== expw[k]) begin
          failures++;
          if (failures < 6) $display("word %0d got %h exp %h", k, tdata, expw[k]);
        end
        if (tlast !== expl[k]) failures++;
        k++;
      end
      @(negedge clk); cycles++;
      ndone += done;
    end
    tready = 1;
    repeat (3) begin @(negedge clk); ndone += done; end
    checks += 2;
    if (ndone != 1) begin failures++; $display("done pulses %0d", ndone); end
    if (busy) begin failures++; $display("still busy"); end
    if (!stalls) begin
      checks++;
      if (cycles != NPKT * (2 + SPP * (WPR + 2))) begin
        failures++; $display("readout took %0d cycles, expected %0d", cycles, NPKT * (2 + SPP * (WPR + 2)));
      end
    end
  endtask

  initial begin
    start = 0; tready = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(0);
    run(1);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
