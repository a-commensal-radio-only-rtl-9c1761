// Testbench for cr_cable_delay: random samples on 4 signals through a
// 16-deep delay line with random per-signal delays (changed during the run,
// including 0 and the maximum).  Reference: a history of the inputs; the
// output of signal i after clock edge n must equal the input sampled at edge
// n-1-delay[i].
module tb_cr_cable_delay;
  localparam int N = 4, W = 10, DEPTH = 16, AW = 4;
  logic clk = 0, rst_n = 0;
  logic [N-1:0][W-1:0]  adc_in;
  logic [N-1:0][AW-1:0] delay;
  logic [N-1:0][W-1:0]  dout;
  int checks = 0, failures = 0, n = 0;
  logic [W-1:0] hist [N][0:4095];

  cr_cable_delay #(.N(N), .W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) n <= n + 1;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    adc_in = '0;
    for (int i = 0; i < N; i++) delay[i] = AW'(i * 5);
    delay[3] = AW'(DEPTH - 1);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      // outputs now reflect edge n
      if (n > 3 * DEPTH + 10)
        for (int i = 0; i < N; i++) begin
          checks++;
          if (dout[i] !== hist[i][n - 1 - int'(delay[i])]) begin
            failures++;
            if (failures < 10) $display("cycle %0d sig %0d d=%0d got %0d exp %0d", n, i, delay[i], dout[i], hist[i][n-1-int'(delay[i])]);
          end
        end
      if (t % 500 == 250)
        for (int i = 0; i < N; i++) delay[i] = AW'($urandom_range(0, DEPTH - 1));
      if (t == 1000) delay[0] = '0;
      for (int i = 0; i < N; i++) begin
        adc_in[i] = W'($urandom);
        hist[i][n + 1] = adc_in[i];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
