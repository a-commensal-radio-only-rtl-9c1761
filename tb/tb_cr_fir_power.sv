// Testbench for cr_fir_power: random 10-bit samples and random Q1.15
// coefficients (one phase with full-scale coefficients and inputs for the largest output).
// Reference: direct evaluation of x[k] = (sum_j c[j]*d[k-j]) >>> 15
// and p = sum of four consecutive x^2.  x after edge n must equal the
// filter output for the sample taken at edge n-1; p after edge n the sum of
// the squares for samples n-6 .. n-3.
module tb_cr_fir_power;
  import cr_pkg::*;
  logic clk = 0, rst_n = 0;
  sample_t din;
  logic [NTAPS-1:0][COEF_W-1:0] coef;
  volt_t  x;
  power_t p;
  int checks = 0, failures = 0, n = 0, nsat = 0;
  longint hist [0:8191];
  longint xr   [0:8191];

  cr_fir_power dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) n <= n + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint xref(int k);
    longint acc = 0;
    for (int j = 0; j < NTAPS; j++)
      acc += (k - j >= 0 ? hist[k-j] : 0) * longint'($signed(coef[j]));
    acc = acc >>> 15;
    return acc;
  endfunction

  initial begin
    for (int k = 0; k < 8192; k++) hist[k] = 0;
    din = '0;
    for (int j = 0; j < NTAPS; j++) coef[j] = COEF_W'($urandom_range(0, 65535)) >>> 2;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      if (n >= 1) xr[n-1] = xref(n-1);
      if (t > 40) begin
        longint pe;
        checks++;
        if (longint'(x) != xr[n-1]) begin
          failures++;
          if (failures < 10) $display("x mismatch n=%0d got %0d exp %0d", n, x, xr[n-1]);
        end
        pe = 0;
        for (int j = 0; j < 4; j++) pe += xr[n-3-j] * xr[n-3-j];
        checks++;
        if (longint'(p) != pe) begin
          failures++;
          if (failures < 10) $display("p mismatch n=%0d got %0d exp %0d", n, p, pe);
        end
        if (xr[n-1] > 12000 || xr[n-1] < -12000) nsat++;
      end
      if (t == 3000)
        for (int j = 0; j < NTAPS; j++) coef[j] = (j % 2) ? 16'h7fff : 16'h8001;
      din = sample_t'($urandom);
      if (t > 3000 && t < 3200) din = (t % 2) ? 10'sd511 : -10'sd512;
      hist[n+1] = longint'(din);
    end
    checks++;
    if (nsat == 0) begin failures++; $display("full-scale output never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
