// cr_fir_power: per-signal front end of the trigger.  A 24-tap FIR bandpass
// filter removes narrow-band interference (the paper places a null at 27 MHz
// and rejects the FM band and below 30 MHz), the filtered voltage is squared,
// and four consecutive squares are summed:  p[n] = x[n]^2 + ... + x[n-3]^2.
//
// How it works: a 24-sample shift register feeds a direct-form multiply-add.
// The sum is shifted right by 15 (coefficients are signed Q1.15).  With
// 10-bit samples and 24 taps |x| <= 24 * 512 < 2^15, so 16 bits always hold
// the result and no saturation is needed; for the same reason the sum of
// four squares stays below 2^30.  The square goes into a 4-deep shift register whose
// entries are added.  Coefficients come from software registers and are
// shared by all signals of the board.
//
// Timing: with din sampled at edge n, x after edge n+1 is the filter output
// for sample n, and p after edge n+3 is the sum of the squares of the filter
// outputs for samples n-3 .. n.
//
// From the paper: 24 taps, squaring, 4-sample moving sum.  Own choices:
// coefficient format, output scaling, pipelining; the
// coefficient values are not printed in the paper.
module cr_fir_power
  import cr_pkg::*;
#(
  parameter int unsigned TAPS  = NTAPS,
  parameter int unsigned SUMN  = SMOOTH,
  parameter int unsigned FRAC  = COEF_W - 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  sample_t                       din,
  input  logic [TAPS-1:0][COEF_W-1:0]   coef,
  output volt_t                         x,
  output power_t                        p
);

  localparam int unsigned ACC_W = SAMPLE_W + COEF_W + $clog2(TAPS);

  sample_t                  taps [TAPS];
  logic signed [ACC_W-1:0]  acc, acc_s;
  logic        [P_W-1:0]    sq   [SUMN];
  logic        [P_W-1:0]    psum;

  always_comb begin
    acc = '0;
    for (int k = 0; k < TAPS; k++)
      acc += ACC_W'(taps[k]) * ACC_W'($signed(coef[k]));
    acc_s = acc >>> FRAC;
  end

  always_comb begin
    psum = '0;
    for (int k = 0; k < SUMN; k++) psum += sq[k];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) taps[k] <= '0;
      for (int k = 0; k < SUMN; k++) sq[k]   <= '0;
      x <= '0;
      p <= '0;
    end else begin
      taps[0] <= din;
      for (int k = 1; k < TAPS; k++) taps[k] <= taps[k-1];
      x <= volt_t'(acc_s);
      sq[0] <= P_W'(x * x);
      for (int k = 1; k < SUMN; k++) sq[k] <= sq[k-1];
      p <= psum;
    end
  end

endmodule
