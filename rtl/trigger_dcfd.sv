// trigger_dcfd: trigger differentiator, threshold and digital constant
// fraction discriminator of one channel.
//
//   S[n]    = F[n] - alpha*F[n-1]              (differentiation, alpha in Q1.15)
//   dCFD[n] = S[n-D] - (frac/10)*S[n]          (D in 10 ns samples, frac in 10 % steps)
//
// Leading-edge mode (cfd_en = 0): a trigger request is issued on the clock
// where S first reaches the threshold. CFD mode (cfd_en = 1): S reaching the
// threshold arms the discriminator, and the trigger request is issued on the
// negative-to-positive zero crossing of dCFD, within ARM_CYCLES of arming.
// The CFD value is computed multiplied by ten, 10*S[n-D] - frac*S[n], which has
// the same zero crossing and needs no division.
// The request is a one-clock (10 ns) pulse, followed by a dead time of
// DEAD_CYCLES clocks (50 ns) during which no other request is produced;
// inhibit (BUSY, validation gate) suppresses requests.
// With each request the two values around the crossing are given out (y0 < 0
// <= y1) for the sub-sample interpolation; in leading-edge mode they are
// S - threshold before and at the crossing.
// Timing: S and dCFD are registered; trig is registered and refers to the
// sample of the clock before it.
//
// The equations, the 10 ns / 10 % steps, the 10 ns request and the 50 ns
// dead time follow the published design; the arming rule, the arming window
// and the widths are this design's choice.
module trigger_dcfd #(
  parameter int W           = 16,
  parameter int D_MAX       = 15,
  parameter int DEAD_CYCLES = 5,
  parameter int ARM_CYCLES  = 32,
  parameter int Y_W         = W + 6
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic signed [W-1:0]   f,         // filtered signal F[n]
  input  logic        [15:0]    alpha,     // Q1.15
  input  logic signed [W-1:0]   threshold,
  input  logic                  cfd_en,
  input  logic [$clog2(D_MAX+1)-1:0] delay, // D, 1..D_MAX samples
  input  logic [3:0]            frac,      // F in tenths, 0..10
  input  logic                  inhibit,
  output logic signed [W-1:0]   s,         // differentiated signal (for inspection)
  output logic                  trig,
  output logic signed [Y_W-1:0] y0,
  output logic signed [Y_W-1:0] y1
);
  logic signed [W-1:0] f_d;
  logic signed [W+17:0] prod;
  logic signed [W-1:0] s_hist [D_MAX+1];      // s_hist[0] = S[n]
  logic signed [Y_W-1:0] cfd, cfd_d, lev, lev_d;
  logic armed;
  logic [$clog2(ARM_CYCLES+1)-1:0] arm_cnt;
  logic [$clog2(DEAD_CYCLES+1)-1:0] dead_cnt;
  logic s_above, s_above_d, fire;

  assign prod = f_d * $signed({1'b0, alpha});
  assign s    = s_hist[0];

  always_ff @(posedge clk) begin
    if (rst) begin
      f_d <= '0;
      for (int i = 0; i <= D_MAX; i++) s_hist[i] <= '0;
    end else begin
      f_d <= f;
      s_hist[0] <= W'(f - W'(prod >>> 15));
      for (int i = 1; i <= D_MAX; i++) s_hist[i] <= s_hist[i-1];
    end
  end

  // 10*dCFD and the leading-edge level, both combinational on the S history
  always_comb begin
    cfd = Y_W'(10) * Y_W'(s_hist[delay]) - Y_W'($signed({1'b0, frac})) * Y_W'(s_hist[0]);
    lev = Y_W'(s_hist[0]) - Y_W'(threshold);
    s_above = (s_hist[0] >= threshold);
    if (cfd_en) fire = armed && (cfd_d < 0) && (cfd >= 0);
    else        fire = s_above && !s_above_d;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cfd_d <= '0; lev_d <= '0; s_above_d <= 1'b1;
      armed <= 1'b0; arm_cnt <= '0; dead_cnt <= '0;
      trig <= 1'b0; y0 <= '0; y1 <= '0;
    end else begin
      cfd_d     <= cfd;
      lev_d     <= lev;
      s_above_d <= s_above;
      trig      <= 1'b0;
      if (dead_cnt != 0) dead_cnt <= dead_cnt - 1'b1;

      if (s_above && !s_above_d && !armed) begin
        armed   <= 1'b1;
        arm_cnt <= '0;
      end else if (armed) begin
        arm_cnt <= arm_cnt + 1'b1;
        if (arm_cnt == ($clog2(ARM_CYCLES+1))'(ARM_CYCLES - 1)) armed <= 1'b0;
      end

      if (fire && dead_cnt == 0 && !inhibit) begin
        trig     <= 1'b1;
        dead_cnt <= ($clog2(DEAD_CYCLES+1))'(DEAD_CYCLES - 1);
        armed    <= 1'b0;
        y0       <= cfd_en ? cfd_d : lev_d;
        y1       <= cfd_en ? cfd   : lev;
      end else if (fire && cfd_en) begin
        armed    <= 1'b0;
      end
    end
  end
endmodule
