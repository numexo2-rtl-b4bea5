// charge_integrator: charge (energy) by summing the samples inside an
// integration window, at the full 200 MS/s rate.
//
// Each 100 MHz clock brings two samples (s0 earlier, s1 later). A trigger opens
// a window of 'pre' clocks of baseline before it and 'win' clocks after it:
// the baseline average, taken over the 'pre' clocks before the trigger, is
// subtracted from every sample in the window. The two samples of a clock are
// added in one step, so the sum covers 2*win samples.
// Timing: with the trigger at clock t0 the window covers clocks t0 .. t0+win-1;
// done pulses after the edge of clock t0+win-1 with the sum (>>> shift), clipped to 0 .. 65535.
//
// Summing the samples of an integration window at 200 MS/s is the published
// function; the baseline subtraction over a power-of-two pre-window and the
// widths are this design's choice.
module charge_integrator
  import numexo2_pkg::*;
#(
  parameter int W        = 16,
  parameter int WIN_MAX  = 255,
  parameter int LOG2_PRE = 4
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic signed [W-1:0]          s0,
  input  logic signed [W-1:0]          s1,
  input  logic                         trig,
  input  logic [$clog2(WIN_MAX+1)-1:0] win,
  input  logic [4:0]                   shift,
  output logic                         busy,
  output logic                         done,
  output logic [EN_W-1:0]              charge
);
  localparam int ACC_W = W + $clog2(WIN_MAX+1) + 2;
  localparam int PRE   = 1 << LOG2_PRE;

  logic signed [W:0]      pair;
  logic signed [W:0]      pre_hist [PRE];
  logic signed [W+LOG2_PRE:0] pre_sum;
  logic signed [W:0]      base2;          // baseline of a pair of samples
  logic signed [ACC_W-1:0] acc, acc_n;
  logic [$clog2(WIN_MAX+1)-1:0] cnt;

  assign pair = (W+1)'(s0) + (W+1)'(s1);

  always_comb acc_n = acc + ACC_W'(pair) - ACC_W'(base2);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int j = 0; j < PRE; j++) pre_hist[j] <= '0;
      pre_sum <= '0; base2 <= '0; acc <= '0; cnt <= '0;
      busy <= 1'b0; done <= 1'b0; charge <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        pre_hist[0] <= pair;
        for (int j = 1; j < PRE; j++) pre_hist[j] <= pre_hist[j-1];
        pre_sum <= pre_sum + (W+LOG2_PRE+1)'(pair) - (W+LOG2_PRE+1)'(pre_hist[PRE-1]);
      end
      if (!busy && trig && win != 0) begin
        busy  <= 1'b1;
        base2 <= (W+1)'(pre_sum >>> LOG2_PRE);
        acc   <= ACC_W'(pair) - ACC_W'(pre_sum >>> LOG2_PRE);
        cnt   <= 1;
        if (win == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          charge <= clip(ACC_W'(pair) - ACC_W'(pre_sum >>> LOG2_PRE));
        end
      end else if (busy) begin
        acc <= acc_n;
        cnt <= cnt + 1'b1;
        if (cnt == win - 1) begin
          busy   <= 1'b0;
          done   <= 1'b1;
          charge <= clip(acc_n);
        end
      end
    end
  end

  function automatic logic [EN_W-1:0] clip(logic signed [ACC_W-1:0] v);
    logic signed [ACC_W-1:0] sh;
    sh = v >>> shift;
    if (sh < 0)                        return '0;
    else if (sh > ACC_W'(32'hFFFF))    return 16'hFFFF;
    else                               return EN_W'(sh);
  endfunction
endmodule
