// trapezoid: Jordanov recursive trapezoidal shaper with pole-zero correction.
//
//   T[n] = 2T[n-1] - T[n-2] + c(E,n) - c(E,n-k) - c(E,n-k-m) + c(E,n-2k-m)
//   c(E,n) = E[n-1] - alpha*E[n-2]
//
// which is the published recursion written per tap. An exponential pulse of
// decay alpha per sample becomes a trapezoid of rise k, flat top m and height
// k times the step amplitude. The input is delayed by three circular buffers
// in series (k, m, k), giving the taps E[n], E[n-k], E[n-k-m], E[n-2k-m]; each
// tap has its own alpha multiplier (four in all) and the four corrected terms
// are summed into the double integrator.
// alpha has ALPHA_FRAC fractional bits (0.9998 -> 65523 at 16 bits); the
// corrected terms carry those bits, the integrators are ACC_W bits wide and
// wrap modulo 2^ACC_W, which is exact as long as the final trapezoid fits.
// The output t is the trapezoid scaled back to input units (times k).
// After reset the buffers are cleared (K_MAX clocks, 'ready' low) with the
// input held at zero, so the integrators start from a consistent state.
// Timing: one sample per clock; a step at the input starts the trapezoid
// 4 clocks later.
//
// The recursion, the three circular buffers and the four multipliers follow
// the published filter; the accumulator width of 48 bits (a DSP48 accumulator)
// is this design's choice, the published text states 32-bit multiplications.
module trapezoid #(
  parameter int W          = 16,
  parameter int K_MAX      = 1024,
  parameter int M_MAX      = 1024,
  parameter int ALPHA_FRAC = 16,
  parameter int ACC_W      = 48
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [$clog2(K_MAX+1)-1:0] k,
  input  logic [$clog2(M_MAX+1)-1:0] m,
  input  logic [ALPHA_FRAC-1:0]      alpha,
  input  logic signed [W-1:0]        e,
  output logic signed [ACC_W-ALPHA_FRAC-1:0] t,
  output logic                       ready
);
  localparam int CW = W + ALPHA_FRAC + 2;

  logic signed [W-1:0] tap [4];       // E[n], E[n-k], E[n-k-m], E[n-2k-m]
  logic signed [W-1:0] tap1 [4];      // delayed one sample
  logic signed [W-1:0] tap2 [4];      // delayed two samples
  logic signed [CW-1:0] corr [4];     // c terms, ALPHA_FRAC fractional bits
  logic signed [CW+1:0] sum_q;
  logic signed [ACC_W-1:0] t1, t2;
  logic rdy0, rdy1, rdy2;

  assign tap[0] = ready ? e : '0;   // zeros until the buffers are cleared
  circ_delay #(.W(W), .DEPTH(K_MAX)) u_buf_k1 (.clk, .rst, .delay(($clog2(K_MAX+1))'(k)), .x(tap[0]), .y(tap[1]), .ready(rdy0));
  circ_delay #(.W(W), .DEPTH(M_MAX)) u_buf_m  (.clk, .rst, .delay(($clog2(M_MAX+1))'(m)), .x(tap[1]), .y(tap[2]), .ready(rdy1));
  circ_delay #(.W(W), .DEPTH(K_MAX)) u_buf_k2 (.clk, .rst, .delay(($clog2(K_MAX+1))'(k)), .x(tap[2]), .y(tap[3]), .ready(rdy2));

  assign ready = rdy0 & rdy1 & rdy2;

  always_ff @(posedge clk) begin
    if (rst || !ready) begin
      for (int i = 0; i < 4; i++) begin
        tap1[i] <= '0; tap2[i] <= '0; corr[i] <= '0;
      end
      sum_q <= '0; t1 <= '0; t2 <= '0;
    end else begin
      for (int i = 0; i < 4; i++) begin
        tap1[i] <= tap[i];
        tap2[i] <= tap1[i];
        // the four alpha multipliers
        corr[i] <= (CW'(tap1[i]) <<< ALPHA_FRAC) - CW'(tap2[i] * $signed({1'b0, alpha}));
      end
      sum_q <= (CW+2)'(corr[0]) - (CW+2)'(corr[1]) - (CW+2)'(corr[2]) + (CW+2)'(corr[3]);
      t1    <= (t1 <<< 1) - t2 + ACC_W'(sum_q);
      t2    <= t1;
    end
  end

  assign t = (ACC_W-ALPHA_FRAC)'(t1 >>> ALPHA_FRAC);
endmodule
