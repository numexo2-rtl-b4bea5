// lp_iir: first-order recursive low-pass filter of the trigger path.
//
// F[n] = a*E[n] + b*F[n-1], with a and b unsigned fixed-point coefficients
// carrying COEF_FRAC fractional bits (a + b = 1 gives unity gain at DC).
// The state keeps COEF_FRAC extra fractional bits so that the recursion does
// not lose small signals. The feedback product and the output are rounded to
// nearest, so the filter settles to exactly zero (no dead-band offset).
// Timing: one new input per clock, output registered, latency one clock.
//
// The recursion and the use of three such stages follow the published design.
// The published equation writes the feedback term as "- b*F[n-1]" while the
// text calls the filter a low-pass with b = 0.8/0.7/0.6; with a minus sign the
// pole would sit at -b (a high-pass), so the feedback is added here.
// Coefficient width and rounding are this design's choice.
module lp_iir #(
  parameter int IN_W      = 16,
  parameter int COEF_FRAC = 15
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic signed [IN_W-1:0]      x,
  input  logic        [COEF_FRAC:0]   a,    // unsigned, COEF_FRAC fractional bits
  input  logic        [COEF_FRAC:0]   b,
  output logic signed [IN_W-1:0]      y
);
  localparam int ST_W = IN_W + COEF_FRAC + 2;

  logic signed [ST_W-1:0] st;
  logic signed [ST_W+COEF_FRAC+1:0] fb;
  logic signed [IN_W+COEF_FRAC+1:0] ff;

  always_comb begin
    ff = x * $signed({1'b0, a});
    fb = st * $signed({1'b0, b});
  end

  always_ff @(posedge clk) begin
    if (rst) st <= '0;
    else     st <= ST_W'(ff) + ST_W'((fb + (1 <<< (COEF_FRAC-1))) >>> COEF_FRAC);
  end

  assign y = IN_W'((st + (1 <<< (COEF_FRAC-1))) >>> COEF_FRAC);
endmodule
