// trigger_filter: cascade of three first-order low-pass IIR filters that
// smooths the signal ahead of the trigger differentiator.
//
// The three stages use a = 0.2, 0.3, 0.4 and b = 0.8, 0.7, 0.6, i.e. slightly
// offset cut-off frequencies, as published. The coefficients are parameters
// in Q1.15 (0.2 -> 6554, 0.8 -> 26214, ...), rounded to the nearest code, so
// that each stage has a DC gain of exactly one. Latency: three clocks.
module trigger_filter #(
  parameter int          W  = 16,
  parameter logic [15:0] A0 = 16'd6554,   // 0.2
  parameter logic [15:0] B0 = 16'd26214,  // 0.8
  parameter logic [15:0] A1 = 16'd9830,   // 0.3
  parameter logic [15:0] B1 = 16'd22938,  // 0.7
  parameter logic [15:0] A2 = 16'd13107,  // 0.4
  parameter logic [15:0] B2 = 16'd19661   // 0.6
) (
  input  logic                clk,
  input  logic                rst,
  input  logic signed [W-1:0] e,
  output logic signed [W-1:0] f
);
  logic signed [W-1:0] f0, f1;

  lp_iir #(.IN_W(W), .COEF_FRAC(15)) u_lp0 (.clk, .rst, .x(e),  .a(A0), .b(B0), .y(f0));
  lp_iir #(.IN_W(W), .COEF_FRAC(15)) u_lp1 (.clk, .rst, .x(f0), .a(A1), .b(B1), .y(f1));
  lp_iir #(.IN_W(W), .COEF_FRAC(15)) u_lp2 (.clk, .rst, .x(f1), .a(A2), .b(B2), .y(f));
endmodule
