// moving_sum: recursive moving sum over the last N = 2^log2n samples.
//
//   Sum[i] = Sum[i-1] + E[i] - E[i-N]
//
// The sum is updated with one addition and one subtraction per sample, so its
// cost does not grow with N; E[i-N] comes from a short delay line of N_MAX
// registers. 'avg' is the sum scaled by 1/N (its significant bits).
// Timing: the sum is registered; after a clock edge 'sum' includes the sample
// presented before that edge. After reset the first N outputs are partial
// sums; log2n is a setting and must only change while rst is high.
//
// The recursion follows the published TAC processing; N_MAX = 2^LOG2N_MAX and
// the register delay line are this design's choice.
module moving_sum #(
  parameter int W         = 32,
  parameter int LOG2N_MAX = 8
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic [$clog2(LOG2N_MAX+1)-1:0] log2n,
  input  logic signed [W-1:0]            x,
  output logic signed [W+LOG2N_MAX-1:0]  sum,
  output logic signed [W-1:0]            avg
);
  localparam int NMAX = 1 << LOG2N_MAX;

  logic signed [W-1:0] hist [NMAX];   // hist[j] = E[i-1-j]
  logic signed [W-1:0] x_old;

  assign x_old = hist[(1 << log2n) - 1];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int j = 0; j < NMAX; j++) hist[j] <= '0;
      sum <= '0;
    end else begin
      hist[0] <= x;
      for (int j = 1; j < NMAX; j++) hist[j] <= hist[j-1];
      sum <= sum + (W+LOG2N_MAX)'(x) - (W+LOG2N_MAX)'(x_old);
    end
  end

  assign avg = W'(sum >>> log2n);
endmodule
