// scalers: 48-bit counting scales of one board.
//
// For every channel it counts trigger requests, events with valid energy (DV)
// and events flagged not valid (DNV); their ratio gives the fraction of
// triggers with a usable energy at a given rate. Counters wrap at 2^48 and are
// cleared by clear. Timing: an increment pulse is counted at the next clock.
//
// The 48-bit counting scales of triggers and valid energies follow the
// published design; the split into three counters per channel is this
// design's choice.
module scalers #(
  parameter int N = 16,
  parameter int W = 48
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         clear,
  input  logic [N-1:0] inc_trig,
  input  logic [N-1:0] inc_dv,
  input  logic [N-1:0] inc_dnv,
  output logic [W-1:0] cnt_trig [N],
  output logic [W-1:0] cnt_dv   [N],
  output logic [W-1:0] cnt_dnv  [N]
);
  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (rst || clear) begin
        cnt_trig[i] <= '0; cnt_dv[i] <= '0; cnt_dnv[i] <= '0;
      end else begin
        if (inc_trig[i]) cnt_trig[i] <= cnt_trig[i] + 1'b1;
        if (inc_dv[i])   cnt_dv[i]   <= cnt_dv[i] + 1'b1;
        if (inc_dnv[i])  cnt_dnv[i]  <= cnt_dnv[i] + 1'b1;
      end
    end
  end
endmodule
