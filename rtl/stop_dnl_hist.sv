// stop_dnl_hist: code-density histogram of the STOP fine time (Tstop).
//
// STOP edges that are not correlated with the clock fall with equal
// probability on the 32 positions of the oversampled period. Counting how
// often each position Tstop = 0..31 is measured therefore shows the
// differential non-linearity of the 3.2 GS/s sampler: a narrow position
// (short delay between two of the eight sampling phases) collects fewer hits,
// a missing code none at all. DNL(i) = count(i) * 32 / total - 1.
// Every 32-bit pattern from stop_oversampler that holds a one-to-zero
// transition (the first one, with the last bit of the previous pattern as
// the sample before bit 31) adds one to the counter of its position. Counters
// saturate at their maximum; 'clear' zeroes them, 'enable' gates counting.
// Interface: rd_addr selects the counter shown on rd_count; total counts all
// hits. Timing: a pattern is counted on the clock after it is presented; the
// registered read port answers one clock after rd_addr.
//
// The 32-bin Tstop spectrum as the image of the DNL measured at boot follows
// the published design; how the measured DNL is then used to correct the
// phase relationships is not described, so no correction is applied here.
module stop_dnl_hist #(
  parameter int CW = 24                    // counter width
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          clear,
  input  logic          enable,
  input  logic [31:0]   pattern,           // bit 31 = earliest sample
  input  logic [4:0]    rd_addr,
  output logic [CW-1:0] rd_count,
  output logic [CW+4:0] total
);
  logic [CW-1:0] cnt [32];
  logic          prev_bit, found;
  logic [4:0]    pos;

  always_comb begin
    found = 1'b0;
    pos   = '0;
    for (int i = 31; i >= 0; i--) begin
      if (!found && ((i == 31) ? prev_bit : pattern[i+1]) && !pattern[i]) begin
        found = 1'b1;
        pos   = 5'(31 - i);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      for (int i = 0; i < 32; i++) cnt[i] <= '0;
      total    <= '0;
      prev_bit <= 1'b1;
      rd_count <= '0;
    end else begin
      prev_bit <= pattern[0];
      if (enable && found && cnt[pos] != '1) begin
        cnt[pos] <= cnt[pos] + 1'b1;
        total    <= total + 1'b1;
      end
      rd_count <= cnt[rd_addr];
    end
  end
endmodule
