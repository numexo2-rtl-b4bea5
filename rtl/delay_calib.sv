// delay_calib: automatic search of the optimal input delay of one ADC channel.
//
// With the ADC sending its programmed test pattern, the state machine steps
// the input delay through all TAPS = 32 taps (80 ps each). At every tap it
// waits SETTLE clocks, then compares COMPARE consecutive received words with
// the expected pattern; the tap passes (bit = 1) only if all of them match.
// The 32 results form a word (bit i = tap i). The optimal tap is the middle of
// the largest run of consecutive ones (for a run of even length, the lower of
// the two middle taps); the search ends with done, the word and the tap,
// and the delay is left on that tap.
// 'ok' is low when no tap passed.
// Timing: TAPS*(SETTLE+COMPARE) clocks of scanning, then TAPS clocks to find
// the run, then done.
//
// The 32-tap scan, the 32-bit result word and the median of the largest run of
// ones follow the published design; the settle and compare lengths, the
// tie-break and the tap handling are this design's choice.
module delay_calib
  import numexo2_pkg::*;
#(
  parameter int TAPS    = 32,
  parameter int SETTLE  = 16,
  parameter int COMPARE = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     start,
  input  logic [ADC_W-1:0]         pattern,     // expected test word
  input  logic [ADC_W-1:0]         rx0,         // received samples
  input  logic [ADC_W-1:0]         rx1,
  output logic [$clog2(TAPS)-1:0]  tap,         // to the input delay element
  output logic                     busy,
  output logic                     done,
  output logic                     ok,
  output logic [TAPS-1:0]          scan,
  output logic [$clog2(TAPS)-1:0]  best
);
  localparam int TW = $clog2(TAPS);
  localparam int CW = $clog2(SETTLE + COMPARE + 1);

  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_FIND} state_e;
  state_e state;

  logic [CW-1:0] cnt;
  logic          pass;
  logic [TW:0]   idx, run_start, run_len, best_start, best_len;
  logic          find_last;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE; tap <= '0; cnt <= '0; pass <= 1'b0; scan <= '0;
      busy <= 1'b0; done <= 1'b0; ok <= 1'b0; best <= '0;
      idx <= '0; run_start <= '0; run_len <= '0; best_start <= '0; best_len <= '0;
      find_last <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_SCAN; busy <= 1'b1;
          tap <= '0; cnt <= '0; pass <= 1'b1; scan <= '0;
        end
        S_SCAN: begin
          cnt <= cnt + 1'b1;
          if (cnt >= CW'(SETTLE) && (rx0 != pattern || rx1 != pattern)) pass <= 1'b0;
          if (cnt == CW'(SETTLE + COMPARE - 1)) begin
            scan[tap] <= pass && rx0 == pattern && rx1 == pattern;
            cnt  <= '0;
            pass <= 1'b1;
            if (tap == TW'(TAPS - 1)) begin
              state <= S_FIND;
              idx <= '0; run_len <= '0; best_len <= '0; best_start <= '0; run_start <= '0;
            end else begin
              tap <= tap + 1'b1;
            end
          end
        end
        S_FIND: begin
          // one tap per clock: track the current run and the largest one
          if (scan[idx[TW-1:0]]) begin
            if (run_len == 0) run_start <= idx;
            run_len <= run_len + 1'b1;
            if (run_len + 1'b1 > best_len) begin
              best_len   <= run_len + 1'b1;
              best_start <= (run_len == 0) ? idx : run_start;
            end
          end else begin
            run_len <= '0;
          end
          idx <= idx + 1'b1;
          if (idx == (TW+1)'(TAPS - 1)) begin
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
      // result, one clock after the last tap has been examined
      find_last <= (state == S_FIND) && (idx == (TW+1)'(TAPS - 1));
      if (find_last) begin
        best <= TW'(best_start + ((best_len - 1'b1) >> 1));
        tap  <= TW'(best_start + ((best_len - 1'b1) >> 1));   // left on the chosen tap
        ok   <= (best_len != 0);
        done <= 1'b1;
        busy <= 1'b0;
      end
    end
  end
endmodule
