// cfd_interp: sub-sample position of the dCFD zero crossing by dichotomy.
//
// Given the two values around the crossing, y0 < 0 <= y1, the state machine
// halves the interval [y0, y1] STEPS times: if the midpoint is still negative
// the crossing lies in the upper half (result bit 1), otherwise in the lower
// half (bit 0). After STEPS = 10 steps the result tstart is the crossing time
// in 1/1024 of the 10 ns sample period, counted from the negative sample, with
// a resolution of 10 ns / 1024 = 97 ps, and no divider.
// Each step lasts STEP_CYCLES = 5 clocks (50 ns), so the latency from start to
// done is a fixed 50 clocks (500 ns). A start while busy restarts the search.
//
// The dichotomy, the 10 steps, the 50 ns per step and the 500 ns latency follow
// the published design; holding one step for five clocks (a multi-cycle path in
// a real implementation) is how this design reproduces that timing.
module cfd_interp #(
  parameter int Y_W         = 22,
  parameter int STEPS       = 10,
  parameter int STEP_CYCLES = 5
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  start,
  input  logic signed [Y_W-1:0] y0,
  input  logic signed [Y_W-1:0] y1,
  output logic                  busy,
  output logic                  done,
  output logic [STEPS-1:0]      tstart
);
  logic signed [Y_W:0] lo, hi, mid;
  logic [$clog2(STEPS+1)-1:0]       step;
  logic [$clog2(STEP_CYCLES+1)-1:0] cyc;

  assign mid = (lo + hi) >>> 1;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; done <= 1'b0; tstart <= '0;
      lo <= '0; hi <= '0; step <= '0; cyc <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy   <= 1'b1;
        lo     <= (Y_W+1)'(y0);
        hi     <= (Y_W+1)'(y1);
        step   <= '0;
        cyc    <= '0;
        tstart <= '0;
      end else if (busy) begin
        if (cyc == ($clog2(STEP_CYCLES+1))'(STEP_CYCLES - 1)) begin
          cyc <= '0;
          if (mid < 0) begin
            lo     <= mid;
            tstart <= {tstart[STEPS-2:0], 1'b1};
          end else begin
            hi     <= mid;
            tstart <= {tstart[STEPS-2:0], 1'b0};
          end
          if (step == ($clog2(STEPS+1))'(STEPS - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
          step <= step + 1'b1;
        end else begin
          cyc <= cyc + 1'b1;
        end
      end
    end
  end
endmodule
