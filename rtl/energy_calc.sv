// energy_calc: energy of one event from the shaped signal, with pile-up flag.
//
//   energy = (sum of N flat-top samples - sum of N baseline samples) / N
//
// A running sum over N = 2^log2n samples (moving_sum) gives both sums: the
// baseline sum is the value at the trigger (the N samples just before it), the
// flat-top sum is taken N samples after a programmable computing delay q.
// Dividing by N is a shift; e_shift scales further (the trapezoid gain is k),
// and the result is clipped to 0 .. 65535.
// A trigger when idle opens an event (ev_start). The event lasts
// max(k + m, q + N) clocks; a trigger inside it is pile-up (pileup pulse) and
// turns the event's result into Data Not Valid (dv = 0). At the end of the
// event 'done' pulses with energy and dv.
// Timing: with the trigger at clock t0, the baseline covers t0-N .. t0-1 and
// the flat top t0+q .. t0+q+N-1; done comes max(k+m, q+N)+1 clocks after t0.
//
// The energy formula, the baseline/flat-top windows and the DV/DNV decision
// from pile-up within k+m follow the published design; the widths, the
// clipping and the exact window arithmetic are this design's choice.
module energy_calc
  import numexo2_pkg::*;
#(
  parameter int W         = 32,
  parameter int LOG2N_MAX = 6,
  parameter int WIN_W     = 12
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic signed [W-1:0]            x,
  input  logic                           trig,
  input  logic [WIN_W-1:0]               k,
  input  logic [WIN_W-1:0]               m,
  input  logic [WIN_W-1:0]               q,
  input  logic [$clog2(LOG2N_MAX+1)-1:0] log2n,
  input  logic [4:0]                     e_shift,
  output logic                           busy,
  output logic                           ev_start,
  output logic                           pileup,
  output logic                           done,
  output logic [EN_W-1:0]                energy,
  output logic                           dv
);
  localparam int SW = W + LOG2N_MAX;

  logic signed [SW-1:0] sum, base, flat, flat_v, diff;
  logic signed [W-1:0]  avg_unused;
  logic [WIN_W:0]       cnt, len, flat_at;
  logic                 piled;

  moving_sum #(.W(W), .LOG2N_MAX(LOG2N_MAX)) u_ms (
    .clk, .rst, .log2n, .x, .sum, .avg(avg_unused));

  always_comb begin
    flat_at = (WIN_W+1)'(q) + ((WIN_W+1)'(1) << log2n);
    len     = ((WIN_W+1)'(k) + (WIN_W+1)'(m) > flat_at) ? (WIN_W+1)'(k) + (WIN_W+1)'(m) : flat_at;
    flat_v  = (cnt == flat_at) ? sum : flat;
    diff    = (flat_v - base) >>> log2n;
    diff    = diff >>> e_shift;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; piled <= 1'b0; cnt <= '0;
      base <= '0; flat <= '0;
      ev_start <= 1'b0; pileup <= 1'b0; done <= 1'b0;
      energy <= '0; dv <= 1'b0;
    end else begin
      ev_start <= 1'b0;
      pileup   <= 1'b0;
      done     <= 1'b0;
      if (!busy) begin
        if (trig) begin
          busy     <= 1'b1;
          ev_start <= 1'b1;
          piled    <= 1'b0;
          base     <= sum;
          cnt      <= 1;
        end
      end else begin
        cnt <= cnt + 1'b1;
        if (trig) begin
          piled  <= 1'b1;
          pileup <= 1'b1;
        end
        if (cnt == flat_at) flat <= sum;
        if (cnt == len) begin
          busy <= 1'b0;
          done <= 1'b1;
          dv   <= !(piled || trig);
          if (diff < 0)                    energy <= '0;
          else if (diff > SW'(16'hFFFF))   energy <= 16'hFFFF;
          else                             energy <= EN_W'(diff);
        end
      end
    end
  end
endmodule
