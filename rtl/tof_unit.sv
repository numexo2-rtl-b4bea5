// tof_unit: time-of-flight between the channel's dCFD trigger and the common
// STOP signal.
//
// On start (the trigger clock) the unit counts whole 10 ns periods (Tperiod) in
// the STOP patterns that follow and looks for the first one-to-zero transition
// (STOP is active low). The transition position in the 32-bit pattern, counted
// from its earliest sample, is Tstop (312.5 ps steps). With Tstart from the
// dCFD interpolation (1/1024 of a period) the result is
//
//     Ns = 32*(1024 - Tstart)/1024 + 32*Tperiod + Tstop
//
// and the time of flight is 312.5 ps * Ns. The output ns_x32 is 32*Ns, i.e. Ns
// with five fractional bits, so that no resolution of Tstart is lost:
//     ns_x32 = (1024 - Tstart) + 1024*Tperiod + 32*Tstop.
// The record is written once both Tstart and the STOP edge are known; with no
// STOP edge within RANGE_PERIODS periods, or when a new start arrives first,
// the record is written with ok = 0. Exactly one record per start.
// Timing: Tperiod counts patterns received from the clock after start; any
// fixed offset between the sample and STOP paths is a calibration constant.
//
// The formula and the 32/1024 steps follow the published design; the range of
// 64 periods (the published range is 600 ns) and the record layout are this
// design's choice.
module tof_unit
  import numexo2_pkg::*;
#(
  parameter int RANGE_PERIODS = 64
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                start,
  input  logic                tstart_done,
  input  logic [TSTART_W-1:0] tstart,
  input  logic [31:0]         pattern,
  output logic                rec_valid,
  output tof_rec_t            rec,
  output logic                active      // a measurement is in progress
);
  localparam int PW = $clog2(RANGE_PERIODS + 1);

  logic            have_start, have_stop;
  logic [PW-1:0]   tperiod;
  logic [TSTOP_W-1:0] tstop;
  logic [TSTART_W-1:0] tstart_q;
  logic            prev_bit;
  logic            edge_found;
  logic [TSTOP_W-1:0] edge_pos;

  // First 1->0 transition in {prev_bit, pattern}, earliest sample first
  always_comb begin
    edge_found = 1'b0;
    edge_pos   = '0;
    for (int i = 31; i >= 0; i--) begin
      logic prv;
      prv = (i == 31) ? prev_bit : pattern[i+1];
      if (!edge_found && prv && !pattern[i]) begin
        edge_found = 1'b1;
        edge_pos   = TSTOP_W'(31 - i);
      end
    end
  end

  function automatic logic [NS_W-1:0] ns_calc(logic [TSTART_W-1:0] tsa,
                                               logic [PW-1:0] tp,
                                               logic [TSTOP_W-1:0] tsp);
    return NS_W'(11'd1024 - tsa) + (NS_W'(tp) << 10) + (NS_W'(tsp) << 5);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      active <= 1'b0; have_start <= 1'b0; have_stop <= 1'b0;
      tperiod <= '0; tstop <= '0; tstart_q <= '0; prev_bit <= 1'b1;
      rec_valid <= 1'b0; rec <= '0;
    end else begin
      rec_valid <= 1'b0;
      prev_bit  <= pattern[0];
      if (start) begin
        if (active) begin                 // previous measurement cut short
          rec_valid <= 1'b1;
          rec.ok    <= 1'b0;
          rec.ns_x32 <= '0;
        end
        active <= 1'b1; have_start <= 1'b0; have_stop <= 1'b0;
        tperiod <= '0;
      end else if (active) begin
        if (tstart_done && !have_start) begin
          have_start <= 1'b1;
          tstart_q   <= tstart;
        end
        if (!have_stop) begin
          if (edge_found) begin
            have_stop <= 1'b1;
            tstop     <= edge_pos;
          end else if (tperiod == PW'(RANGE_PERIODS - 1)) begin
            active     <= 1'b0;          // out of range
            rec_valid  <= 1'b1;
            rec.ok     <= 1'b0;
            rec.ns_x32 <= '0;
          end else begin
            tperiod <= tperiod + 1'b1;
          end
        end
        if (have_stop && (have_start || tstart_done)) begin
          active     <= 1'b0;
          rec_valid  <= 1'b1;
          rec.ok     <= 1'b1;
          rec.ns_x32 <= ns_calc(have_start ? tstart_q : tstart, tperiod, tstop);
        end
      end
    end
  end
endmodule
