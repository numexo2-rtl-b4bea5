// stop_oversampler: 3.2 GS/s sampling of the common STOP logic signal.
//
// Four 400 MHz clocks, shifted by 0, 45, 90 and 135 degrees, each sample STOP
// on both edges: eight samples per 2.5 ns, 312.5 ps apart, in the order
// p0 rise, p45 rise, p90 rise, p135 rise, p0 fall, p45 fall, p90 fall, p135 fall.
// The eight first flip-flops are retimed into the 0-degree clock, shifted into
// a 32-bit register, and the 100 MHz clock takes the last 32 samples, i.e. one
// 10 ns period, as a pattern with the earliest sample in bit 31.
// STOP is active low, so a pattern of contiguous ones followed by zeros marks
// the edge. The 100 MHz clock must be edge aligned with the 0-degree clock
// (both come from the same clock manager).
//
// The four phases, the DDR sampling, the 3.2 GHz equivalent rate and the 32-bit
// pattern follow the published design. The retiming path is this design's
// choice; on the board the first eight flip-flops are placement constrained.
module stop_oversampler (
  input  logic        clk100,
  input  logic [3:0]  clk400,    // phases 0, 45, 90, 135 degrees
  input  logic        stop_in,
  output logic [31:0] pattern    // one 10 ns period, bit 31 earliest
);
  logic [3:0] s_rise, s_fall;      // first flip-flops
  logic [7:0] s8;                  // retimed into phase 0
  logic [31:0] shreg;

  for (genvar p = 0; p < 4; p++) begin : g_phase
    always_ff @(posedge clk400[p]) s_rise[p] <= stop_in;
    always_ff @(negedge clk400[p]) s_fall[p] <= stop_in;
  end

  // Samples of the previous 2.5 ns window, earliest first
  always_ff @(posedge clk400[0]) begin
    s8    <= {s_rise[0], s_rise[1], s_rise[2], s_rise[3],
              s_fall[0], s_fall[1], s_fall[2], s_fall[3]};
    shreg <= {shreg[23:0], s8};
  end

  always_ff @(posedge clk100) pattern <= shreg;
endmodule
