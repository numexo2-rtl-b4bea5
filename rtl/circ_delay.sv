// circ_delay: programmable delay line built as a circular buffer in block RAM.
//
// y[n] = x[n - delay], for delay = 0 .. DEPTH. Every clock the input is written
// at the write pointer and the word written delay-1 clocks earlier is read
// through a registered (block RAM) read port. Delays of 0 and 1 are served by
// a bypass and a register. The memory starts cleared on reset, which takes
// DEPTH clocks of writing zeros; 'ready' goes high when it is done.
//
// Circular buffers for the trapezoid delays are shown in the published filter
// schematic; the depth, the read-before-write structure and the clearing
// sequence are this design's choice.
module circ_delay #(
  parameter int W     = 16,
  parameter int DEPTH = 1024
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [$clog2(DEPTH+1)-1:0] delay,
  input  logic signed [W-1:0]        x,
  output logic signed [W-1:0]        y,
  output logic                       ready
);
  localparam int AW = $clog2(DEPTH);

  logic signed [W-1:0] mem [DEPTH];
  logic [AW-1:0]       wp, ra;
  logic signed [W-1:0] rd_q, x_q;

  assign ra = wp - AW'(delay - 1'b1);

  always_ff @(posedge clk) begin
    if (rst) begin
      wp    <= '0;
      ready <= 1'b0;
      x_q   <= '0;
    end else begin
      wp  <= wp + 1'b1;
      x_q <= x;
      if (wp == AW'(DEPTH - 1)) ready <= 1'b1;
    end
  end

  // memory port: write x (zeros while clearing), read old contents
  always_ff @(posedge clk) begin
    mem[wp] <= (rst || !ready) ? '0 : x;
    rd_q    <= mem[ra];
  end

  always_comb begin
    if (delay == 0)      y = x;
    else if (delay == 1) y = x_q;
    else                 y = rd_q;
  end
endmodule
