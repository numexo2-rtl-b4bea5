// sync_fifo: single-clock first-in first-out buffer with full/empty flags.
//
// Writes are ignored when full and reads when empty. The data output shows the
// oldest entry while not empty (first-word fall-through); rd pops it.
// 'count' gives the fill level. Timing: an entry written at one clock can be
// read from the next.
//
// FIFOs with flags are the published readout mechanism; the first-word
// fall-through behaviour and the depths are this design's choice.
module sync_fifo #(
  parameter type T     = logic [15:0],
  parameter int  DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     wr,
  input  T                         din,
  input  logic                     rd,
  output T                         dout,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = $clog2(DEPTH);

  T              mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_wr, do_rd;

  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty = (count == 0);
  assign do_wr = wr && !full;
  assign do_rd = rd && !empty;
  assign dout  = mem[rp];

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + ($clog2(DEPTH+1))'(do_wr) - ($clog2(DEPTH+1))'(do_rd);
    end
  end

  always_ff @(posedge clk) if (do_wr) mem[wp] <= din;

  a_count_range: assert property (@(posedge clk) disable iff (rst) count <= ($clog2(DEPTH+1))'(DEPTH))
    else $error("sync_fifo: fill count out of range");
endmodule
