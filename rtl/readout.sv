// readout: collection of the channels' results and framing for the link.
//
// Each channel owns two FIFOs, one for its energy records and one for its
// timing records, written by the channel in a single clock when a result is
// ready; every event writes exactly one record of each. A round-robin arbiter
// serves the channels whose two FIFOs both hold a record, independently of
// their rates, and moves the pair, with the channel number, into one global
// FIFO. A state machine takes the global FIFO's entries and sends each one
// as a frame of FRAME_WORDS 16-bit words over a valid/ready port:
//
//   word 0  {4'hA, channel[3:0], module_id[7:0]}   frame header
//   word 1  {13'b0, calib, dv, tof_ok}             status
//   word 2-4 time stamp bits 47:32, 31:16, 15:0
//   word 5  energy
//   word 6-7 {8'b0, ns_x32[23:16]}, ns_x32[15:0]
//
// ch_afull tells a channel that its energy FIFO can take only one more event,
// so that it stops starting events rather than lose one.
// Timing: one channel moved to the global FIFO per clock; one word per clock
// when the link is ready.
//
// Two FIFOs per channel, one global FIFO, round robin and a framing state
// machine follow the published design. The frame layout stands in for the
// MFM format, whose fields are not given; the FIFO depths are this design's.
module readout
  import numexo2_pkg::*;
#(
  parameter int CHANNELS = 16,
  parameter int CH_DEPTH = 8,
  parameter int G_DEPTH  = 32
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [7:0]        module_id,
  input  logic [CHANNELS-1:0] e_wr,
  input  energy_rec_t       e_rec [CHANNELS],
  input  logic [CHANNELS-1:0] t_wr,
  input  tof_rec_t          t_rec [CHANNELS],
  output logic [CHANNELS-1:0] ch_afull,
  output logic [CHANNELS-1:0] ch_overflow,
  output logic              out_valid,
  output logic [LINK_W-1:0] out_data,
  output logic              out_last,
  input  logic              out_ready
);
  localparam int FRAME_WORDS = 8;
  localparam int CW = $clog2(CH_DEPTH+1);

  energy_rec_t e_head [CHANNELS];
  tof_rec_t    t_head [CHANNELS];
  logic [CHANNELS-1:0] e_empty, t_empty, e_full, t_full, pop, req, grant;
  logic [$clog2(CHANNELS)-1:0] gidx;
  logic        any;
  logic        g_full, g_empty, g_wr, g_rd;
  global_rec_t g_din, g_head;
  logic [$clog2(G_DEPTH+1)-1:0] g_count_unused;

  for (genvar c = 0; c < CHANNELS; c++) begin : g_ch
    logic [CW-1:0] e_count, t_count_unused;
    sync_fifo #(.T(energy_rec_t), .DEPTH(CH_DEPTH)) u_efifo (
      .clk, .rst, .wr(e_wr[c]), .din(e_rec[c]), .rd(pop[c]), .dout(e_head[c]),
      .full(e_full[c]), .empty(e_empty[c]), .count(e_count));
    sync_fifo #(.T(tof_rec_t), .DEPTH(CH_DEPTH)) u_tfifo (
      .clk, .rst, .wr(t_wr[c]), .din(t_rec[c]), .rd(pop[c]), .dout(t_head[c]),
      .full(t_full[c]), .empty(t_empty[c]), .count(t_count_unused));
    assign req[c]      = !e_empty[c] && !t_empty[c];
    assign ch_afull[c] = (e_count >= CW'(CH_DEPTH - 1));
    always_ff @(posedge clk) begin
      if (rst) ch_overflow[c] <= 1'b0;
      else if ((e_wr[c] && e_full[c]) || (t_wr[c] && t_full[c])) ch_overflow[c] <= 1'b1;
    end
  end

  rr_arbiter #(.N(CHANNELS)) u_rr (
    .clk, .rst, .req, .advance(g_wr), .grant, .grant_idx(gidx), .any);

  assign g_wr  = any && !g_full;
  assign pop   = g_wr ? grant : '0;
  assign g_din = '{ch: 4'(gidx), e: e_head[gidx], t: t_head[gidx]};

  sync_fifo #(.T(global_rec_t), .DEPTH(G_DEPTH)) u_gfifo (
    .clk, .rst, .wr(g_wr), .din(g_din), .rd(g_rd), .dout(g_head),
    .full(g_full), .empty(g_empty), .count(g_count_unused));

  // framing state machine
  logic [$clog2(FRAME_WORDS)-1:0] word;
  logic sending;

  always_comb begin
    unique case (word)
      3'd0: out_data = {4'hA, g_head.ch, module_id};
      3'd1: out_data = {13'b0, g_head.e.calib, g_head.e.dv, g_head.t.ok};
      3'd2: out_data = g_head.e.ts[47:32];
      3'd3: out_data = g_head.e.ts[31:16];
      3'd4: out_data = g_head.e.ts[15:0];
      3'd5: out_data = g_head.e.energy;
      3'd6: out_data = {8'b0, g_head.t.ns_x32[23:16]};
      default: out_data = g_head.t.ns_x32[15:0];
    endcase
  end

  assign sending   = !g_empty;
  assign out_valid = sending;
  assign out_last  = (word == 3'(FRAME_WORDS - 1));
  assign g_rd      = sending && out_ready && out_last;

  always_ff @(posedge clk) begin
    if (rst) word <= '0;
    else if (sending && out_ready) word <= out_last ? '0 : word + 1'b1;
  end
endmodule
