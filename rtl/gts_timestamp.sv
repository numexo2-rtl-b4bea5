// gts_timestamp: time stamp and trigger bookkeeping of a GTS leaf.
//
// A 48-bit counter advances every 10 ns clock and can be loaded with the
// absolute time sent by the root of the GTS tree. The tree accepts one
// trigger request per leaf, so the channels that request a trigger in the
// same clock are merged into one request; the time stamp and the mask of the
// channels are kept in a local memory (a FIFO, since decisions come back in
// order). When the decision for the oldest request comes back, its channel
// mask and time stamp are given out with the accept/reject flag, and the
// entry is freed. A request finding the memory full is lost (lost pulse).
// Timing: the request and its time stamp leave one clock after the triggers.
//
// The 48-bit, 10 ns time stamp, the single request per leaf and the local
// memory of triggered channels follow the published design; the link protocol
// is not given and the request/decision ports stand for it.
module gts_timestamp
  import numexo2_pkg::*;
#(
  parameter int N     = 16,
  parameter int DEPTH = 16
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            ts_load,
  input  logic [TS_W-1:0] ts_value,
  output logic [TS_W-1:0] ts,
  input  logic [N-1:0]    trig_mask,
  output logic            req,          // trigger request to the tree
  output logic [TS_W-1:0] req_ts,
  output logic            lost,
  input  logic            dec_valid,    // decision for the oldest request
  input  logic            dec_accept,
  output logic            val_valid,
  output logic            val_accept,
  output logic [N-1:0]    val_mask,
  output logic [TS_W-1:0] val_ts
);
  typedef struct packed {
    logic [N-1:0]    mask;
    logic [TS_W-1:0] ts;
  } entry_t;

  entry_t head;
  logic   full, empty;
  logic [$clog2(DEPTH+1)-1:0] count_unused;

  sync_fifo #(.T(entry_t), .DEPTH(DEPTH)) u_mem (
    .clk, .rst,
    .wr(|trig_mask && !full), .din('{mask: trig_mask, ts: ts}),
    .rd(dec_valid && !empty), .dout(head),
    .full, .empty, .count(count_unused));

  always_ff @(posedge clk) begin
    if (rst) begin
      ts <= '0; req <= 1'b0; req_ts <= '0; lost <= 1'b0;
      val_valid <= 1'b0; val_accept <= 1'b0; val_mask <= '0; val_ts <= '0;
    end else begin
      ts        <= ts_load ? ts_value : ts + 1'b1;
      req       <= |trig_mask && !full;
      lost      <= |trig_mask && full;
      if (|trig_mask) req_ts <= ts;
      val_valid <= dec_valid && !empty;
      if (dec_valid && !empty) begin
        val_accept <= dec_accept;
        val_mask   <= head.mask;
        val_ts     <= head.ts;
      end
    end
  end
endmodule
