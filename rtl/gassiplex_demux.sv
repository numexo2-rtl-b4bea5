// gassiplex_demux: readout of multiplexing front-end ASICs (GASSIPLEX type)
// through the board's 16 ADC channels.
//
// Such ASICs hold the amplitudes of their 128 inputs at an event (track and
// hold) and then send them out one after the other as an analog pulse train,
// one amplitude per sequencing clock. With 16 ADC channels the board reads
// 16 trains of VALUES = 128 amplitudes, i.e. 2048 detector channels, in
// parallel. The module:
//   * synchronises the sequencing signals: a rising edge of gx_hold starts an
//     event (event number + 1, time stamp kept), each rising edge of gx_clk
//     during the train takes one amplitude per ADC channel, smp_delay clocks
//     after the edge so that the analog level has settled;
//   * applies the per-channel threshold on the fly: the 16 amplitudes of a
//     step are scanned one per clock and those above threshold are written,
//     with their detector channel address ch*128 + index, into a block buffer;
//   * builds blocks of fixed size: 12 header words and 64 (address, value)
//     pairs, 140 16-bit words = 280 bytes; a block is closed when it holds 64
//     values or when the train ends with at least one value, so an event gives
//     1 to 32 blocks (32 x 64 = 2048); unused pairs read {FFFF, 0000};
//   * double-buffers the blocks: one buffer fills while the other is sent on
//     the valid/ready word stream. A value that finds both buffers full is
//     dropped and counted on 'lost'.
// Block header: w0 {4'hB, 4'h0, module_id}, w1-w2 event number, w3-w5 time
// stamp of the gx_hold edge, w6 block number within the event, w7 number of
// values, w8 {15'b0, last block of the event}, w9-w11 zero.
// Timing: the gx_clk period must be at least smp_delay + CHANNELS + 4 clocks
// so that a step's scan ends before the next sample; out_valid holds a block's
// words in order, out_last marks the 140th word.
//
// The 2048 = 16 x 128 channel organisation, the on-the-fly threshold, the
// 280-byte block for 1 to 64 values and up to 32 blocks per event follow the
// published design. The header contents, the address coding, the settling
// delay and the double buffer are this design's choices, since the published
// block layout is not given.
module gassiplex_demux
  import numexo2_pkg::*;
#(
  parameter int CHANNELS  = NCH,
  parameter int VALUES    = 128,
  parameter int HITS      = 64,
  parameter int HDR_WORDS = 12
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    enable,
  input  logic                    gx_clk,                // sequencing clock (asynchronous)
  input  logic                    gx_hold,               // track and hold: event start (asynchronous)
  input  logic [7:0]              smp_delay,             // settling delay after gx_clk, clocks
  input  logic signed [ADC_W-1:0] threshold [CHANNELS],
  input  logic signed [ADC_W-1:0] sample    [CHANNELS],  // 100 MS/s stream of each ADC channel
  input  logic [TS_W-1:0]         ts,
  input  logic [7:0]              module_id,
  output logic                    out_valid,
  output logic [15:0]             out_data,
  output logic                    out_last,
  input  logic                    out_ready,
  output logic                    lost                   // one value dropped
);
  localparam int IW    = $clog2(VALUES);
  localparam int CIW   = $clog2(CHANNELS);
  localparam int AW    = CIW + IW;                         // detector channel address
  localparam int HW    = $clog2(HITS);
  localparam int WORDS = HDR_WORDS + 2 * HITS;
  localparam int WW    = $clog2(WORDS);

  typedef struct packed {
    logic [AW-1:0]    addr;
    logic [ADC_W-1:0] value;
  } hit_t;

  typedef struct packed {
    logic [31:0]   ev;
    logic [TS_W-1:0] ts;
    logic [5:0]    blk;
    logic [HW:0]   n;
    logic          last;
  } meta_t;

  logic [2:0]  gclk_s, hold_s;
  logic        gclk_rise, hold_rise;
  logic        in_train, pend, scanning;
  logic [IW:0] idx;
  logic [IW-1:0] cap_idx;
  logic [7:0]  dly;
  logic signed [ADC_W-1:0] cap [CHANNELS];
  logic [CIW-1:0] scan_c;
  logic [31:0] ev_no;
  logic [TS_W-1:0] ev_ts;
  logic [5:0]  blk_no;
  logic        wb, sb, sending;
  logic [1:0]  bfull;
  logic [HW:0] wcnt;
  logic [WW-1:0] word;
  meta_t       meta [2];
  hit_t        mem [2][HITS];
  logic        hit, we, scan_end, train_end, close_full, close_end;
  hit_t        wr_hit, rd_hit;
  meta_t       sm;

  assign gclk_rise = gclk_s[1] && !gclk_s[2];
  assign hold_rise = hold_s[1] && !hold_s[2];

  always_comb begin
    hit        = scanning && (cap[scan_c] > threshold[scan_c]);
    we         = hit && !bfull[wb];
    wr_hit     = '{addr: {scan_c, cap_idx}, value: cap[scan_c]};
    scan_end   = scanning && (scan_c == CIW'(CHANNELS - 1));
    train_end  = scan_end && (cap_idx == IW'(VALUES - 1));
    close_full = we && (wcnt == (HW+1)'(HITS - 1));
    close_end  = train_end && !close_full && (wcnt != 0 || we);
  end

  // block buffers: written by the scan, read by the sender
  always_ff @(posedge clk) begin
    if (we) mem[wb][wcnt[HW-1:0]] <= wr_hit;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      gclk_s <= '0; hold_s <= '0;
      in_train <= 1'b0; pend <= 1'b0; scanning <= 1'b0;
      idx <= '0; cap_idx <= '0; dly <= '0; scan_c <= '0;
      ev_no <= '0; ev_ts <= '0; blk_no <= '0;
      wb <= 1'b0; sb <= 1'b0; sending <= 1'b0; bfull <= '0; wcnt <= '0; word <= '0;
      lost <= 1'b0;
      for (int c = 0; c < CHANNELS; c++) cap[c] <= '0;
      for (int b = 0; b < 2; b++) meta[b] <= '0;
    end else begin
      gclk_s <= {gclk_s[1:0], gx_clk};
      hold_s <= {hold_s[1:0], gx_hold};
      lost   <= hit && bfull[wb];

      // train sequencing
      if (enable && hold_rise) begin
        in_train <= 1'b1;
        idx      <= '0;
        ev_no    <= ev_no + 1'b1;
        ev_ts    <= ts;
        blk_no   <= '0;
      end else if (in_train && gclk_rise) begin
        pend <= 1'b1;
        dly  <= smp_delay;
      end
      if (pend) begin
        if (dly != 0) dly <= dly - 1'b1;
        else begin
          pend     <= 1'b0;
          for (int c = 0; c < CHANNELS; c++) cap[c] <= sample[c];
          cap_idx  <= idx[IW-1:0];
          scanning <= 1'b1;
          scan_c   <= '0;
          idx      <= idx + 1'b1;
          if (idx == (IW+1)'(VALUES - 1)) in_train <= 1'b0;
        end
      end

      // on-the-fly threshold scan
      if (scanning) begin
        scan_c <= scan_c + 1'b1;
        if (scan_end) scanning <= 1'b0;
      end
      if (we) wcnt <= wcnt + 1'b1;
      if (close_full || close_end) begin
        bfull[wb] <= 1'b1;
        meta[wb]  <= '{ev: ev_no, ts: ev_ts, blk: blk_no, n: we ? wcnt + 1'b1 : wcnt,
                       last: train_end};
        blk_no    <= blk_no + 1'b1;
        wb        <= ~wb;
        wcnt      <= '0;
      end

      // sender
      if (!sending && bfull[sb]) begin
        sending <= 1'b1;
        word    <= '0;
      end else if (sending && out_ready) begin
        if (word == WW'(WORDS - 1)) begin
          sending   <= 1'b0;
          bfull[sb] <= 1'b0;
          sb        <= ~sb;
        end else begin
          word <= word + 1'b1;
        end
      end
    end
  end

  // word multiplexer of the block being sent
  always_comb begin
    sm        = meta[sb];
    rd_hit    = mem[sb][HW'((word - WW'(HDR_WORDS)) >> 1)];
    out_valid = sending;
    out_last  = sending && (word == WW'(WORDS - 1));
    case (word)
      WW'(0):  out_data = {4'hB, 4'h0, module_id};
      WW'(1):  out_data = sm.ev[31:16];
      WW'(2):  out_data = sm.ev[15:0];
      WW'(3):  out_data = sm.ts[47:32];
      WW'(4):  out_data = sm.ts[31:16];
      WW'(5):  out_data = sm.ts[15:0];
      WW'(6):  out_data = 16'(sm.blk);
      WW'(7):  out_data = 16'(sm.n);
      WW'(8):  out_data = {15'b0, sm.last};
      WW'(9), WW'(10), WW'(11): out_data = '0;
      default: begin
        if (WW'((word - WW'(HDR_WORDS)) >> 1) >= WW'(sm.n))
          out_data = word[0] ? 16'h0000 : 16'hFFFF;    // unused pair (HDR_WORDS is even)
        else
          out_data = word[0] ? 16'($signed(rd_hit.value)) : 16'(rd_hit.addr);
      end
    endcase
  end
endmodule
