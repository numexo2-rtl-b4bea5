// numexo2_top: digital processing of a 16-channel NUMEXO2 board.
//
// Sixteen independent dsp_channel instances turn the ADC samples (two 14-bit
// samples per channel per 10 ns clock, after the input deserialisers) into
// energy and timing records. The common STOP input is oversampled at 3.2 GS/s
// once (stop_oversampler) and its 32-bit pattern shared by all channels. The
// time stamp logic (gts_timestamp) stamps the event starts, merges the
// channels that start in the same clock into one request to the GTS tree and
// remembers them until the decision returns. The readout collects the
// records through two FIFOs per channel, round robin and a global FIFO, frames
// them and sends them over the 16-bit strobe/acknowledge link (link_tx) to
// the second FPGA, whose BUSY stops trigger requests. Counting scales record
// triggers, DV and DNV per channel; one delay_calib per channel finds the
// input delay tap from the ADC test pattern at start-up. stop_dnl_hist
// histograms the STOP fine time codes for the boot-time DNL check.
// In the analog demultiplexing mode (gx_enable) the link carries the blocks
// of gassiplex_demux instead of the event frames; the switch between the two
// sources waits for the end of the frame or block in progress. Event frames
// that arrive meanwhile wait in the FIFOs, whose almost-full flags then stop
// the channels' triggers.
// OR-TRIG_OUT is the OR of all channels' trigger requests. TRIG_IN passes
// through two synchronising flip-flops and serves as validation gate or
// calibration pulse, as set by trigin_mode.
// The GTS link, the ADCs, the input deserialisers and delays, the clock
// manager and the setup registers are outside: their signals are ports.
//
// The partitioning follows the published block diagrams; port names are this
// design's.
module numexo2_top
  import numexo2_pkg::*;
#(
  parameter int CHANNELS = NCH,
  parameter int K_MAX    = 1024,
  parameter int M_MAX    = 1024
) (
  input  logic              clk,            // 100 MHz GTS clock
  input  logic [3:0]        clk400,         // 400 MHz, 0/45/90/135 degrees
  input  logic              rst,
  // ADC samples after deserialisation
  input  logic signed [ADC_W-1:0] adc_s0 [CHANNELS],
  input  logic signed [ADC_W-1:0] adc_s1 [CHANNELS],
  // settings
  input  ch_cfg_t           cfg [CHANNELS],
  input  trigin_mode_e      trigin_mode,
  input  logic [7:0]        module_id,
  // front panel logic
  input  logic              trig_in,
  input  logic              stop_in,
  output logic              or_trig_out,
  // GTS leaf
  input  logic              ts_load,
  input  logic [TS_W-1:0]   ts_value,
  output logic              gts_req,
  output logic [TS_W-1:0]   gts_req_ts,
  output logic              gts_lost,
  input  logic              dec_valid,
  input  logic              dec_accept,
  output logic              val_valid,
  output logic              val_accept,
  output logic [CHANNELS-1:0] val_mask,
  output logic [TS_W-1:0]   val_ts,
  // link to the second FPGA
  output logic [LINK_W-1:0] link_data,
  output logic              data_strobe,
  input  logic              ack_link,
  input  logic              busy_link,
  // counting scales
  input  logic              scaler_clear,
  output logic [47:0]       cnt_trig [CHANNELS],
  output logic [47:0]       cnt_dv   [CHANNELS],
  output logic [47:0]       cnt_dnv  [CHANNELS],
  // input delay calibration
  input  logic              calib_start,
  input  logic [ADC_W-1:0]  calib_pattern,
  output logic [4:0]        delay_tap  [CHANNELS],
  output logic [CHANNELS-1:0] calib_done,
  output logic [CHANNELS-1:0] calib_ok,
  output logic [4:0]        calib_best [CHANNELS],
  // STOP fine time code density (DNL check)
  input  logic              dnl_clear,
  input  logic              dnl_enable,
  input  logic [4:0]        dnl_addr,
  output logic [23:0]       dnl_count,
  output logic [28:0]       dnl_total,
  // analog demultiplexing (GASSIPLEX) mode
  input  logic              gx_enable,
  input  logic              gx_clk,
  input  logic              gx_hold,
  input  logic [7:0]        gx_smp_delay,
  input  logic signed [ADC_W-1:0] gx_threshold [CHANNELS],
  output logic              gx_lost,
  // status
  output logic [CHANNELS-1:0] ch_overflow,
  output logic              ready
);
  logic [31:0]         stop_pattern;
  logic [TS_W-1:0]     ts;
  logic [1:0]          trig_in_s;
  logic                busy;
  logic [CHANNELS-1:0] disc_trig, trig_req, e_wr, t_wr, afull, ch_ready;
  logic [CHANNELS-1:0] inc_dv, inc_dnv, cal_busy_unused;
  energy_rec_t         e_rec [CHANNELS];
  tof_rec_t            t_rec [CHANNELS];
  logic [31:0]         scan_unused [CHANNELS];
  logic                ro_valid, ro_ready, ro_last;
  logic [LINK_W-1:0]   ro_data;
  logic                gx_valid, gx_ready, gx_last;
  logic [LINK_W-1:0]   gx_data;
  logic                lk_valid, lk_ready;
  logic [LINK_W-1:0]   lk_data;
  logic                src_gx, in_frame;

  always_ff @(posedge clk) begin
    if (rst) trig_in_s <= '0;
    else     trig_in_s <= {trig_in_s[0], trig_in};
  end

  stop_oversampler u_stop (.clk100(clk), .clk400, .stop_in, .pattern(stop_pattern));

  stop_dnl_hist #(.CW(24)) u_dnl (
    .clk, .rst, .clear(dnl_clear), .enable(dnl_enable), .pattern(stop_pattern),
    .rd_addr(dnl_addr), .rd_count(dnl_count), .total(dnl_total));

  for (genvar c = 0; c < CHANNELS; c++) begin : g_ch
    dsp_channel #(.K_MAX(K_MAX), .M_MAX(M_MAX)) u_dsp (
      .clk, .rst, .cfg(cfg[c]), .trigin_mode, .s0(adc_s0[c]), .s1(adc_s1[c]), .ts,
      .trig_in(trig_in_s[1]), .busy, .fifo_afull(afull[c]), .stop_pattern,
      .disc_trig(disc_trig[c]), .trig_req(trig_req[c]),
      .e_wr(e_wr[c]), .e_rec(e_rec[c]), .t_wr(t_wr[c]), .t_rec(t_rec[c]),
      .ready(ch_ready[c]));

    assign inc_dv[c]  = e_wr[c] && !e_rec[c].calib &&  e_rec[c].dv;
    assign inc_dnv[c] = e_wr[c] && !e_rec[c].calib && !e_rec[c].dv;

    delay_calib #(.TAPS(32)) u_dcal (
      .clk, .rst, .start(calib_start), .pattern(calib_pattern),
      .rx0(adc_s0[c]), .rx1(adc_s1[c]), .tap(delay_tap[c]), .busy(cal_busy_unused[c]),
      .done(calib_done[c]), .ok(calib_ok[c]), .scan(scan_unused[c]), .best(calib_best[c]));
  end

  assign or_trig_out = |disc_trig;
  assign ready       = &ch_ready;

  gts_timestamp #(.N(CHANNELS), .DEPTH(16)) u_gts (
    .clk, .rst, .ts_load, .ts_value, .ts, .trig_mask(trig_req),
    .req(gts_req), .req_ts(gts_req_ts), .lost(gts_lost),
    .dec_valid, .dec_accept, .val_valid, .val_accept, .val_mask, .val_ts);

  scalers #(.N(CHANNELS), .W(48)) u_scal (
    .clk, .rst, .clear(scaler_clear), .inc_trig(disc_trig), .inc_dv, .inc_dnv,
    .cnt_trig, .cnt_dv, .cnt_dnv);

  readout #(.CHANNELS(CHANNELS), .CH_DEPTH(8), .G_DEPTH(32)) u_ro (
    .clk, .rst, .module_id, .e_wr, .e_rec, .t_wr, .t_rec,
    .ch_afull(afull), .ch_overflow, .out_valid(ro_valid), .out_data(ro_data),
    .out_last(ro_last), .out_ready(ro_ready));

  gassiplex_demux #(.CHANNELS(CHANNELS)) u_gx (
    .clk, .rst, .enable(gx_enable), .gx_clk, .gx_hold, .smp_delay(gx_smp_delay),
    .threshold(gx_threshold), .sample(adc_s0), .ts, .module_id,
    .out_valid(gx_valid), .out_data(gx_data), .out_last(gx_last), .out_ready(gx_ready),
    .lost(gx_lost));

  // link source: event frames or demultiplexing blocks, switched between them
  always_ff @(posedge clk) begin
    if (rst) begin
      src_gx <= 1'b0; in_frame <= 1'b0;
    end else begin
      if (lk_valid && lk_ready) in_frame <= !(src_gx ? gx_last : ro_last);
      if (!in_frame && !(lk_valid && lk_ready)) src_gx <= gx_enable;
    end
  end
  assign lk_valid = src_gx ? gx_valid : ro_valid;
  assign lk_data  = src_gx ? gx_data  : ro_data;
  assign ro_ready = !src_gx && lk_ready;
  assign gx_ready =  src_gx && lk_ready;

  link_tx u_link (
    .clk, .rst, .valid(lk_valid), .data(lk_data), .ready(lk_ready),
    .link_data, .data_strobe, .ack_link, .busy_link, .busy_out(busy));
endmodule
