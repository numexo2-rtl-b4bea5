// dsp_channel: the processing of one detector channel, from ADC samples to
// its energy and timing records.
//
// Two 14-bit samples arrive every 10 ns clock; their mean is the 100 MS/s
// stream E[n] used by both paths, which run in parallel on the same samples:
//   * trigger path: three low-pass IIR stages, differentiation and threshold
//     or dCFD (trigger_filter, trigger_dcfd) give the trigger requests;
//   * energy path: trapezoid shaper (or the raw signal for TAC digitisation,
//     or a 200 MS/s charge integral) and the baseline/flat-top energy with the
//     DV/DNV pile-up decision (trapezoid, energy_calc, charge_integrator);
//   * timing path: dichotomy interpolation of the dCFD crossing (cfd_interp)
//     and the STOP measurement giving the time of flight (tof_unit).
// A trigger request that finds the energy path idle opens an event: it is
// sent to the time stamp logic (trig_req) and the time stamp is kept for the
// record. At the end of the event one energy record and, when the time of
// flight is known, one timing record are written.
// Trigger requests are suppressed while the link is BUSY, while the channel's
// FIFO is almost full and, in gate mode, outside the external validation gate
// (TRIG_IN). In calibration mode each rising edge of TRIG_IN produces an event
// with the energy 60000 and the DNV bit, ahead of the next real event.
// The trapezoid, the raw stream and the 200 MS/s samples are delayed by
// PRE_DELAY clocks before the energy and charge calculations, so that the
// baseline window before the trigger lies before the pulse: the trigger path
// (three filters, the CFD delay) is about 10..25 clocks slower than the energy
// path. q is counted from the trigger in the delayed stream. In charge mode
// the record is written at the end of the energy event, so the charge window
// win must not be longer than the event, max(k+m, q+N) clocks.
// Timing: trigger request 2 clocks after the sample that crosses; records as
// described in energy_calc and tof_unit.
//
// The two parallel paths, the gate, the BUSY inhibit and the calibration
// events follow the published design. Averaging the two samples of a clock to
// get the 100 MS/s stream, and the event bookkeeping, are this design's choice.
module dsp_channel
  import numexo2_pkg::*;
#(
  parameter int K_MAX = 1024,
  parameter int M_MAX = 1024,
  parameter int PRE_DELAY = 24       // energy/charge streams delayed behind the trigger
) (
  input  logic              clk,
  input  logic              rst,
  input  ch_cfg_t           cfg,
  input  trigin_mode_e      trigin_mode,
  input  logic signed [ADC_W-1:0] s0,       // earlier sample of the clock
  input  logic signed [ADC_W-1:0] s1,       // later sample
  input  logic [TS_W-1:0]   ts,
  input  logic              trig_in,        // TRIG_IN, synchronised
  input  logic              busy,           // BUSY from the link
  input  logic              fifo_afull,
  input  logic [31:0]       stop_pattern,
  output logic              disc_trig,      // every discriminator request
  output logic              trig_req,       // event start, to the time stamp logic
  output logic              e_wr,
  output energy_rec_t       e_rec,
  output logic              t_wr,
  output tof_rec_t          t_rec,
  output logic              ready           // buffers cleared after reset
);
  localparam int Y_W = SMP_W + 6;

  logic signed [SMP_W-1:0] e, f, s_unused;
  logic signed [Y_W-1:0]   y0, y1;
  logic signed [31:0]      t, ex;
  logic                    inhibit, trig_in_d;
  logic                    ev_start, pileup_unused, done, dv, ec_busy;
  logic [EN_W-1:0]         energy, charge;
  logic                    ci_busy_unused, ci_done_unused;
  logic                    ip_busy_unused, ip_done;
  logic [TSTART_W-1:0]     tstart;
  logic                    tof_wr;
  tof_rec_t                tof_rec;
  logic                    tof_active;
  logic                    calib_pend, calib_fire;
  logic [TS_W-1:0]         ev_ts, calib_ts;
  logic signed [75:0]      dl_in, dl_out;
  logic signed [31:0]      t_dl;
  logic signed [SMP_W-1:0] e_dl;
  logic signed [ADC_W-1:0] s0_dl, s1_dl;
  logic                    trap_ready, dl_ready;

  // 100 MS/s stream: mean of the two samples of the clock
  always_ff @(posedge clk) begin
    if (rst) e <= '0;
    else     e <= SMP_W'((SMP_W'(s0) + SMP_W'(s1)) >>> 1);
  end

  // trigger path
  assign inhibit = busy || fifo_afull || (trigin_mode == TRIGIN_GATE && !trig_in)
                   || calib_pend;

  trigger_filter #(.W(SMP_W)) u_tf (.clk, .rst, .e, .f);

  trigger_dcfd #(.W(SMP_W), .D_MAX(15), .DEAD_CYCLES(5), .Y_W(Y_W)) u_trig (
    .clk, .rst, .f, .alpha(cfg.trig_alpha), .threshold($signed(cfg.threshold)),
    .cfd_en(cfg.cfd_en), .delay(cfg.cfd_delay), .frac(cfg.cfd_frac),
    .inhibit, .s(s_unused), .trig(disc_trig), .y0, .y1);

  // energy path
  trapezoid #(.W(SMP_W), .K_MAX(K_MAX), .M_MAX(M_MAX), .ALPHA_FRAC(16), .ACC_W(48)) u_trap (
    .clk, .rst, .k(($clog2(K_MAX+1))'(cfg.k)), .m(($clog2(M_MAX+1))'(cfg.m)),
    .alpha(cfg.trap_alpha), .e, .t, .ready(trap_ready));

  // the energy streams are delayed so that the trigger, which comes late
  // because of the filters and the CFD delay, precedes the pulse in them
  assign dl_in = {t, e, s0, s1};
  circ_delay #(.W(76), .DEPTH(32)) u_pre (
    .clk, .rst, .delay(6'(PRE_DELAY)), .x(dl_in), .y(dl_out), .ready(dl_ready));
  assign {t_dl, e_dl, s0_dl, s1_dl} = dl_out;
  assign ready = trap_ready && dl_ready;

  assign ex = (cfg.emode == EMODE_TRAPEZOID) ? t_dl : 32'(e_dl);

  energy_calc #(.W(32), .LOG2N_MAX(6), .WIN_W(12)) u_energy (
    .clk, .rst, .x(ex), .trig(disc_trig), .k({1'b0, cfg.k}), .m({1'b0, cfg.m}), .q(cfg.q),
    .log2n(cfg.log2n), .e_shift(cfg.e_shift), .busy(ec_busy), .ev_start,
    .pileup(pileup_unused), .done, .energy, .dv);

  charge_integrator #(.W(SMP_W), .WIN_MAX(255)) u_charge (
    .clk, .rst, .s0(SMP_W'(s0_dl)), .s1(SMP_W'(s1_dl)), .trig(disc_trig && !ec_busy),
    .win(cfg.win), .shift(cfg.e_shift), .busy(ci_busy_unused), .done(ci_done_unused),
    .charge);

  // timing path
  cfd_interp #(.Y_W(Y_W), .STEPS(TSTART_W), .STEP_CYCLES(5)) u_interp (
    .clk, .rst, .start(ev_start), .y0, .y1, .busy(ip_busy_unused), .done(ip_done), .tstart);

  tof_unit #(.RANGE_PERIODS(64)) u_tof (
    .clk, .rst, .start(ev_start), .tstart_done(ip_done), .tstart,
    .pattern(stop_pattern), .rec_valid(tof_wr), .rec(tof_rec), .active(tof_active));

  // calibration events from TRIG_IN: wait until no event is in progress
  assign calib_fire = calib_pend && !ec_busy && !done && !tof_active && !tof_wr && !disc_trig;

  always_ff @(posedge clk) begin
    if (rst) begin
      trig_in_d <= 1'b0; calib_pend <= 1'b0; calib_ts <= '0; ev_ts <= '0;
    end else begin
      trig_in_d <= trig_in;
      if (trigin_mode == TRIGIN_CALIB && trig_in && !trig_in_d && !calib_pend) begin
        calib_pend <= 1'b1;
        calib_ts   <= ts;
      end else if (calib_fire) begin
        calib_pend <= 1'b0;
      end
      if (ev_start) ev_ts <= ts - 1'b1;     // time stamp of the trigger clock
    end
  end

  assign trig_req = ev_start || calib_fire;

  always_comb begin
    e_wr  = done || calib_fire;
    e_rec = '{calib: 1'b0, dv: dv, ts: ev_ts,
              energy: (cfg.emode == EMODE_CHARGE) ? charge : energy};
    if (calib_fire) e_rec = '{calib: 1'b1, dv: 1'b0, energy: CALIB_ENERGY, ts: calib_ts};
    t_wr  = tof_wr || calib_fire;
    t_rec = calib_fire ? '{ok: 1'b0, ns_x32: '0} : tof_rec;
  end
endmodule
