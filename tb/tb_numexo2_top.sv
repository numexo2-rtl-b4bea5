`timescale 1ps/1ps
// tb_numexo2_top: end-to-end test of the full 16-channel board, with the
// default parameters (K_MAX = M_MAX = 1024, 16 channels).
//
// Stimulus: a detector-like pulse source per channel (pulse_gen), a
// free-running STOP, 400 MHz phases for the STOP oversampler, a behavioural
// receiving FPGA on the link with a random acknowledge delay, and a GTS tree
// model that answers each trigger request with an accept/reject decision.
// Phases:
//   1. input delay calibration: each channel sees the test pattern only
//      within its own window of taps; the chosen tap must be its centre;
//   2. normal running at a rate above the link capacity: link stalls, FIFO
//      almost-full, pile-up (DNV), time of flight, GTS decisions; meanwhile
//      the STOP fine time codes are histogrammed (DNL check): every one of
//      the 32 codes must occur and the total must equal the STOP edges;
//   3. BUSY from the receiver: no event may start;
//   4. TRIG_IN as validation gate: no event outside the gate;
//   5. TRIG_IN as calibration: 60000/DNV records from every channel;
//   6. mode switch: half the channels to leading edge, one to charge mode;
//   7. analog demultiplexing mode: one event of 16 trains of 128 values read
//      as 140-word blocks over the same link;
//   8. drain, then compare the counting scales with the frames received.
// Every frame is decoded; DV energies of isolated pulses must be k times the
// pulse step within 1.5 %; each frame's time stamp must match a pulse of its
// channel. Each mechanism is counted and must have happened at least once.
module tb_numexo2_top;
  import numexo2_pkg::*;
  localparam int C = NCH;

  logic clk = 0, rst = 1;
  logic [3:0] clk400 = '0;
  initial begin #1250; forever #5000 clk = ~clk; end
  int offs [4] = '{0, 312, 625, 938};
  for (genvar p = 0; p < 4; p++) begin : g_clk
    initial begin #(offs[p]); forever #1250 clk400[p] = ~clk400[p]; end
  end

  int checks = 0, failures = 0;
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 40) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // DUT signals
  logic signed [13:0] adc_s0 [C], adc_s1 [C], g_s0 [C], g_s1 [C];
  ch_cfg_t cfg [C];
  trigin_mode_e trigin_mode;
  logic [7:0] module_id = 8'h5C;
  logic trig_in, stop_in, or_trig_out;
  logic ts_load; logic [47:0] ts_value;
  logic gts_req, gts_lost, dec_valid, dec_accept, val_valid, val_accept;
  logic [47:0] gts_req_ts, val_ts; logic [C-1:0] val_mask;
  logic [15:0] link_data; logic data_strobe, ack_link, busy_link;
  logic scaler_clear;
  logic [47:0] cnt_trig [C], cnt_dv [C], cnt_dnv [C];
  logic calib_start; logic [13:0] calib_pattern = 14'h2A5C;
  logic [4:0] delay_tap [C], calib_best [C];
  logic [C-1:0] calib_done, calib_ok, ch_overflow;
  logic ready;
  logic cal_phase = 1;
  logic gx_enable = 0, gx_clk = 0, gx_hold = 0, gx_lost;
  logic [7:0] gx_smp_delay = 8'd5;
  logic signed [13:0] gx_threshold [C];
  logic signed [13:0] gx_val [C];
  bit gx_phase = 0;
  logic dnl_clear = 0, dnl_enable = 0; logic [4:0] dnl_addr = '0;
  logic [23:0] dnl_count; logic [28:0] dnl_total;
  int n_stop_falls = 0, n_dnl_codes = 0;

  numexo2_top dut (.*);

  // receiving FPGA
  logic rx_valid; logic [15:0] rx_word; int rx_errors;
  v5_link_rx rx (.clk, .link_data, .data_strobe, .ack_link, .word_valid(rx_valid),
                 .word(rx_word), .errors(rx_errors));

  // pulse sources and delay-calibration pattern window per channel
  function automatic int tap_lo(int c); return 3 + c; endfunction
  function automatic int tap_hi(int c); return 3 + c + 4 + (c % 4); endfunction
  bit pulses_on = 0;
  longint p_ts [C][$];
  real    p_amp [C][$];
  int     pulses_total = 0;
  for (genvar c = 0; c < C; c++) begin : g_ch
    pulse_gen gen (.clk, .s0(g_s0[c]), .s1(g_s1[c]));
    always_comb begin
      if (gx_phase) begin
        adc_s0[c] = gx_val[c];
        adc_s1[c] = gx_val[c];
      end else if (cal_phase) begin
        adc_s0[c] = (int'(delay_tap[c]) >= tap_lo(c) && int'(delay_tap[c]) <= tap_hi(c)) ? calib_pattern : ~calib_pattern;
        adc_s1[c] = adc_s0[c];
      end else begin
        adc_s0[c] = g_s0[c];
        adc_s1[c] = g_s1[c];
      end
    end
    initial begin
      gen.base = -200.0; gen.noise = 1.0;
      forever begin
        @(posedge clk); #2;
        if (pulses_on) begin
          real a;
          repeat ($urandom_range(120, 400)) @(posedge clk);
          #2;
          if (!pulses_on) continue;
          a = 400.0 + real'($urandom_range(0, 1500));
          gen.add_pulse(gen.n + 2, a);
          p_ts[c].push_back(longint'(dut.ts) + 2); p_amp[c].push_back(a);
          pulses_total++;
          if ($urandom_range(0, 99) < 15) begin
            int d;
            d = $urandom_range(30, 34);
            a = 400.0 + real'($urandom_range(0, 1500));
            gen.add_pulse(gen.n + 2 + d, a);
            p_ts[c].push_back(longint'(dut.ts) + 2 + d); p_amp[c].push_back(a);
            pulses_total++;
          end
        end
      end
    end
  end

  // STOP: short low pulses every 200..600 ns, asynchronous to the clock
  initial begin
    stop_in = 1;
    forever begin
      #($urandom_range(200000, 600000));
      stop_in = 0;
      if (dnl_enable) n_stop_falls++;
      #($urandom_range(8000, 20000));
      stop_in = 1;
    end
  end

  // GTS tree: decision 20..60 clocks after each request, in order
  longint gts_q_ts [$]; longint gts_q_due [$]; bit gts_q_acc [$];
  longint cyc = 0;
  int n_gts_acc = 0, n_gts_rej = 0, n_gts_req = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (!rst) begin
    if (gts_req) begin
      gts_q_ts.push_back(longint'(gts_req_ts));
      gts_q_due.push_back(cyc + $urandom_range(20, 60));
      gts_q_acc.push_back($urandom_range(0, 3) != 0);
      n_gts_req++;
    end
    if (val_valid) begin
      check(gts_v_ts.size() > 0 && longint'(val_ts) == gts_v_ts[0] && val_accept == gts_v_acc[0],
            "GTS decision returned for the oldest request");
      if (gts_v_ts.size() > 0) begin void'(gts_v_ts.pop_front()); void'(gts_v_acc.pop_front()); end
      check(val_mask != 0, "validated mask not empty");
      if (val_accept) n_gts_acc++; else n_gts_rej++;
    end
  end
  longint gts_v_ts [$]; bit gts_v_acc [$];
  initial begin
    dec_valid = 0; dec_accept = 0;
    forever begin
      @(posedge clk); #1;
      dec_valid = 0;
      if (gts_q_due.size() > 0 && gts_q_due[0] <= cyc) begin
        dec_valid = 1; dec_accept = gts_q_acc[0];
        gts_v_ts.push_back(gts_q_ts[0]); gts_v_acc.push_back(gts_q_acc[0]);
        void'(gts_q_ts.pop_front()); void'(gts_q_due.pop_front()); void'(gts_q_acc.pop_front());
      end
    end
  end

  // step height of a pulse after the pole-zero correction (see tb_dsp_channel)
  function automatic real pulse_v(real d, real a);
    if (d < 0) return 0.0;
    if (d < 4.0) return a * (d + 0.5) / 4.0;
    return a * (0.98 ** (d - 4.0 + 0.5));
  endfunction
  function automatic real step_of(real a);
    real sum, al;
    al = 64225.0 / 65536.0;
    sum = 0.0;
    for (int n = 0; n < 400; n++)
      sum += (pulse_v(n, a) + pulse_v(n + 0.5, a)) / 2.0 - al * (pulse_v(n - 1, a) + pulse_v(n - 0.5, a)) / 2.0;
    return sum;
  endfunction

  // windows in which no event may start (BUSY, closed gate), in time stamps
  longint blk_lo [$], blk_hi [$];
  bit     in_calib_phase = 0;

  // frame decoding and checks
  logic [15:0] fw [8]; int fwn = 0;
  int n_frames = 0, n_dv = 0, n_dnv = 0, n_calib_frames = 0, n_tof_ok = 0, n_echecked = 0;
  int n_le_frames = 0, n_charge_frames = 0;
  int fr_ch [C], fr_nc [C];
  bit le_mode [C]; bit charge_mode [C];
  int min_off = 1000, max_off = -1000;
  // demultiplexing blocks (140 words) while the link carries them
  int gx_exp_addr [$], gx_exp_val [$];
  logic [15:0] gb [$];
  int n_gx_blocks = 0, n_gx_vals = 0;
  always @(posedge clk) if (rx_valid && gx_phase) begin
    gb.push_back(rx_word);
    if (gb.size() == 140) begin
      int n;
      n_gx_blocks++;
      n = gb[7];
      check(gb[0] == {8'hB0, module_id} && n >= 1 && n <= 64, "demultiplexing block header");
      for (int j = 0; j < n; j++) begin
        check(gx_exp_addr.size() > 0 && gx_exp_addr[0] == int'(gb[12 + 2*j]) && gx_exp_val[0] == int'($signed(gb[13 + 2*j])),
              "demultiplexed value");
        if (gx_exp_addr.size() > 0) begin void'(gx_exp_addr.pop_front()); void'(gx_exp_val.pop_front()); end
        n_gx_vals++;
      end
      gb.delete();
    end
  end
  always @(posedge clk) if (rx_valid && !gx_phase) begin
    fw[fwn] = rx_word; fwn++;
    if (fwn == 8) begin
      int ch; bit cal, dv, ok; longint t; int en; longint best_d; int bi;
      fwn = 0; n_frames++;
      ch  = int'(fw[0][11:8]);
      check(fw[0][15:12] == 4'hA && fw[0][7:0] == module_id, "frame header");
      {cal, dv, ok} = fw[1][2:0];
      t  = longint'({fw[2], fw[3], fw[4]});
      en = int'(fw[5]);
      fr_ch[ch]++;
      if (ok) n_tof_ok++;
      if (cal) begin
        n_calib_frames++;
        check(en == 60000 && !dv && !ok, "calibration frame contents");
      end else begin
        fr_nc[ch]++;
        if (dv) n_dv++; else n_dnv++;
        if (le_mode[ch]) n_le_frames++;
        if (charge_mode[ch]) n_charge_frames++;
        foreach (blk_lo[i])
          check(!(t > blk_lo[i] + 6 && t < blk_hi[i]), $sformatf("event of ch %0d at %0d in a blocked window", ch, t));
        // the pulse this event belongs to
        best_d = 1000; bi = -1;
        foreach (p_ts[ch][i]) begin
          longint d; d = t - p_ts[ch][i];
          if (d >= 0 && d < 40 && d < best_d) begin best_d = d; bi = i; end
        end
        check(bi >= 0, $sformatf("ch %0d event at %0d matches a pulse", ch, t));
        if (bi >= 0) begin
          bit iso;
          if (int'(best_d) < min_off) min_off = int'(best_d);
          if (int'(best_d) > max_off) max_off = int'(best_d);
          iso = 1;
          foreach (p_ts[ch][j]) if (j != bi && p_ts[ch][j] > p_ts[ch][bi] - 150 && p_ts[ch][j] < p_ts[ch][bi] + 100) iso = 0;
          if (iso && !charge_mode[ch]) begin
            real ex;
            ex = 20.0 * step_of(p_amp[ch][bi]);
            check(dv, $sformatf("isolated pulse of ch %0d is DV", ch));
            check(real'(en) > 0.985 * ex && real'(en) < 1.015 * ex,
                  $sformatf("ch %0d energy %0d, expected %0.0f", ch, en, ex));
            n_echecked++;
          end
          if (iso && charge_mode[ch]) check(en > 0, "charge mode energy");
        end
      end
    end
  end

  // mechanism counters from the inside of the design
  int n_stall = 0, n_afull = 0, n_busy_blocked = 0, n_gate_blocked = 0, n_or = 0;
  bit busy_now = 0, gate_closed = 0;
  int n_pulses_busy_prev, n_pulses_gate_prev;
  always @(posedge clk) if (!rst) begin
    if (dut.ro_valid && !dut.ro_ready) n_stall++;
    if (|dut.afull) n_afull++;
    if (or_trig_out) n_or++;
    check(!gts_lost, "no lost GTS request");
    check(!gx_lost, "no lost demultiplexed value");
    check(ch_overflow == 0, "no channel FIFO overflow");
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_clk(int n); repeat (n) @(posedge clk); #2; endtask

  initial begin
    for (int c = 0; c < C; c++) begin
      cfg[c] = '0;
      cfg[c].trig_alpha = 16'd32113; cfg[c].threshold = 16'd10;
      cfg[c].cfd_en = 1; cfg[c].cfd_delay = 4'd6; cfg[c].cfd_frac = 4'd5;
      cfg[c].k = 11'd20; cfg[c].m = 11'd16; cfg[c].trap_alpha = 16'd64225;
      cfg[c].q = 12'd36; cfg[c].log2n = 3'd2; cfg[c].e_shift = 5'd0;
      cfg[c].emode = EMODE_TRAPEZOID; cfg[c].win = 8'd30;
    end
    trigin_mode = TRIGIN_OFF; trig_in = 0; ts_load = 0; ts_value = '0;
    busy_link = 0; scaler_clear = 0; calib_start = 0;
    rx.max_delay = 3;
    busy_link = 1;       // the receiver holds BUSY until the acquisition starts
    repeat (3) @(posedge clk);
    #1 rst = 0;

    // 1. input delay calibration
    wait_clk(5);
    calib_start = 1; wait_clk(1); calib_start = 0;
    while (calib_done != '1) wait_clk(1);
    for (int c = 0; c < C; c++)
      check(calib_ok[c] && int'(calib_best[c]) == tap_lo(c) + (tap_hi(c) - tap_lo(c)) / 2
            && delay_tap[c] == calib_best[c],
            $sformatf("delay calibration ch %0d: best %0d", c, calib_best[c]));
    cal_phase = 0;

    // time stamp from the GTS root
    ts_value = 48'h0001_0000_0000; ts_load = 1; wait_clk(1); ts_load = 0;
    while (!ready) wait_clk(1);
    wait_clk(600);
    busy_link = 0;
    wait_clk(10);

    // 2. normal running
    pulses_on = 1;
    dnl_clear = 1; wait_clk(1); dnl_clear = 0; dnl_enable = 1;
    wait_clk(30000);
    // STOP code density collected meanwhile: no missing code, one hit per STOP
    dnl_enable = 0;
    wait_clk(4);
    begin
      longint sum; sum = 0;
      for (int i = 0; i < 32; i++) begin
        dnl_addr = 5'(i); wait_clk(2);
        sum += longint'(dnl_count);
        if (dnl_count != 0) n_dnl_codes++;
      end
      check(sum == longint'(dnl_total), "DNL histogram bins add up to the total");
      check(longint'(dnl_total) >= longint'(n_stop_falls) - 1 && longint'(dnl_total) <= longint'(n_stop_falls) + 1,
            $sformatf("DNL histogram total %0d vs %0d STOP edges", dnl_total, n_stop_falls));
      $display("STOP code density: %0d hits over %0d of 32 codes", dnl_total, n_dnl_codes);
    end

    // 3. BUSY
    begin
      int p0;
      p0 = pulses_total;
      busy_link = 1; blk_lo.push_back(longint'(dut.ts));
      wait_clk(4000);
      blk_hi.push_back(longint'(dut.ts)); busy_link = 0;
      n_busy_blocked = pulses_total - p0;
    end
    wait_clk(3000);

    // 4. validation gate: open 500 clocks, closed 700
    trigin_mode = TRIGIN_GATE;
    for (int i = 0; i < 6; i++) begin
      int p0;
      trig_in = 1; wait_clk(500);
      trig_in = 0; blk_lo.push_back(longint'(dut.ts));
      p0 = pulses_total;
      wait_clk(700);
      blk_hi.push_back(longint'(dut.ts) - 4);
      n_gate_blocked += pulses_total - p0;
    end
    trigin_mode = TRIGIN_OFF;
    wait_clk(1000);

    // 5. calibration pulses on TRIG_IN
    pulses_on = 0;
    wait_clk(3000);
    trigin_mode = TRIGIN_CALIB;
    for (int i = 0; i < 3; i++) begin
      trig_in = 1; wait_clk(4); trig_in = 0; wait_clk(600);
    end
    trigin_mode = TRIGIN_OFF;
    wait_clk(3000);

    // 6. mode switch: channels 0..7 to leading edge, 15 to charge
    for (int c = 0; c < 8; c++) begin
      cfg[c].cfd_en = 0; cfg[c].q = 12'd45; le_mode[c] = 1;
    end
    cfg[15].emode = EMODE_CHARGE; cfg[15].e_shift = 5'd2; charge_mode[15] = 1;
    wait_clk(100);
    pulses_on = 1;
    wait_clk(15000);

    // 7. analog demultiplexing: one event of 16 trains of 128 values
    pulses_on = 0;
    wait_clk(500);
    while (dut.ro_valid || fwn != 0) wait_clk(1);
    for (int c = 0; c < C; c++) begin
      cfg[c].threshold = 16'h7FFF;          // no physics triggers meanwhile
      gx_threshold[c] = 14'($signed($urandom_range(0, 2000)) - 1000);
      gx_val[c] = '0;
    end
    wait_clk(200);
    gx_phase = 1; gx_enable = 1;
    wait_clk(20);
    begin
      int vals [C][128];
      for (int i = 0; i < 128; i++)
        for (int c = 0; c < C; c++) begin
          vals[c][i] = ($urandom_range(0, 99) < 10) ? int'(gx_threshold[c]) + 1 + $urandom_range(0, 3000)
                                                    : int'(gx_threshold[c]) - $urandom_range(0, 3000);
          if (vals[c][i] > int'(gx_threshold[c])) begin
            gx_exp_addr.push_back(c * 128 + i); gx_exp_val.push_back(vals[c][i]);
          end
        end
      gx_hold = 1; wait_clk(10);
      for (int i = 0; i < 128; i++) begin
        gx_clk = 1;
        for (int c = 0; c < C; c++) gx_val[c] = 14'(vals[c][i]);
        wait_clk(30); gx_clk = 0; wait_clk(30);
      end
      gx_hold = 0;
    end
    wait_clk(6000);
    check(gx_exp_addr.size() == 0 && n_gx_blocks > 0, $sformatf("all demultiplexed values received (%0d left)", gx_exp_addr.size()));
    gx_enable = 0;
    wait_clk(50);
    gx_phase = 0;

    // 8. drain and compare the counting scales
    pulses_on = 0;
    wait_clk(500);
    while (dut.ro_valid || fwn != 0) wait_clk(1);
    wait_clk(2000);
    for (int c = 0; c < C; c++) begin
      check(longint'(cnt_dv[c]) + longint'(cnt_dnv[c]) == longint'(fr_nc[c]),
            $sformatf("ch %0d scales DV %0d + DNV %0d vs %0d frames", c, cnt_dv[c], cnt_dnv[c], fr_nc[c]));
      check(cnt_trig[c] >= cnt_dv[c] + cnt_dnv[c], "trigger scale at least the events");
      check(fr_ch[c] - fr_nc[c] == 3, $sformatf("ch %0d: 3 calibration frames (%0d)", c, fr_ch[c] - fr_nc[c]));
    end
    check(rx_errors == 0, "link data stable while strobed");
    check(gts_v_ts.size() == 0 && gts_q_ts.size() == 0, "every GTS request decided");

    $display("pulses=%0d frames=%0d DV=%0d DNV(pile-up)=%0d calib=%0d ToF-ok=%0d energy-checked=%0d",
             pulses_total, n_frames, n_dv, n_dnv, n_calib_frames, n_tof_ok, n_echecked);
    $display("stall-cycles=%0d almost-full-cycles=%0d busy-blocked-pulses=%0d gate-blocked-pulses=%0d",
             n_stall, n_afull, n_busy_blocked, n_gate_blocked);
    $display("demultiplexing blocks=%0d values=%0d", n_gx_blocks, n_gx_vals);
    $display("GTS requests=%0d accepted=%0d rejected=%0d OR-trig=%0d LE-frames=%0d charge-frames=%0d ts-offset=%0d..%0d",
             n_gts_req, n_gts_acc, n_gts_rej, n_or, n_le_frames, n_charge_frames, min_off, max_off);
    check(n_stall > 0,          "mechanism: link stall");
    check(n_afull > 0,          "mechanism: FIFO almost full (overflow protection)");
    check(n_dnv > 0,            "mechanism: pile-up");
    check(n_busy_blocked > 0,   "mechanism: BUSY");
    check(n_gate_blocked > 0,   "mechanism: validation gate");
    check(n_calib_frames == 3 * C, "mechanism: calibration events");
    check(n_le_frames > 0 && n_charge_frames > 0, "mechanism: mode switch");
    check(n_tof_ok > 0,         "mechanism: time of flight");
    check(n_gx_blocks > 0,      "mechanism: analog demultiplexing mode");
    check(n_dnl_codes == 32,    "mechanism: STOP code density, no missing code");
    check(n_gts_acc > 0 && n_gts_rej > 0, "mechanism: GTS decisions");
    check(n_echecked > 0,       "energies checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
