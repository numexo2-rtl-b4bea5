// tb_dsp_channel: one channel driven by detector-like pulses (linear rise of
// 4 samples, exponential decay 0.98 per sample).
//  * isolated pulses: one event each, DV, energy = k * amplitude within 2 %;
//  * pulse pairs 32 samples apart (inside k+m): two trigger requests, one
//    event, DNV;
//  * time of flight: identical pulses with the STOP moved by one period and by
//    5 steps give ns_x32 differences of exactly 1024 and 160;
//  * TRIG_IN as calibration: an event with energy 60000, DNV and calib set;
//  * TRIG_IN as validation gate, and BUSY: pulses outside the gate or during
//    BUSY give no event;
//  * TAC mode (height of a flat-topped step) and charge mode (pulse integral).
// Each mechanism is counted and must have occurred.
module tb_dsp_channel;
  import numexo2_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ch_cfg_t cfg;
  trigin_mode_e trigin_mode;
  logic signed [13:0] s0, s1;
  logic [47:0] ts;
  logic trig_in, busy, fifo_afull, disc_trig, trig_req, e_wr, t_wr, ready;
  logic [31:0] stop_pattern;
  energy_rec_t e_rec;
  tof_rec_t t_rec;
  longint ncyc;

  pulse_gen gen (.clk, .s0, .s1);

  dsp_channel #(.K_MAX(64), .M_MAX(64)) dut (
    .clk, .rst, .cfg, .trigin_mode, .s0, .s1, .ts, .trig_in, .busy, .fifo_afull, .stop_pattern,
    .disc_trig, .trig_req, .e_wr, .e_rec, .t_wr, .t_rec, .ready);

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 30) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // STOP: low from clock stop_clk, step stop_step (0..31) on
  longint stop_clk = -1; int stop_step = 0;
  always_ff @(posedge clk) begin
    ts <= rst ? '0 : ts + 1'b1;
    ncyc <= rst ? 0 : ncyc + 1;
  end
  always_comb begin
    if (stop_clk < 0 || ncyc < stop_clk)        stop_pattern = '1;
    else if (ncyc == stop_clk)                  stop_pattern = ~(32'hFFFF_FFFF >> stop_step);
    else if (ncyc < stop_clk + 3)               stop_pattern = '0;
    else                                        stop_pattern = '1;
  end

  // collect records
  energy_rec_t erecs [$];
  tof_rec_t    trecs [$];
  int n_disc, n_req;
  always @(posedge clk) if (!rst) begin
    if (e_wr) erecs.push_back(e_rec);
    if (t_wr) trecs.push_back(t_rec);
    if (disc_trig) n_disc++;
    if (trig_req) n_req++;
  end

  // step height seen by the pole-zero corrected trapezoid for a pulse of
  // amplitude a: sum of E[n] - alpha*E[n-1] over the pulse
  function automatic real pulse_v(real d, real a);
    if (d < 0) return 0.0;
    if (d < gen.rise) return a * (d + 0.5) / gen.rise;
    return a * (gen.decay ** (d - gen.rise + 0.5));
  endfunction
  function automatic real step_of(real a);
    real sum, al;
    al = 64225.0 / 65536.0;
    sum = 0.0;
    for (int n = 0; n < 400; n++)
      sum += (pulse_v(n, a) + pulse_v(n + 0.5, a)) / 2.0 - al * (pulse_v(n - 1, a) + pulse_v(n - 0.5, a)) / 2.0;
    return sum;
  endfunction
  task automatic wait_clk(int n); repeat (n) @(posedge clk); #2; endtask

  int n_dv, n_dnv, n_calib, n_gate_blocked, n_busy_blocked, n_tof, n_tac, n_charge;

  initial begin
    cfg = '0;
    cfg.trig_alpha = 16'd32113;        // 0.98 in Q1.15
    cfg.threshold  = 16'd10;
    cfg.cfd_en     = 1; cfg.cfd_delay = 4'd6; cfg.cfd_frac = 4'd5;
    cfg.k = 11'd20; cfg.m = 11'd16; cfg.trap_alpha = 16'd64225;   // 0.98 * 65536
    cfg.q = 12'd36; cfg.log2n = 3'd2; cfg.e_shift = 5'd0; cfg.emode = EMODE_TRAPEZOID;
    cfg.win = 8'd40;
    trigin_mode = TRIGIN_OFF; trig_in = 0; busy = 0; fifo_afull = 0;
    n_disc = 0; n_req = 0; n_dv = 0; n_dnv = 0; n_calib = 0; n_gate_blocked = 0;
    n_busy_blocked = 0; n_tof = 0; n_tac = 0; n_charge = 0;
    gen.noise = 1.0; gen.base = -200.0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    while (!ready) @(posedge clk);
    wait_clk(400);

    // isolated pulses
    for (int i = 0; i < 25; i++) begin
      real a; int nb;
      a = 400.0 + real'($urandom_range(0, 1500));
      nb = erecs.size();
      gen.add_pulse(gen.n + 2, a);
      wait_clk(400);
      check(erecs.size() == nb + 1 && trecs.size() == nb + 1, $sformatf("one event for one pulse (%0d)", erecs.size() - nb));
      if (erecs.size() == nb + 1) begin
        energy_rec_t r; r = erecs[nb];
        check(r.dv && !r.calib, "isolated pulse is DV");
        check(real'(r.energy) > 0.99 * 20.0 * step_of(a) && real'(r.energy) < 1.01 * 20.0 * step_of(a),
              $sformatf("energy %0d for k*step = %0.0f", r.energy, 20.0 * step_of(a)));
        if (r.dv) n_dv++;
      end
    end

    // pile-up: two pulses 32 samples apart
    for (int i = 0; i < 5; i++) begin
      int nb, nd;
      nb = erecs.size(); nd = n_disc;
      gen.add_pulse(gen.n + 2, 800.0);
      gen.add_pulse(gen.n + 34, 900.0);
      wait_clk(500);
      check(n_disc - nd == 2, $sformatf("two trigger requests for two pulses (%0d)", n_disc - nd));
      check(erecs.size() == nb + 1, "one event for the pair");
      if (erecs.size() == nb + 1) begin
        check(!erecs[nb].dv, "pile-up gives DNV");
        if (!erecs[nb].dv) n_dnv++;
      end
    end

    // time of flight: same pulse, STOP moved by one period then by 5 steps
    begin
      int ns0 [3]; int nb;
      gen.noise = 0.0;
      for (int j = 0; j < 3; j++) begin
        longint t0;
        wait_clk(600);
        nb = trecs.size();
        t0 = gen.n + 2;
        gen.add_pulse(t0, 1000.0);
        stop_clk  = t0 + 20 + ((j == 1) ? 1 : 0);
        stop_step = (j == 2) ? 12 : 7;
        wait_clk(300);
        check(trecs.size() == nb + 1 && trecs[nb].ok, "time of flight measured");
        ns0[j] = (trecs.size() == nb + 1) ? int'(trecs[nb].ns_x32) : 0;
        if (trecs.size() == nb + 1 && trecs[nb].ok) n_tof++;
      end
      stop_clk = -1;
      check(ns0[1] - ns0[0] == 1024, $sformatf("one period later: %0d -> %0d", ns0[0], ns0[1]));
      check(ns0[2] - ns0[0] == 160, $sformatf("5 steps later: %0d -> %0d", ns0[0], ns0[2]));
      check(ns0[0] > 1024 * 3 && ns0[0] < 1024 * 8, $sformatf("range of ns_x32 %0d", ns0[0]));
      gen.noise = 1.0;
    end

    // calibration from TRIG_IN
    begin
      int nb; longint tcal;
      trigin_mode = TRIGIN_CALIB;
      nb = erecs.size();
      wait_clk(10);
      trig_in = 1; tcal = longint'(ts);
      wait_clk(3); trig_in = 0;
      wait_clk(20);
      check(erecs.size() == nb + 1 && trecs.size() == nb + 1, "calibration event written");
      if (erecs.size() == nb + 1) begin
        check(erecs[nb].calib && !erecs[nb].dv && erecs[nb].energy == 16'd60000, "calibration record: 60000, DNV");
        check(longint'(erecs[nb].ts) >= tcal && longint'(erecs[nb].ts) <= tcal + 2, "calibration time stamp");
        if (erecs[nb].calib) n_calib++;
      end
      trigin_mode = TRIGIN_OFF;
    end

    // validation gate
    begin
      int nb;
      trigin_mode = TRIGIN_GATE;
      nb = erecs.size();
      gen.add_pulse(gen.n + 2, 900.0);
      wait_clk(400);
      check(erecs.size() == nb, "no event outside the gate");
      if (erecs.size() == nb) n_gate_blocked++;
      trig_in = 1;
      wait_clk(5);
      gen.add_pulse(gen.n + 2, 900.0);
      wait_clk(400);
      check(erecs.size() == nb + 1, "event inside the gate");
      trig_in = 0; trigin_mode = TRIGIN_OFF;
    end

    // BUSY
    begin
      int nb;
      nb = erecs.size();
      busy = 1;
      gen.add_pulse(gen.n + 2, 900.0);
      wait_clk(400);
      check(erecs.size() == nb, "no event while BUSY");
      if (erecs.size() == nb) n_busy_blocked++;
      busy = 0;
      wait_clk(100);
    end

    // TAC mode: flat-topped step, energy = height
    begin
      int nb; real h;
      cfg.emode = EMODE_TAC; cfg.q = 12'd24; cfg.log2n = 3'd3; cfg.k = 11'd40; cfg.m = 11'd0;
      gen.decay = 1.0;
      h = 1234.0;
      nb = erecs.size();
      gen.add_pulse(gen.n + 2, h);
      wait_clk(100);
      gen.add_pulse(gen.n + 2, -h);
      wait_clk(300);
      check(erecs.size() >= nb + 1, "TAC event");
      if (erecs.size() >= nb + 1) begin
        check(real'(erecs[nb].energy) > h - 4.0 && real'(erecs[nb].energy) < h + 4.0,
              $sformatf("TAC height %0d for %0.0f", erecs[nb].energy, h));
        n_tac++;
      end
      gen.decay = 0.98;
    end

    // charge mode: sum of 2*win samples above the baseline
    begin
      int nb; real a, expq;
      wait_clk(200);
      cfg.emode = EMODE_CHARGE; cfg.k = 11'd20; cfg.m = 11'd16; cfg.q = 12'd36; cfg.log2n = 3'd2;
      cfg.win = 8'd30; cfg.e_shift = 5'd2;
      a = 700.0;
      nb = erecs.size();
      gen.add_pulse(gen.n + 2, a);
      wait_clk(400);
      // the window opens at the trigger, about 8 clocks before the pulse in
      // the delayed samples: integral from the pulse start over win-8 clocks
      expq = 0.0;
      for (int j = 0; j < 2 * 22; j++) expq += pulse_v(real'(j) / 2.0, a);
      expq = expq / 4.0;
      check(erecs.size() == nb + 1, "charge event");
      if (erecs.size() == nb + 1) begin
        check(real'(erecs[nb].energy) > 0.85 * expq && real'(erecs[nb].energy) < 1.15 * expq,
              $sformatf("charge %0d, integral from the pulse start %0.0f", erecs[nb].energy, expq));
        n_charge++;
      end
    end

    check(n_req == erecs.size(), $sformatf("one request per event: %0d requests, %0d events", n_req, erecs.size()));
    check(erecs.size() == trecs.size(), "as many timing records as energy records");
    $display("DV=%0d DNV=%0d ToF=%0d calib=%0d gate-blocked=%0d busy-blocked=%0d TAC=%0d charge=%0d",
             n_dv, n_dnv, n_tof, n_calib, n_gate_blocked, n_busy_blocked, n_tac, n_charge);
    check(n_dv > 0 && n_dnv > 0 && n_tof == 3 && n_calib > 0 && n_gate_blocked > 0 && n_busy_blocked > 0
          && n_tac > 0 && n_charge > 0, "every mechanism occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
