// tb_trigger_dcfd: drives pulses of random rise time and amplitude through the
// differentiator/discriminator in leading-edge and in CFD mode and compares
// every trigger request, and the two values around the crossing, with a
// model computed in the testbench from S[n] = F[n] - alpha*F[n-1] and
// 10*dCFD[n] = 10*S[n-D] - frac*S[n]. It also checks the 50 ns dead time and
// the inhibit input, and counts how often each occurred.
module tb_trigger_dcfd;
  localparam int NS = 6000;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [15:0] f, thr, s;
  logic [15:0] alpha;
  logic cfd_en, inhibit, trig;
  logic [3:0] delay, frac;
  logic signed [21:0] y0, y1;

  trigger_dcfd dut (.clk, .rst, .f, .alpha, .threshold(thr), .cfd_en, .delay, .frac,
                    .inhibit, .s, .trig, .y0, .y1);

  int fa [NS];
  bit inh [NS + 4];
  bit exp_trig [NS + 4];
  longint exp_y0 [NS + 4], exp_y1 [NS + 4];
  int n_dead_blocked, n_inhibited, n_trig;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stimulus: flat baseline, pulses rising over 2..8 samples, slow return
  task automatic make_stimulus(bit close_pulses);
    int v, n;
    v = 0; n = 0;
    for (int i = 0; i < NS; i++) begin fa[i] = 0; inh[i] = 0; end
    for (int i = 0; i < NS + 4; i++) inh[i] = 0;
    n = 50;
    while (n < NS - 60) begin
      int rise, amp, reps;
      reps = (close_pulses && $urandom_range(0, 2) == 0) ? 2 : 1;
      for (int r = 0; r < reps; r++) begin
        rise = $urandom_range(2, 8);
        amp  = $urandom_range(200, 3000);
        for (int j = 0; j < rise && n < NS; j++) begin
          v += (amp * (j + 1 + $urandom_range(0, 2))) / (rise * 2) + 1;
          fa[n++] = v;
        end
        if (r == 0 && reps == 2) begin               // short dip between two pulses
          int gap;
          gap = $urandom_range(1, 6);
          for (int j = 0; j < gap; j++) fa[n++] = v;
        end
      end
      for (int j = 0; j < $urandom_range(20, 50) && n < NS; j++) begin
        v = v - v / 16;
        fa[n++] = v;
      end
      if ($urandom_range(0, 7) == 0) for (int j = n - 40; j < n; j++) inh[j] = 1;
    end
  endtask

  // model of the discriminator on the sample arrays
  task automatic run_model(bit cfd, int d, int fr, int th, int al);
    longint S [NS];
    longint c [NS];
    bit armed; int arm_cnt, dead;
    bit above_d;
    armed = 0; arm_cnt = 0; dead = 0; above_d = 1;
    for (int n = 0; n < NS + 4; n++) begin exp_trig[n] = 0; exp_y0[n] = 0; exp_y1[n] = 0; end
    for (int n = 0; n < NS; n++) begin
      longint prev;
      prev = (n == 0) ? 0 : fa[n-1];
      S[n] = fa[n] - ((longint'(al) * prev) >>> 15);
      c[n] = 10 * ((n >= d) ? S[n-d] : 0) - fr * S[n];
    end
    for (int n = 1; n < NS; n++) begin
      bit above, fire, go;
      above = S[n] >= th;
      fire  = cfd ? (armed && c[n-1] < 0 && c[n] >= 0) : (above && !above_d);
      go    = fire && dead == 0 && !inh[n+1];
      if (fire && dead != 0) n_dead_blocked++;
      if (fire && dead == 0 && inh[n+1]) n_inhibited++;
      if (dead != 0) dead--;
      if (above && !above_d && !armed) begin armed = 1; arm_cnt = 0; end
      else if (armed) begin arm_cnt++; if (arm_cnt == 32) armed = 0; end
      if (go) begin
        exp_trig[n] = 1; dead = 4; armed = 0;
        exp_y0[n] = cfd ? c[n-1] : S[n-1] - th;
        exp_y1[n] = cfd ? c[n]   : S[n]   - th;
      end else if (fire && cfd) armed = 0;
      above_d = above;
    end
  endtask

  task automatic run(bit cfd, int d, int fr, int th);
    int ntr;
    ntr = 0;
    rst = 1; f = 0; inhibit = 0;
    cfd_en = cfd; delay = 4'(d); frac = 4'(fr); thr = 16'(th); alpha = 16'd32768;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < NS + 2; n++) begin
      f = (n < NS) ? 16'(fa[n]) : 16'(fa[NS-1]);
      inhibit = inh[n];
      @(posedge clk); #1;                     // edge n
      if (n >= 3) begin
        check(trig == exp_trig[n-1], $sformatf("cfd=%0d sample %0d trig=%0d exp=%0d", cfd, n-1, trig, exp_trig[n-1]));
        if (exp_trig[n-1]) begin
          ntr++;
          check(longint'(y0) == exp_y0[n-1] && longint'(y1) == exp_y1[n-1],
                $sformatf("y0/y1 %0d %0d exp %0d %0d", y0, y1, exp_y0[n-1], exp_y1[n-1]));
          if (cfd) check(y0 < 0 && y1 >= 0, "crossing values bracket zero");
        end
      end
    end
    n_trig += ntr;
    check(ntr > 20, $sformatf("cfd=%0d only %0d triggers", cfd, ntr));
  endtask

  initial begin
    n_dead_blocked = 0; n_inhibited = 0; n_trig = 0;
    make_stimulus(1);
    run_model(0, 0, 0, 60, 32768);
    run(0, 0, 0, 60);
    make_stimulus(0);
    run_model(1, 3, 5, 60, 32768);
    run(1, 3, 5, 60);
    make_stimulus(1);
    run_model(1, 2, 3, 100, 32768);
    run(1, 2, 3, 100);
    check(n_dead_blocked > 0, "dead time was exercised");
    check(n_inhibited > 0, "inhibit was exercised");
    $display("triggers=%0d dead-time blocked=%0d inhibited=%0d", n_trig, n_dead_blocked, n_inhibited);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
