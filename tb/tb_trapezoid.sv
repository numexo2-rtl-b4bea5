// tb_trapezoid: checks the recursive trapezoid shaper two ways.
// 1. Bit-exact against the published recursion evaluated in the testbench on
//    the input history (64-bit integers, same alpha quantisation), for random
//    noise and pulses, several k/m settings, sample by sample.
// 2. Shape: an exponential pulse of decay alpha gives a trapezoid that rises
//    over k samples, stays at k*A (within 1 %) for m samples and returns to the
//    baseline after 2k+m samples.
module tb_trapezoid;
  localparam int KM = 64;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [6:0] k, m;
  logic [15:0] alpha;
  logic signed [15:0] e;
  logic signed [31:0] t;
  logic ready;
  longint eh [$];     // eh[j] = E[n-j]
  longint th [$];     // th[j] = T[n-j] (with 16 fractional bits)

  trapezoid #(.W(16), .K_MAX(KM), .M_MAX(KM), .ALPHA_FRAC(16), .ACC_W(48)) dut (
    .clk, .rst, .k, .m, .alpha, .e, .t, .ready);

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint eat(int j);
    return (j < eh.size()) ? eh[j] : 0;
  endfunction

  // c(n-d) = E[n-d-1]*2^16 - alpha*E[n-d-2]
  function automatic longint cterm(int d);
    return (eat(d + 1) <<< 16) - longint'(alpha) * eat(d + 2);
  endfunction

  task automatic start(int kk, int mm, int al);
    rst = 1; e = 0; k = 7'(kk); m = 7'(mm); alpha = 16'(al);
    repeat (2) @(posedge clk);
    #1 rst = 0;
    while (!ready) begin @(posedge clk); #1; end
    eh.delete(); th.delete();
    repeat (4) begin eh.push_front(0); th.push_front(0); end
  endtask

  // one sample; returns the model output for this sample
  task automatic step(int val, output longint tref);
    longint tn;
    e = 16'(val);
    eh.push_front(longint'(val));
    tn = 2 * th[0] - th[1] + cterm(0) - cterm(int'(k)) - cterm(int'(k) + int'(m))
         + cterm(2 * int'(k) + int'(m));
    th.push_front(tn);
    tref = tn >>> 16;
    @(posedge clk); #1;
  endtask

  initial begin
    longint tr;
    longint q [$];
    // 1. bit-exact, output lags the model by two clocks
    for (int cfg = 0; cfg < 4; cfg++) begin
      int kk, mm;
      kk = (cfg == 0) ? 10 : $urandom_range(2, KM);
      mm = (cfg == 0) ? 5  : $urandom_range(0, KM);
      start(kk, mm, (cfg == 1) ? 65523 : $urandom_range(60000, 65535));
      q.delete();
      for (int n = 0; n < 1500; n++) begin
        int v;
        v = $urandom_range(0, 200) - 100;
        if ((n % 300) == 20) v += 6000;
        step(v, tr);
        q.push_back(tr);
        if (q.size() > 2) begin
          longint exp_t;
          exp_t = q.pop_front();
          check(longint'(t) == exp_t, $sformatf("k=%0d m=%0d n=%0d t=%0d exp=%0d", kk, mm, n, t, exp_t));
        end
      end
    end
    // 2. shape for an exponential pulse, k=20, m=10, alpha=0.99
    begin
      int kk, mm, a0, hi_cnt, rise_at, fall_at;
      real dec;
      longint peak;
      int vals [$];
      kk = 20; mm = 10; a0 = 4000;
      start(kk, mm, 64880);                   // 0.99 * 65536 = 64880.6
      dec = 64880.0 / 65536.0;
      for (int n = 0; n < 40; n++) step(0, tr);
      for (int n = 0; n < 150; n++) begin
        step($rtoi(a0 * (dec ** n) + 0.5), tr);
        vals.push_back(int'(t));
      end
      hi_cnt = 0; rise_at = -1; fall_at = -1; peak = 0;
      foreach (vals[i]) begin
        if (vals[i] > peak) peak = vals[i];
        if (vals[i] > 0.99 * kk * a0 && vals[i] < 1.01 * kk * a0) hi_cnt++;
      end
      check(peak > 0.99 * kk * a0 && peak < 1.01 * kk * a0, $sformatf("flat top %0d vs k*A=%0d", peak, kk * a0));
      check(hi_cnt >= mm && hi_cnt <= mm + 3, $sformatf("flat top lasts %0d samples, m=%0d", hi_cnt, mm));
      check(vals[2 * kk + mm + 10] > -0.01 * kk * a0 && vals[2 * kk + mm + 10] < 0.01 * kk * a0,
            $sformatf("back to baseline: %0d", vals[2 * kk + mm + 10]));
      check(vals[kk / 2 + 2] > 0.3 * kk * a0 && vals[kk / 2 + 2] < 0.7 * kk * a0,
            $sformatf("linear rise: half-way value %0d", vals[kk / 2 + 2]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
