// tb_energy_calc: drives a noisy baseline with steps of random height and
// trigger pulses, and checks each result against the baseline and flat-top
// window sums computed directly from the input (N samples before the trigger,
// N samples from q after it), the DV/DNV decision for triggers inside or
// outside the k+m window, the clipping and the completion time
// max(k+m, q+N) clocks after the trigger.
module tb_energy_calc;
  import numexo2_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [31:0] x;
  logic trig, busy, ev_start, pileup, done, dv;
  logic [11:0] k, m, q;
  logic [2:0] log2n;
  logic [4:0] e_shift;
  logic [15:0] energy;
  longint xs [$];
  int n_dv, n_dnv, n_pile;

  energy_calc dut (.clk, .rst, .x, .trig, .k, .m, .q, .log2n, .e_shift, .busy, .ev_start,
                   .pileup, .done, .energy, .dv);

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint level;
  task automatic tick(bit tr);
    x = 32'(level + $urandom_range(0, 40) - 20);
    trig = tr;
    xs.push_back(longint'(x));
    @(posedge clk); #1;
  endtask

  task automatic event_test(int height, int pile_at);
    int t0, len, n, fa, lat;
    longint bsum, fsum, diff, expe;
    bit got; bit expdv;
    n  = 1 << log2n;
    fa = int'(q) + n;
    len = (int'(k) + int'(m) > fa) ? int'(k) + int'(m) : fa;
    repeat (n + 5) tick(0);
    t0 = xs.size();
    level += height;
    tick(1);
    got = 0; lat = 1;
    expdv = !(pile_at > 0 && pile_at <= len);
    while (!got && lat < 5000) begin
      tick(lat == pile_at);
      if (done) got = 1; else lat++;
    end
    bsum = 0; fsum = 0;
    for (int i = t0 - n; i < t0; i++) bsum += xs[i];
    for (int i = t0 + int'(q); i < t0 + int'(q) + n; i++) fsum += xs[i];
    diff = ((fsum - bsum) >>> log2n) >>> e_shift;
    expe = diff < 0 ? 0 : (diff > 65535 ? 65535 : diff);
    check(got && lat == len, $sformatf("done after %0d clocks, expected %0d", lat, len));
    check(longint'(energy) == expe, $sformatf("energy %0d expected %0d (h=%0d)", energy, expe, height));
    check(dv == expdv, $sformatf("dv=%0d expected %0d (pile at %0d, len %0d)", dv, expdv, pile_at, len));
    if (dv) n_dv++; else n_dnv++;
    level -= height;
    repeat (5) tick(0);
  endtask

  initial begin
    x = 0; trig = 0; level = 1000; n_dv = 0; n_dnv = 0; n_pile = 0;
    k = 12'd20; m = 12'd10; q = 12'd25; log2n = 3'd3; e_shift = 5'd0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    event_test(500, 0);
    event_test(-300, 0);              // negative difference: clipped to 0
    event_test(70000, 0);             // clipped to 65535
    event_test(800, 10);              // pile-up inside k+m: DNV
    event_test(800, 34);              // just after the end: DV
    for (int i = 0; i < 150; i++) begin
      k = 12'($urandom_range(2, 60)); m = 12'($urandom_range(0, 60));
      q = 12'($urandom_range(0, 80)); log2n = 3'($urandom_range(0, 6));
      e_shift = 5'($urandom_range(0, 3));
      event_test($urandom_range(0, 8000), ($urandom_range(0, 2) == 0) ? $urandom_range(1, 120) : 0);
    end
    check(n_dv > 0 && n_dnv > 0, $sformatf("DV %0d DNV %0d", n_dv, n_dnv));
    $display("DV=%0d DNV=%0d", n_dv, n_dnv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && pileup) n_pile++;
endmodule
