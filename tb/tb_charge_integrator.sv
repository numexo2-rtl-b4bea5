// tb_charge_integrator: random pulses at 200 MS/s (two samples per clock)
// with a baseline offset; checks each charge against the sum of the 2*win
// samples from the trigger minus the baseline (mean pair of the 16 clocks
// before the trigger), the shift and clipping, and done win-1 clocks after the trigger clock.
module tb_charge_integrator;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [15:0] s0, s1;
  logic trig, busy, done;
  logic [7:0] win;
  logic [4:0] shift;
  logic [15:0] charge;
  longint pairs [$];

  charge_integrator dut (.clk, .rst, .s0, .s1, .trig, .win, .shift, .busy, .done, .charge);

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

  int base, amp;
  task automatic tick(bit tr, bit pulse, int j);
    int a, b;
    a = base + $urandom_range(0, 6) - 3;
    b = base + $urandom_range(0, 6) - 3;
    if (pulse) begin a += amp * (8 - (j % 8)) / 8; b += amp * (8 - (j % 8)) / 16; end
    s0 = 16'(a); s1 = 16'(b); trig = tr;
    pairs.push_back(longint'(a) + longint'(b));
    @(posedge clk); #1;
  endtask

  task automatic one();
    int t0, lat; longint bs, acc, sh, expc; bit got;
    repeat (20) tick(0, 0, 0);
    t0 = pairs.size();
    tick(1, 1, 0);
    got = 0; lat = 1;
    if (win == 1 && done) got = 1;
    while (!got && lat < 1000) begin
      tick(0, 1, lat);
      if (done) got = 1; else lat++;
    end
    bs = 0;
    for (int i = t0 - 16; i < t0; i++) bs += pairs[i];
    bs = bs >>> 4;
    acc = 0;
    for (int i = t0; i < t0 + int'(win); i++) acc += pairs[i] - bs;
    sh = acc >>> shift;
    expc = sh < 0 ? 0 : (sh > 65535 ? 65535 : sh);
    check(got, "done");
    check(lat == int'(win) - 1 || (win == 1 && lat == 1), $sformatf("latency %0d for win %0d", lat, win));
    check(longint'(charge) == expc, $sformatf("charge %0d expected %0d (win %0d)", charge, expc, win));
  endtask

  initial begin
    s0 = 0; s1 = 0; trig = 0; base = 300; amp = 1000; win = 8'd10; shift = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    one();
    for (int i = 0; i < 200; i++) begin
      base = $urandom_range(0, 2000) - 1000; amp = $urandom_range(0, 8000);
      win = 8'($urandom_range(2, 255)); shift = 5'($urandom_range(0, 6));
      one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
