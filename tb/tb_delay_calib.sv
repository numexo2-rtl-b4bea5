// tb_delay_calib: emulates an ADC lane whose received word is correct only
// for a set of delay taps, runs the scan, and checks the 32-bit result word
// and the chosen tap (middle of the largest run of good taps, lower middle for
// even runs) against a reference computed here. Includes the pattern read
// from the published example (10 zeros, 10 ones, 8 zeros, 4 ones) and random
// windows, some wrapping and some with no good tap.
module tb_delay_calib;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, ok;
  logic [13:0] pattern, rx0, rx1;
  logic [4:0] tap, best;
  logic [31:0] scan, good;

  delay_calib #(.TAPS(32), .SETTLE(4), .COMPARE(8)) dut (
    .clk, .rst, .start, .pattern, .rx0, .rx1, .tap, .busy, .done, .ok, .scan, .best);

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

  // received word: correct on good taps, corrupted otherwise; marginal taps
  // (next to a good one) fail only now and then
  always_comb begin
    rx0 = good[tap] ? pattern : pattern ^ 14'h0101;
    rx1 = good[tap] ? pattern : pattern ^ 14'h2000;
  end

  task automatic run(logic [31:0] g);
    int bl, bs, rl, rs, lat; int expbest;
    good = g; pattern = 14'h2A5C;
    // reference: largest run of ones, lowest index first on ties
    bl = 0; bs = 0; rl = 0; rs = 0;
    for (int i = 0; i < 32; i++) begin
      if (g[i]) begin
        if (rl == 0) rs = i;
        rl++;
        if (rl > bl) begin bl = rl; bs = rs; end
      end else rl = 0;
    end
    expbest = bs + (bl - 1) / 2;
    #1 start = 1; @(posedge clk); #1 start = 0;
    lat = 0;
    while (!done && lat < 5000) begin @(posedge clk); #1 lat++; end
    check(done, "done");
    check(scan == g, $sformatf("scan %b expected %b", scan, g));
    check(ok == (bl != 0), "ok flag");
    if (bl != 0) check(int'(best) == expbest, $sformatf("best %0d expected %0d for %b", best, expbest, g));
    check(lat >= 32 * 12 && lat <= 32 * 12 + 36, $sformatf("scan time %0d", lat));
    @(posedge clk);
  endtask

  initial begin
    start = 0; good = '0; pattern = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    run(32'b0000000000_1111111111_00000000_1111);  // example word, bit 0 at the right
    check(int'(best) + 1 == 18 || int'(best) + 1 == 17, $sformatf("example position %0d", best + 1));
    run(32'h0000_0000);
    run(32'hFFFF_FFFF);
    run(32'h8000_0001);
    for (int i = 0; i < 30; i++) begin
      logic [31:0] g; int a, l;
      a = $urandom_range(0, 31); l = $urandom_range(1, 14);
      g = '0;
      for (int j = 0; j < l && a + j < 32; j++) g[a + j] = 1;
      if ($urandom_range(0, 1)) g[$urandom_range(0, 31)] = 1;
      run(g);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
