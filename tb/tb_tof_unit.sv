// tb_tof_unit: feeds STOP patterns with an edge placed a known number of
// periods and 312.5 ps steps after the start, with a given interpolation
// result, and checks ns_x32 = (1024 - Tstart) + 1024*Tperiod + 32*Tstop, the
// out-of-range case, a STOP already low at the start, a restart n0 the
// result, and that each start gives exactly one record.
module tb_tof_unit;
  import numexo2_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, tstart_done, rec_valid, active;
  logic [9:0] tstart;
  logic [31:0] pattern;
  tof_rec_t rec;
  int n_rec;

  tof_unit dut (.clk, .rst, .start, .tstart_done, .tstart, .pattern, .rec_valid, .rec, .active);

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

  always @(posedge clk) if (!rst && rec_valid) n_rec++;

  // one measurement: STOP edge after 'per' whole patterns, at step 'stp'
  task automatic measure(int per, int stp, int ts_val, int interp_at, bit expect_ok);
    tof_rec_t got; bit seen; int k;
    pattern = '1; tstart_done = 0; tstart = 10'(ts_val);
    start = 1;
    @(posedge clk); #1 start = 0;
    seen = 0; k = 0;
    while (!seen && k < 200) begin
      // pattern of the k-th period after the start
      if (k < per)       pattern = '1;
      else if (k == per) pattern = ~(32'hFFFF_FFFF >> stp);   // 'stp' ones then zeros
      else               pattern = '0;
      tstart_done = (k == interp_at);
      @(posedge clk); #1;
      if (rec_valid) begin seen = 1; got = rec; end
      k++;
    end
    tstart_done = 0;
    check(seen, "record written");
    check(got.ok == expect_ok, $sformatf("ok=%0d expected %0d (per=%0d)", got.ok, expect_ok, per));
    if (expect_ok)
      check(got.ns_x32 == NS_W'((1024 - ts_val) + 1024 * per + 32 * stp),
            $sformatf("per=%0d stp=%0d ts=%0d ns_x32=%0d", per, stp, ts_val, got.ns_x32));
    pattern = '1;
    repeat (3) @(posedge clk);
    #1;
  endtask

  initial begin
    int n0;
    start = 0; tstart_done = 0; tstart = 0; pattern = '1; n_rec = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    n0 = n_rec;
    measure(0, 5, 300, 50, 1);
    measure(3, 0, 1023, 50, 1);
    measure(10, 31, 0, 2, 1);          // interpolation ready n0 STOP
    for (int i = 0; i < 200; i++)
      measure($urandom_range(0, 60), $urandom_range(0, 31), $urandom_range(0, 1023),
              $urandom_range(0, 80), 1);
    measure(70, 3, 100, 50, 0);        // beyond the 64-period range
    check(n_rec - n0 == 204, $sformatf("records %0d for 204 starts", n_rec - n0));
    // STOP already low at start, edge never seen: out of range
    pattern = '0;
    start = 1; @(posedge clk); #1 start = 0;
    repeat (80) @(posedge clk);
    #1 check(!active, "no edge: measurement ended");
    // restart while active: one record (ok=0) for the first start
    pattern = '1;
    n0 = n_rec;
    start = 1; @(posedge clk); #1 start = 0;
    repeat (5) @(posedge clk);
    #1 start = 1; @(posedge clk); #1 start = 0;
    check(rec_valid && !rec.ok, "cut-short record");
    pattern = 32'h0000_FFFF; tstart_done = 1; @(posedge clk); #1 pattern = '0; tstart_done = 0;
    repeat (3) @(posedge clk);
    #1 check(n_rec - n0 == 2, $sformatf("two records for two starts, got %0d", n_rec - n0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
