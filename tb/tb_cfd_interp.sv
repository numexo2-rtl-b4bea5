// tb_cfd_interp: feeds random pairs y0 < 0 <= y1 to the dichotomy search and
// checks the result against the exact crossing 1024*(-y0)/(y1-y0) (within
// the rounding of ten halvings), the fixed 50-clock (500 ns) latency, and a
// restart while busy.
module tb_cfd_interp;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic signed [21:0] y0, y1;
  logic [9:0] tstart;

  cfd_interp #(.Y_W(22), .STEPS(10), .STEP_CYCLES(5)) dut (.clk, .rst, .start, .y0, .y1, .busy, .done, .tstart);

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

  task automatic one(int a, int b, int restart_at);
    int lat; real ideal;
    y0 = 22'(a); y1 = 22'(b); start = 1;
    @(posedge clk); #1 start = 0;
    lat = 0;
    if (restart_at > 0) begin
      repeat (restart_at) @(posedge clk);
      #1 start = 1;                      // same values, search restarts
      @(posedge clk); #1 start = 0;
    end
    while (!done && lat < 200) begin @(posedge clk); #1 lat++; end
    ideal = 1024.0 * real'(-a) / real'(b - a);
    check(lat == 50, $sformatf("latency %0d clocks", lat));
    check(real'(tstart) >= ideal - 1.5 && real'(tstart) <= ideal + 0.5,
          $sformatf("y0=%0d y1=%0d tstart=%0d ideal=%f", a, b, tstart, ideal));
  endtask

  initial begin
    start = 0; y0 = 0; y1 = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    one(-100, 100, 0);
    check(tstart == 10'd511 || tstart == 10'd512, $sformatf("midpoint %0d", tstart));
    one(-1, 1000000, 0);
    check(tstart == 0, "crossing at the start of the interval");
    one(-1000000, 0, 0);
    check(tstart >= 10'd1022, "crossing at the end of the interval");
    one(-300, 700, 17);
    for (int i = 0; i < 300; i++) begin
      int a, b;
      a = -$urandom_range(1, 1500000);
      b = $urandom_range(0, 1500000);
      one(a, b, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
