// tb_circ_delay: checks y[n] = x[n - delay] for random data and delays 0, 1,
// 2, random values and the full depth, and the clearing after reset
// (the first outputs are zero, not the memory's old contents).
module tb_circ_delay;
  localparam int DEPTH = 64;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [6:0] delay;
  logic signed [15:0] x, y;
  logic ready;
  int hist [$];

  circ_delay #(.W(16), .DEPTH(DEPTH)) dut (.clk, .rst, .delay, .x, .y, .ready);

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int d);
    int cyc;
    rst = 1; x = 0; delay = 7'(d);
    repeat (2) @(posedge clk);
    #1 rst = 0;
    cyc = 0;
    while (!ready) begin @(posedge clk); #1 cyc++; end
    check(cyc == DEPTH, $sformatf("clearing took %0d clocks", cyc));
    hist.delete();
    for (int n = 0; n < 3 * DEPTH; n++) begin
      x = 16'($urandom);
      hist.push_front(int'(x));            // hist[j] = x[n-j]
      #1;
      if (d == 0 || d <= n)
        check(int'(y) == hist[d], $sformatf("delay %0d n=%0d y=%0d exp=%0d", d, n, y, hist[d]));
      else
        check(y == 0, $sformatf("delay %0d n=%0d cleared output %0d", d, n, y));
      @(posedge clk); #1;
    end
  endtask

  initial begin
    run(0); run(1); run(2); run(3); run(DEPTH); run(DEPTH - 1);
    for (int i = 0; i < 6; i++) run($urandom_range(4, DEPTH - 2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
