// tb_trigger_filter: checks the cascade of three low-pass stages bit-exact
// against an integer model using a = 0.2/0.3/0.4 and b = 0.8/0.7/0.6, and
// checks unity DC gain and a three-clock latency.
module tb_trigger_filter;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [15:0] e, f;
  longint st [3];
  longint a_c [3] = '{6554, 9830, 13107};
  longint b_c [3] = '{26214, 22938, 19661};

  trigger_filter dut (.clk, .rst, .e, .f);

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint in0, in1, in2;
    int first;
    e = 0; st = '{0, 0, 0};
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 1500; n++) begin
      e = 16'($signed($urandom_range(0, 12000)) - 6000);
      in0 = e; in1 = (st[0] + 16384) >>> 15; in2 = (st[1] + 16384) >>> 15;
      @(posedge clk);
      // all three states update on the same edge, each from the previous output
      st[2] = in2 * a_c[2] + ((st[2] * b_c[2] + 16384) >>> 15);
      st[1] = in1 * a_c[1] + ((st[1] * b_c[1] + 16384) >>> 15);
      st[0] = in0 * a_c[0] + ((st[0] * b_c[0] + 16384) >>> 15);
      #1 check(f == 16'((st[2] + 16384) >>> 15), $sformatf("n=%0d f=%0d ref=%0d", n, f, (st[2] + 16384) >>> 15));
    end
    // impulse latency: zero input, then one clock of 10000
    e = 0;
    repeat (300) @(posedge clk);
    #1 check(f == 0, $sformatf("settled to zero f=%0d", f));
    e = 10000;
    @(posedge clk); #1 e = 0;
    first = -1;
    for (int n = 1; n <= 6; n++) begin
      @(posedge clk); #1;
      if (first < 0 && f != 0) first = n;
    end
    check(first == 2, $sformatf("latency: first output after %0d more clocks", first));
    // DC gain one
    e = 5000;
    repeat (300) @(posedge clk);
    #1 check(f >= 4998 && f <= 5002, $sformatf("DC gain f=%0d", f));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
