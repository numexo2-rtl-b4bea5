// tb_stop_oversampler: generates the four 400 MHz phases and the 100 MHz
// clock, drops and raises STOP at random times, and checks every 32-bit
// pattern against the value STOP had at each of the 32 sampling instants of
// the 10 ns period (312.5 ps apart, earliest in bit 31). The pattern taken at
// a 100 MHz edge Tc describes the period [Tc-15 ns, Tc-5 ns).
`timescale 1ps/1ps
module tb_stop_oversampler;
  logic clk100 = 0;
  logic [3:0] clk400 = '0;
  logic stop_in = 1;
  logic [31:0] pattern;
  int checks = 0, failures = 0;
  longint t_fall [$], t_rise [$];   // STOP edge times
  int offs [4] = '{0, 312, 625, 938};

  stop_oversampler dut (.clk100, .clk400, .stop_in, .pattern);

  for (genvar p = 0; p < 4; p++) begin : g_clk
    initial begin
      #(offs[p]);
      forever #1250 clk400[p] = ~clk400[p];
    end
  end
  initial begin
    #1250;
    forever #5000 clk100 = ~clk100;
  end

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // STOP level at time t from the recorded edges (1 = idle)
  function automatic bit stop_at(longint t);
    bit v; v = 1;
    foreach (t_fall[i]) if (t >= t_fall[i] && (i >= t_rise.size() || t < t_rise[i])) v = 0;
    return v;
  endfunction

  initial begin
    #(2000 * 10000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // STOP stimulus: low pulses of 3..40 ns, at random positions
  initial begin
    longint t;
    #50000;
    for (int i = 0; i < 300; i++) begin
      int d;
      d = $urandom_range(20000, 60000);
      d = d - (d % 2500) + 100 + 312 * $urandom_range(0, 7) + $urandom_range(0, 200);
      #(d);
      t = $time; t_fall.push_back(t); stop_in = 0;
      d = $urandom_range(3000, 40000);
      d = d - (d % 2500) + 100 + 312 * $urandom_range(0, 7) + $urandom_range(0, 200);
      #(d);
      t = $time; t_rise.push_back(t); stop_in = 1;
    end
  end

  // compare each pattern with the sampled STOP level
  initial begin
    int edges_seen;
    edges_seen = 0;
    #100000;
    while ($time < 1800 * 10000) begin
      longint tc;
      logic [31:0] expv;
      @(posedge clk100);
      tc = $time;
      #1;
      for (int i = 0; i < 32; i++) begin
        longint ts;
        ts = tc - 15000 + 2500 * (i / 8) + ((i % 8) < 4 ? offs[i % 4] : 1250 + offs[i % 4]);
        expv[31 - i] = stop_at(ts);
      end
      check(pattern == expv, $sformatf("t=%0d pattern=%b expected=%b", tc, pattern, expv));
      if (pattern != '1 && pattern != '0) edges_seen++;
    end
    check(edges_seen > 200, $sformatf("only %0d patterns with an edge", edges_seen));
    $display("patterns with an edge inside: %0d", edges_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
