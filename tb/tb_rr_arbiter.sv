// tb_rr_arbiter: checks that the grant is one-hot, always a requester, the
// first requester after the last one granted, and that a requester is never
// passed over more than N-1 times (fair service whatever the others' rates).
module tb_rr_arbiter;
  localparam int N = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] req, grant;
  logic [3:0] grant_idx;
  logic advance, any;
  int last, waited [N];

  rr_arbiter #(.N(N)) dut (.clk, .rst, .req, .advance, .grant, .grant_idx, .any);

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

  initial begin
    req = '0; advance = 0; last = N - 1;
    foreach (waited[i]) waited[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 5000; n++) begin
      int expi;
      // channel 0 always requests (high rate), others at random rates
      for (int i = 0; i < N; i++) req[i] = (i == 0) || ($urandom_range(0, 99) < 5 * i);
      if ($urandom_range(0, 9) == 0) req = '0;
      advance = $urandom_range(0, 3) != 0;
      #1;
      expi = -1;
      for (int j = 1; j <= N; j++) if (expi < 0 && req[(last + j) % N]) expi = (last + j) % N;
      check(any == (req != 0), "any");
      if (req != 0) begin
        check($onehot(grant) && grant[expi] && int'(grant_idx) == expi,
              $sformatf("grant %b idx %0d expected %0d", grant, grant_idx, expi));
        if (advance) begin
          for (int i = 0; i < N; i++) if (!req[i]) waited[i] = 0; else if (i != expi) waited[i]++;
          waited[expi] = 0;
          foreach (waited[i]) check(waited[i] < N, $sformatf("channel %0d waited %0d grants", i, waited[i]));
          last = expi;
        end
      end else check(grant == 0, "no grant without request");
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
