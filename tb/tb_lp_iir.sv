// tb_lp_iir: checks the first-order low-pass filter sample by sample against
// an integer model of F[n] = a*E[n] + b*F[n-1], and checks its DC gain of one
// and its step response settling towards the input.
module tb_lp_iir;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [15:0] x, y;
  logic [15:0] a = 16'd6554, b = 16'd26214;   // 0.2 / 0.8
  longint st_ref;

  lp_iir #(.IN_W(16), .COEF_FRAC(15)) dut (.clk, .rst, .x, .a, .b, .y);

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
    x = 0; st_ref = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // random samples, bit-exact against the model
    for (int n = 0; n < 2000; n++) begin
      x = 16'($signed($urandom_range(0, 16000)) - 8000);
      @(posedge clk);
      st_ref = longint'(x) * longint'(a) + ((st_ref * longint'(b) + 16384) >>> 15);
      #1;
      check(y == 16'((st_ref + 16384) >>> 15), $sformatf("n=%0d y=%0d ref=%0d st=%0d stref=%0d x=%0d", n, y, st_ref >>> 15, dut.st, st_ref, x));
    end
    // step to 4000: settles to the input within 2 LSB (DC gain one)
    x = 4000;
    repeat (200) @(posedge clk);
    #1 check(y >= 3999 && y <= 4001, $sformatf("DC gain: y=%0d", y));
    // decay: after the input returns to 0, the output falls by ~0.8 per sample
    x = 0;
    @(posedge clk); #1;
    check(y > 3100 && y < 3300, $sformatf("first step down y=%0d", y));
    repeat (100) @(posedge clk);
    #1 check(y == 0, $sformatf("decayed y=%0d", y));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
