// tb_moving_sum: checks Sum[i] = Sum[i-1] + E[i] - E[i-N] against a direct sum
// of the last N samples for N = 1, 4, 32 and 256, and the scaled average.
module tb_moving_sum;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] log2n;
  logic signed [31:0] x, avg;
  logic signed [39:0] sum;
  longint hist [$];

  moving_sum #(.W(32), .LOG2N_MAX(8)) dut (.clk, .rst, .log2n, .x, .sum, .avg);

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

  task automatic run(int l2);
    int n;
    n = 1 << l2;
    rst = 1; x = 0; log2n = 4'(l2);
    repeat (2) @(posedge clk);
    #1 rst = 0;
    hist.delete();
    for (int i = 0; i < 1200; i++) begin
      longint ref_sum;
      x = 32'($signed($urandom_range(0, 2000000)) - 1000000);
      hist.push_front(longint'(x));
      @(posedge clk); #1;
      ref_sum = 0;
      for (int j = 0; j < n && j < hist.size(); j++) ref_sum += hist[j];
      check(longint'(sum) == ref_sum, $sformatf("N=%0d i=%0d sum=%0d ref=%0d", n, i, sum, ref_sum));
      check(longint'(avg) == (ref_sum >>> l2), "average");
    end
  endtask

  initial begin
    run(0); run(2); run(5); run(8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
