// tb_sync_fifo: random writes and reads against a queue model; checks data
// order, full/empty flags, the fill count and that writes when full and
// reads when empty are ignored.
module tb_sync_fifo;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr, rd, full, empty;
  logic [15:0] din, dout;
  logic [4:0] count;
  int model [$];
  int n_full, n_empty;

  sync_fifo #(.T(logic [15:0]), .DEPTH(16)) dut (.clk, .rst, .wr, .din, .rd, .dout, .full, .empty, .count);

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
    wr = 0; rd = 0; din = 0; n_full = 0; n_empty = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 6000; n++) begin
      int bias;
      bias = (n / 500) % 2;           // phases that fill up and phases that drain
      wr  = ($urandom_range(0, 9) < (bias ? 8 : 3));
      rd  = ($urandom_range(0, 9) < (bias ? 3 : 8)) && !(wr && full);
      din = 16'($urandom);
      #1;
      check(empty == (model.size() == 0), "empty flag");
      check(full == (model.size() == 16), "full flag");
      check(int'(count) == model.size(), $sformatf("count %0d model %0d", count, model.size()));
      if (!empty) check(int'(dout) == model[0], $sformatf("dout %h expected %h", dout, model[0]));
      if (full) n_full++;
      if (empty) n_empty++;
      @(posedge clk);
      if (rd && model.size() > 0) void'(model.pop_front());
      if (wr && (model.size() < 16 || (rd && model.size() == 16))) model.push_back(int'(din));
      #1;
    end
    check(n_full > 0 && n_empty > 0, "full and empty were both reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
