// tb_link_tx: sends random words through the strobe/acknowledge link to a
// behavioural receiver with random answer delays, and checks that every word
// arrives once and in order, that data is stable under the strobe, that
// BUSY stops new words and is passed on, and the minimum of 6 clocks a word.
module tb_link_tx;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic valid, ready, data_strobe, ack_link, busy_link, busy_out, word_valid;
  logic [15:0] data, link_data, word;
  int rx_errors;
  int sent [$];
  int nrx, n_busy_cycles;

  link_tx dut (.clk, .rst, .valid, .data, .ready, .link_data, .data_strobe, .ack_link,
               .busy_link, .busy_out);
  v5_link_rx rx (.clk, .link_data, .data_strobe, .ack_link, .word_valid, .word, .errors(rx_errors));

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

  always @(posedge clk) begin
    if (word_valid) begin
      check(sent.size() > 0 && int'(word) == sent[0], $sformatf("received %h", word));
      if (sent.size() > 0) void'(sent.pop_front());
      nrx++;
    end
  end

  initial begin
    int t0, tmin, nsent;
    t0 = 0;
    valid = 0; data = 0; busy_link = 0; nrx = 0; n_busy_cycles = 0; tmin = 1000; nsent = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 400; n++) begin
      valid = 1; data = 16'($urandom);
      forever begin
        bit taken;
        taken = ready;
        @(posedge clk);
        if (taken) break;
        #1;
      end
      if (nsent > 0 && ($time - t0) / 10 < tmin) tmin = ($time - t0) / 10;
      t0 = $time;
      sent.push_back(int'(data)); nsent++;
      #1 valid = $urandom_range(0, 1);
      data = 16'($urandom);
      if (n == 200) begin
        // BUSY: no word may start while it is high
        busy_link = 1;
        repeat (3) @(posedge clk);
        #1 check(busy_out, "busy passed on");
        repeat (20) begin
          @(posedge clk); #1;
          if (!data_strobe) begin
            check(!ready, "not ready while busy");
            n_busy_cycles++;
          end
        end
        busy_link = 0;
      end
    end
    valid = 0;
    repeat (50) @(posedge clk);
    check(nrx == 400 && sent.size() == 0, $sformatf("received %0d of 400", nrx));
    check(rx_errors == 0, "data stable under strobe");
    check(tmin >= 6, $sformatf("fastest word %0d clocks", tmin));
    check(n_busy_cycles > 0, "busy exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
