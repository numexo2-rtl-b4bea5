// tb_gassiplex_demux: 16 pulse trains of 128 amplitudes per event, driven
// with the sequencing clock and track-and-hold signals as an external
// sequencer would. Expected values above the per-channel thresholds are
// listed in train order (index major, channel minor) and cut into blocks of
// 64. Each received 140-word block is decoded and compared: header, event
// number, block number, count, last-block flag, (address, value) pairs and
// the unused pairs. Events with 5 %, 30 %, 100 % (2048 values, 32 blocks) and
// 0 % of the values above threshold are read with a fast receiver; then a slow
// receiver makes the double buffer overflow, and the received plus the lost
// values must add up to those expected, in order.
module tb_gassiplex_demux;
  import numexo2_pkg::*;
  localparam int C = 16, V = 128;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic enable, gx_clk, gx_hold, out_valid, out_last, out_ready, lost;
  logic [7:0] smp_delay;
  logic signed [13:0] threshold [C], sample [C];
  logic [47:0] ts;
  logic [15:0] out_data;

  gassiplex_demux dut (.clk, .rst, .enable, .gx_clk, .gx_hold, .smp_delay, .threshold, .sample,
                       .ts, .module_id(8'h3C), .out_valid, .out_data, .out_last, .out_ready, .lost);

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 30) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_ff @(posedge clk) ts <= rst ? 48'd1000 : ts + 1'b1;

  // expected values: {event, addr, value}
  int exp_addr [$], exp_val [$], exp_ev [$];
  int ready_pct = 100;
  int n_lost = 0, n_blocks = 0, n_vals = 0, n_last = 0, n_full_blocks = 0;
  always @(posedge clk) if (!rst && lost) n_lost++;

  // receiver
  logic [15:0] blk [$];
  int prev_ev = 0, prev_blk = -1; bit prev_last = 1;
  bit strict = 1;      // no loss expected
  initial begin
    out_ready = 0;
    forever begin
      @(posedge clk); #1;
      out_ready = ($urandom_range(0, 99) < ready_pct);
    end
  end
  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    blk.push_back(out_data);
    check(out_last == (blk.size() == 140), "out_last on the 140th word");
    if (blk.size() == 140) begin
      int ev, n, bn; bit last;
      n_blocks++;
      ev = {blk[1], blk[2]}; bn = blk[6]; n = blk[7]; last = blk[8][0];
      check(blk[0] == 16'hB03C, "block header word");
      check(n >= 1 && n <= 64, $sformatf("values in a block: %0d", n));
      check(blk[9] == 0 && blk[10] == 0 && blk[11] == 0, "reserved header words");
      if (prev_last) check(ev > prev_ev && bn == 0, $sformatf("first block of event %0d (bn %0d)", ev, bn));
      else           check(ev == prev_ev && bn == prev_blk + 1, "next block of the same event");
      if (strict) check(last || n == 64, "only the last block of an event may be short");
      prev_ev = ev; prev_blk = bn; prev_last = last;
      if (last) n_last++;
      if (n == 64) n_full_blocks++;
      for (int j = 0; j < 64; j++) begin
        if (j < n) begin
          if (strict) begin
            check(exp_addr.size() > 0 && exp_ev[0] == ev && exp_addr[0] == int'(blk[12 + 2*j]) &&
                  exp_val[0] == int'($signed(blk[13 + 2*j])),
                  $sformatf("value %0d of event %0d: got %0d/%0d", j, ev, blk[12 + 2*j], $signed(blk[13 + 2*j])));
            if (exp_addr.size() > 0) begin void'(exp_addr.pop_front()); void'(exp_val.pop_front()); void'(exp_ev.pop_front()); end
          end else begin
            // skip expected values that were lost until this one
            while (exp_addr.size() > 0 && !(exp_ev[0] == ev && exp_addr[0] == int'(blk[12 + 2*j]))) begin
              void'(exp_addr.pop_front()); void'(exp_val.pop_front()); void'(exp_ev.pop_front());
              skipped++;
            end
            check(exp_addr.size() > 0 && exp_val[0] == int'($signed(blk[13 + 2*j])), "received value is an expected one, in order");
            if (exp_addr.size() > 0) begin void'(exp_addr.pop_front()); void'(exp_val.pop_front()); void'(exp_ev.pop_front()); end
          end
          n_vals++;
        end else begin
          check(blk[12 + 2*j] == 16'hFFFF && blk[13 + 2*j] == 0, "unused pair");
        end
      end
      blk.delete();
    end
  end
  int skipped = 0;

  // one event: random amplitudes, pct % above threshold
  int ev_count = 0;
  task automatic run_event(int pct, int period);
    int vals [C][V];
    ev_count++;
    for (int i = 0; i < V; i++)
      for (int c = 0; c < C; c++) begin
        bit above;
        above = ($urandom_range(0, 99) < pct);
        vals[c][i] = above ? int'(threshold[c]) + 1 + $urandom_range(0, 3000)
                           : int'(threshold[c]) - $urandom_range(0, 3000);
      end
    for (int i = 0; i < V; i++)
      for (int c = 0; c < C; c++)
        if (vals[c][i] > int'(threshold[c])) begin
          exp_addr.push_back(c * V + i); exp_val.push_back(vals[c][i]); exp_ev.push_back(ev_count);
        end
    gx_hold = 1;
    repeat (10) @(posedge clk); #1;
    for (int i = 0; i < V; i++) begin
      gx_clk = 1;
      for (int c = 0; c < C; c++) sample[c] = 14'(vals[c][i]);
      repeat (period / 2) @(posedge clk); #1;
      gx_clk = 0;
      repeat (period - period / 2) @(posedge clk); #1;
    end
    gx_hold = 0;
    repeat (20) @(posedge clk); #1;
  endtask

  initial begin
    enable = 1; gx_clk = 0; gx_hold = 0; smp_delay = 8'd5;
    for (int c = 0; c < C; c++) begin
      threshold[c] = 14'($signed($urandom_range(0, 4000)) - 2000);
      sample[c] = '0;
    end
    repeat (3) @(posedge clk);
    #1 rst = 0;
    repeat (10) @(posedge clk); #1;

    ready_pct = 100;
    run_event(5, 40);
    run_event(30, 40);
    run_event(100, 60);
    run_event(0, 40);
    ready_pct = 70;
    run_event(20, 40);
    repeat (3000) @(posedge clk);
    check(exp_addr.size() == 0, $sformatf("all expected values received (%0d left)", exp_addr.size()));
    check(n_lost == 0, "nothing lost with a fast receiver");
    check(n_last == 4, $sformatf("one last block per event with values (%0d)", n_last));
    check(n_full_blocks >= 32, "the full event gave 32 full blocks");
    $display("fast: blocks=%0d values=%0d", n_blocks, n_vals);

    // slow receiver: overflow of the double buffer
    begin
      int v0;
      strict = 0; ready_pct = 4;
      v0 = n_vals;
      run_event(100, 30);
      repeat (40000) @(posedge clk);
      check(n_lost > 0, "overflow drops values when the receiver is slow");
      check((n_vals - v0) + n_lost == 2048 && skipped + exp_addr.size() == n_lost,
            $sformatf("received %0d + lost %0d = 2048 (skipped %0d)", n_vals - v0, n_lost, skipped));
      $display("slow: received=%0d lost=%0d", n_vals - v0, n_lost);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
