// tb_gts_timestamp: checks the 48-bit time stamp counter (increment every
// clock, load from the root, carry above 32 bits), the merging of the
// channels triggering in one clock into a single request carrying the time
// stamp of that clock, the in-order return of channel masks and time stamps
// with each decision, and the lost flag when the memory is full.
module tb_gts_timestamp;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ts_load, req, lost, dec_valid, dec_accept, val_valid, val_accept;
  logic [47:0] ts_value, ts, req_ts, val_ts;
  logic [15:0] trig_mask, val_mask;
  typedef struct { int mask; longint ts; } ent_t;
  ent_t pend [$];
  int n_lost;

  gts_timestamp #(.N(16), .DEPTH(16)) dut (.clk, .rst, .ts_load, .ts_value, .ts, .trig_mask,
    .req, .req_ts, .lost, .dec_valid, .dec_accept, .val_valid, .val_accept, .val_mask, .val_ts);

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
    longint t;
    ts_load = 0; ts_value = 0; trig_mask = 0; dec_valid = 0; dec_accept = 0; n_lost = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // counter and load
    t = longint'(ts);
    repeat (10) @(posedge clk);
    #1 check(longint'(ts) == t + 10, "increments every clock");
    ts_load = 1; ts_value = 48'h0000_FFFF_FFF0;
    @(posedge clk); #1 ts_load = 0;
    check(ts == 48'h0000_FFFF_FFF0, "loaded");
    repeat (32) @(posedge clk);
    #1 check(ts == 48'h0001_0000_0010, $sformatf("carry above 32 bits: %h", ts));
    // triggers and decisions
    for (int n = 0; n < 4000; n++) begin
      bit will_dec, full_now;
      longint tnow;
      trig_mask = ($urandom_range(0, 3) == 0) ? 16'($urandom) : '0;
      will_dec  = ($urandom_range(0, 4) == 0) && (n % 1000 < 700);
      dec_valid = will_dec; dec_accept = $urandom_range(0, 1);
      tnow = longint'(ts);
      full_now = (pend.size() == 16);
      #1;
      @(posedge clk); #1;
      if (trig_mask != 0) begin
        check(req == !full_now, "one request per clock with triggers");
        check(lost == full_now, "lost when full");
        if (!full_now) begin
          check(longint'(req_ts) == tnow, "request carries the time stamp");
          pend.push_back('{int'(trig_mask), tnow});
        end else n_lost++;
      end else check(!req && !lost, "no request without triggers");
      if (will_dec && (pend.size() > (trig_mask != 0 && !full_now ? 1 : 0))) begin
        check(val_valid && int'(val_mask) == pend[0].mask && longint'(val_ts) == pend[0].ts
              && val_accept == dec_accept, $sformatf("decision returns mask %h ts %0d", val_mask, val_ts));
        void'(pend.pop_front());
      end
    end
    check(n_lost > 0, "memory full was exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
