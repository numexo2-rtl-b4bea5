// tb_stop_dnl_hist: feeds 32-bit STOP patterns with edges at random
// positions, including edges that straddle two patterns (bit 0 high, next
// bit 31 low), patterns without an edge, patterns with a second edge (only
// the first counts) and patterns while counting is disabled. A model of the
// per-position counts is compared with every counter through the read port,
// then clear is checked, then saturation with a narrow counter.
module tb_stop_dnl_hist;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear, enable;
  logic [31:0] pattern;
  logic [4:0] rd_addr;
  logic [23:0] rd_count;
  logic [28:0] total;
  logic clear_s, enable_s; logic [31:0] pattern_s; logic [4:0] rd_addr_s; logic [3:0] rd_count_s; logic [8:0] total_s;

  stop_dnl_hist dut (.clk, .rst, .clear, .enable, .pattern, .rd_addr, .rd_count, .total);
  stop_dnl_hist #(.CW(4)) dut_s (.clk, .rst, .clear(clear_s), .enable(enable_s), .pattern(pattern_s),
                                 .rd_addr(rd_addr_s), .rd_count(rd_count_s), .total(total_s));

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 30) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int model [32]; int mtotal; bit prev;
  // apply one pattern and update the model
  task automatic apply(logic [31:0] p, bit en);
    bit found; int pos; bit pv;
    pattern = p; enable = en;
    found = 0; pos = 0; pv = prev;
    for (int i = 31; i >= 0; i--) begin
      if (!found && pv && !p[i]) begin found = 1; pos = 31 - i; end
      pv = p[i];
    end
    if (found && en) begin model[pos]++; mtotal++; end
    prev = p[0];
    @(posedge clk); #1;
  endtask

  // pattern: ones up to position pos (exclusive), zeros from pos, i.e. STOP
  // going low at step pos; 'high' gives all ones
  function automatic logic [31:0] edge_at(int pos);
    return ~(32'hFFFF_FFFF >> pos);
  endfunction

  initial begin
    clear = 0; enable = 0; pattern = '1; rd_addr = 0;
    clear_s = 0; enable_s = 0; pattern_s = '1; rd_addr_s = 0;
    foreach (model[i]) model[i] = 0;
    mtotal = 0; prev = 1;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 20000; n++) begin
      int kind;
      kind = $urandom_range(0, 9);
      case (kind)
        0: apply('1, 1);                                        // no edge, STOP high
        1: apply('0, 1);                                        // low from the previous pattern or across
        2: apply(edge_at($urandom_range(0, 31)) | 32'h0000_00F0, 1); // second edge later in the pattern
        3: apply(edge_at($urandom_range(1, 31)), 0);            // counting disabled
        default: begin
          apply(edge_at($urandom_range(1, 31)), 1);             // normal STOP pulse
          repeat ($urandom_range(0, 2)) apply('0, 1);
          apply('1, 1);
        end
      endcase
    end
    apply('1, 1); apply('1, 1);
    for (int i = 0; i < 32; i++) begin
      rd_addr = 5'(i); @(posedge clk); #1;
      check(int'(rd_count) == model[i], $sformatf("count of position %0d: %0d, expected %0d", i, rd_count, model[i]));
    end
    check(int'(total) == mtotal, $sformatf("total %0d expected %0d", total, mtotal));
    begin
      int nz; nz = 0;
      foreach (model[i]) if (model[i] > 0) nz++;
      check(nz == 32, "every position was exercised");
    end
    clear = 1; @(posedge clk); #1; clear = 0;
    rd_addr = 5'd7; @(posedge clk); #1;
    check(rd_count == 0 && total == 0, "clear");

    // saturation of a 4-bit counter
    enable_s = 1;
    for (int n = 0; n < 40; n++) begin
      pattern_s = edge_at(5); @(posedge clk); #1;
      pattern_s = '1; @(posedge clk); #1;
    end
    rd_addr_s = 5'd5; @(posedge clk); #1;
    check(rd_count_s == 4'hF, "counter saturates");
    check(total_s == 9'd15, "total counts only counted hits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
