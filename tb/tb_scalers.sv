// tb_scalers: random increment pulses on all channels; each counter must
// equal the number of pulses sent, clear must zero them, and the 48-bit
// counters must carry across 32 bits (checked by counting from a preset).
module tb_scalers;
  localparam int N = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear;
  logic [N-1:0] it, idv, idnv;
  logic [47:0] ct [N], cdv [N], cdnv [N];
  longint mt [N], mdv [N], mdnv [N];

  scalers #(.N(N), .W(48)) dut (.clk, .rst, .clear, .inc_trig(it), .inc_dv(idv), .inc_dnv(idnv),
                                .cnt_trig(ct), .cnt_dv(cdv), .cnt_dnv(cdnv));

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
    clear = 0; it = 0; idv = 0; idnv = 0;
    for (int i = 0; i < N; i++) begin mt[i] = 0; mdv[i] = 0; mdnv[i] = 0; end
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 3000; n++) begin
      it = N'($urandom); idv = N'($urandom) & it; idnv = N'($urandom) & it & ~idv;
      for (int i = 0; i < N; i++) begin mt[i] += it[i]; mdv[i] += idv[i]; mdnv[i] += idnv[i]; end
      @(posedge clk); #1;
    end
    it = 0; idv = 0; idnv = 0;
    #1;
    for (int i = 0; i < N; i++)
      check(longint'(ct[i]) == mt[i] && longint'(cdv[i]) == mdv[i] && longint'(cdnv[i]) == mdnv[i],
            $sformatf("channel %0d: %0d/%0d/%0d expected %0d/%0d/%0d", i, ct[i], cdv[i], cdnv[i], mt[i], mdv[i], mdnv[i]));
    clear = 1; @(posedge clk); #1 clear = 0;
    for (int i = 0; i < N; i++) check(ct[i] == 0 && cdv[i] == 0 && cdnv[i] == 0, "cleared");
    // carry beyond 32 bits
    dut.cnt_trig[3] = 48'h0000_FFFF_FFFE;
    it = 16'h0008;
    repeat (3) @(posedge clk);
    #1 it = 0;
    check(ct[3] == 48'h0001_0000_0001, $sformatf("48-bit carry: %h", ct[3]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
