// tb_readout: channels write energy and timing records at random rates and
// at different times; the frames coming out (with random back-pressure) are
// decoded and each must match, field by field, the next expected record of
// its channel. Checks the frame header and length, that every record comes
// out once, the almost-full flag and that a busy channel cannot starve a
// quiet one.
module tb_readout;
  import numexo2_pkg::*;
  localparam int C = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [C-1:0] e_wr, t_wr, afull, ovf;
  energy_rec_t e_rec [C];
  tof_rec_t t_rec [C];
  logic out_valid, out_last, out_ready;
  logic [15:0] out_data;
  energy_rec_t exp_e [C][$];
  tof_rec_t    exp_t [C][$];
  energy_rec_t pend_t_e [C][$];    // energy written, timing still to write
  int n_frames, n_sent, n_afull;

  readout #(.CHANNELS(C), .CH_DEPTH(8), .G_DEPTH(32)) dut (
    .clk, .rst, .module_id(8'h5C), .e_wr, .e_rec, .t_wr, .t_rec, .ch_afull(afull),
    .ch_overflow(ovf), .out_valid, .out_data, .out_last, .out_ready);

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // frame receiver
  logic [15:0] fw [8];
  int wi;
  always @(posedge clk) begin
    if (!rst && out_valid && out_ready) begin
      fw[wi] = out_data;
      check(out_last == (wi == 7), "frame length 8");
      if (wi == 7) begin
        int ch; energy_rec_t ge; tof_rec_t gt;
        ch = int'(fw[0][11:8]);
        check(fw[0][15:12] == 4'hA && fw[0][7:0] == 8'h5C, "header");
        ge = '{calib: fw[1][2], dv: fw[1][1], ts: {fw[2], fw[3], fw[4]}, energy: fw[5]};
        gt = '{ok: fw[1][0], ns_x32: {fw[6][7:0], fw[7]}};
        check(exp_e[ch].size() > 0 && exp_t[ch].size() > 0, "frame expected");
        if (exp_e[ch].size() > 0 && exp_t[ch].size() > 0) begin
          check(ge == exp_e[ch][0] && gt == exp_t[ch][0], $sformatf("frame of channel %0d", ch));
          void'(exp_e[ch].pop_front()); void'(exp_t[ch].pop_front());
        end
        n_frames++;
        wi = 0;
      end else wi++;
    end
  end

  initial begin
    int rate [C];
    wi = 0; n_frames = 0; n_sent = 0; n_afull = 0;
    e_wr = 0; t_wr = 0; out_ready = 0;
    for (int c = 0; c < C; c++) begin e_rec[c] = '0; t_rec[c] = '0; end
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int c = 0; c < C; c++) rate[c] = (c == 5) ? 60 : $urandom_range(1, 8);
    for (int n = 0; n < 20000; n++) begin
      out_ready = $urandom_range(0, 3) != 0;
      for (int c = 0; c < C; c++) begin
        e_wr[c] = 0; t_wr[c] = 0;
        if (n < 18000 && !afull[c] && pend_t_e[c].size() == 0 && $urandom_range(0, 999) < rate[c]) begin
          energy_rec_t r;
          r = '{calib: 1'($urandom), dv: 1'($urandom), energy: 16'($urandom), ts: {16'($urandom), 32'($urandom)}};
          e_wr[c] = 1; e_rec[c] = r;
          exp_e[c].push_back(r);
          pend_t_e[c].push_back(r);
          n_sent++;
        end else if (pend_t_e[c].size() > 0 && $urandom_range(0, 3) == 0) begin
          tof_rec_t tr;
          tr = '{ok: 1'($urandom), ns_x32: 24'($urandom)};
          t_wr[c] = 1; t_rec[c] = tr;
          exp_t[c].push_back(tr);
          void'(pend_t_e[c].pop_front());
        end
        if (afull[c]) n_afull++;
      end
      @(posedge clk); #1;
    end
    e_wr = 0; t_wr = 0; out_ready = 1;
    repeat (3000) @(posedge clk);
    check(n_frames == n_sent, $sformatf("frames %0d, records %0d", n_frames, n_sent));
    for (int c = 0; c < C; c++) check(exp_e[c].size() == 0, $sformatf("channel %0d drained", c));
    check(ovf == 0, "no FIFO overflow");
    check(n_afull > 0, "almost-full flag exercised");
    $display("frames=%0d almost-full cycles=%0d", n_frames, n_afull);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
