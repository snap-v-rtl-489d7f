// tb_accel_controller -- the command controller with the real rate encoder
// and spike decoder, but a behavioural accelerator. The model accepts
// configuration bytes and spike packets with random back-pressure, stays busy
// for a while after every injected packet, and after each time_step emits a
// burst of output spikes. The testbench checks: configuration bytes and host
// spikes arrive in order; time_step only comes when the accelerator and all
// queues are quiet, and the step response comes only after the output burst
// has drained; the step count; output-FIFO pops and the drop counter when the
// burst overflows the FIFO; mode switching; encoder spikes during a step;
// decoder read and argmax through the command interface.
module tb_accel_controller;
  import snapv_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    #1;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic cmd_valid, cmd_ready, resp_valid, resp_ready, busy, init_mode, time_step;
  logic [6:0] cmd_funct;
  logic [63:0] cmd_rs1, cmd_rs2, resp_data;
  logic [4:0] cmd_rd, resp_rd;
  logic cfg_valid, cfg_ready, spk_in_push, spk_in_full, spk_out_push, acc_idle;
  logic [7:0] cfg_byte;
  spike_pkt_t spk_in_pkt, spk_out_pkt, enc_pkt;
  logic enc_wr_en, enc_start, enc_valid, enc_ready, enc_busy, dec_clear, dec_clearing;
  logic [9:0] enc_wr_ch, dec_rd_id, dec_win_lo, dec_win_hi, dec_argmax;
  logic [7:0] enc_wr_val;
  logic [10:0] enc_nch;
  logic [15:0] dec_rd_count, dec_maxcount;

  accel_controller dut (.*);
  rate_encoder u_enc (.clk, .rst_n, .wr_en(enc_wr_en), .wr_ch(enc_wr_ch), .wr_val(enc_wr_val),
    .start(enc_start), .nch(enc_nch), .out_valid(enc_valid), .out_ready(enc_ready),
    .out_pkt(enc_pkt), .busy(enc_busy));
  spike_decoder u_dec (.clk, .rst_n, .in_valid(spk_out_push), .in_pkt(spk_out_pkt), .rd_id(dec_rd_id),
    .rd_count(dec_rd_count), .win_lo(dec_win_lo), .win_hi(dec_win_hi), .clear(dec_clear),
    .clearing(dec_clearing), .argmax(dec_argmax), .maxcount(dec_maxcount));

  // ------------------------------------------------ behavioural accelerator
  int cfg_seen [$], spk_seen [$], burst [$];
  int n130 = 0, pending = 0, enc_pkts = 0, ts_count = 0, ts_bad = 0, stalls = 0;
  // back-pressure changes at the falling edge; the handshakes are then
  // sampled (the values the rising edge will use) and acted on at the rising
  // edge
  bit s_cfg, s_spk, s_full, s_out, s_ts, s_init, s_quiet, s_stall;
  logic [7:0] s_byte;
  spike_pkt_t s_pkt;
  always @(negedge clk) begin
    if (rst_n) begin
      cfg_ready   = $urandom_range(0, 2) != 0;
      spk_in_full = $urandom_range(0, 3) == 0;
    end
    #1;
    s_cfg = cfg_valid && cfg_ready; s_byte = cfg_byte; s_init = init_mode;
    s_spk = spk_in_push; s_pkt = spk_in_pkt; s_full = spk_in_full;
    s_out = spk_out_push; s_ts = time_step;
    s_stall = (cfg_valid && !cfg_ready) || (spk_in_full && !dut.spk_empty);
  end
  always @(posedge clk) if (rst_n) begin
    if (s_cfg) begin
      cfg_seen.push_back(int'(s_byte));
      if (!s_init) begin failures++; $display("FAIL: configuration byte in run mode"); end
    end
    if (s_spk) begin
      if (s_full) begin failures++; $display("FAIL: spike push while full"); end
      if (s_pkt.cluster >= 6'd32) enc_pkts++;
      else spk_seen.push_back(int'(s_pkt));
      pending += $urandom_range(1, 4);
    end else if (pending > 0) pending--;
    if (s_out) void'(burst.pop_front());
    if (s_ts) begin
      ts_count++;
      if (!s_quiet) ts_bad++;
      for (int i = 0; i < 12 + ts_count % 12; i++) begin
        burst.push_back((i % 5 == 0) ? 130 : $urandom_range(0, 127));
        if (i % 5 == 0) n130++;
      end
    end
    if (s_stall) stalls++;
    s_quiet = acc_idle && !s_spk && !s_cfg;
  end
  assign spk_out_push = burst.size() > 0 && !time_step;
  assign spk_out_pkt  = spike_pkt_t'(burst.size() > 0 ? burst[0] : 0);
  assign acc_idle     = pending == 0 && burst.size() == 0 && !time_step;

  // ------------------------------------------------ host side
  task automatic cmd(acc_funct_e f, longint a, longint b, output longint r, input bit has_resp);
    bit t;
    cmd_valid = 1; cmd_funct = 7'(f); cmd_rs1 = a; cmd_rs2 = b; cmd_rd = 5'(f);
    do begin @(negedge clk); t = cmd_ready; @(posedge clk); #1; end while (!t);
    cmd_valid = 0;
    r = 0;
    if (has_resp) begin
      int n;
      n = 0;
      while (!resp_valid && n < 100000) begin @(posedge clk); #1; n++; end
      chk(resp_valid && resp_rd == 5'(f), $sformatf("response to funct %0d", f));
      r = resp_data;
      resp_ready = 1; @(posedge clk); #1; resp_ready = 0;
    end
  endtask

  initial begin
    longint r;
    int exp_cfg [$], exp_spk [$];
    cmd_valid = 0; cmd_funct = 0; cmd_rs1 = 0; cmd_rs2 = 0; cmd_rd = 0; resp_ready = 0;
    cfg_ready = 0; spk_in_full = 0;
    repeat (3) @(posedge clk);
    #1;
    #1 rst_n = 1;
    cmd(F_STATUS, 0, 0, r, 1);
    chk(r[9], "initialisation mode after reset");
    for (int i = 0; i < 200; i++) begin
      int b;
      b = $urandom_range(0, 255);
      exp_cfg.push_back(b);
      cmd(F_CFG_BYTE, b, 0, r, 0);
    end
    repeat (400) @(posedge clk);
    #1;
    chk(cfg_seen == exp_cfg, "configuration bytes in order");
    cmd(F_SET_MODE, 1, 0, r, 0);
    cmd(F_STATUS, 0, 0, r, 1);
    chk(!r[9], "run mode");
    for (int c = 0; c < 256; c++) cmd(F_ENC_WRITE, c, (c < 128) ? 250 : 0, r, 0);
    cmd(F_DEC_WINDOW, 128, 137, r, 0);
    while (dec_clearing) begin @(posedge clk); #1; end
    for (int s = 1; s <= 12; s++) begin
      int n;
      n = $urandom_range(0, 40);
      for (int i = 0; i < n; i++) begin
        int p;
        p = $urandom_range(0, 1023);
        exp_spk.push_back(p);
        cmd(F_SPIKE_IN, p, 0, r, 0);
      end
      if (s == 6) cmd(F_ENC_CTRL, 1, 256, r, 0);
      cmd(F_STEP, 0, 0, r, 1);
      chk(r[31:0] == s, $sformatf("step count %0d", s));
      chk(burst.size() == 0 && acc_idle, "step response only after the output burst drained");
      if (s % 3 == 0) begin   // pop everything, FIFO never overflows
        int k;
        k = 0;
        do begin cmd(F_OUT_POP, 0, 0, r, 1); k++; end while (r[11]);
        chk(k > 1, "output FIFO popped");
      end
    end
    chk(spk_seen == exp_spk, $sformatf("host spikes delivered in order %0d %0d", spk_seen.size(), exp_spk.size()));
    chk(ts_count == 12 && ts_bad == 0, $sformatf("time_step only when quiet (%0d steps, %0d bad)", ts_count, ts_bad));
    chk(enc_pkts > 100, $sformatf("encoder injected spikes during steps (%0d)", enc_pkts));
    cmd(F_STATUS, 0, 0, r, 1);
    chk(r[55:24] > 0, $sformatf("drops counted (%0d)", r[55:24]));
    cmd(F_DEC_READ, 130, 0, r, 1);
    chk(r[15:0] == n130, $sformatf("decoder count of neuron 130 = %0d", r[15:0]));
    cmd(F_DEC_ARGMAX, 0, 0, r, 1);
    chk(r[15:0] == 130 && r[31:16] == n130, $sformatf("argmax %0d count %0d", r[15:0], r[31:16]));
    cmd(F_DEC_CLEAR, 0, 0, r, 0);
    repeat (1100) @(posedge clk);
    #1;
    cmd(F_DEC_READ, 130, 0, r, 1);
    chk(r[15:0] == 0, "decoder cleared");
    chk(stalls > 10, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
