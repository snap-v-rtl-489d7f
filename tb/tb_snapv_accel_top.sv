// tb_snapv_accel_top -- end-to-end test of the full-size accelerator (eight
// cluster groups, 32 clusters, 1024 neurons, default parameters) driven only
// through the custom-instruction interface, as the host core would drive it.
//
// Flow: wait for the memory clear, configure a random recurrent network over
// all 32 clusters with CFG_BYTE instructions in initialisation mode, switch to
// run mode, load rate-encoder intensities for 128 input channels, then run
// timesteps. Before some steps the host injects spikes. Each STEP response is
// followed by a check of every neuron's spike against the reference network
// (host spikes plus a bit-exact model of the encoder's LFSR form the external
// input). Output spikes are popped from the output FIFO in some steps; the
// testbench checks the popped packets, the drop counter and the decoder's
// per-neuron counts and argmax.
//
// Every mechanism below is counted; one that never happens is a failure:
// memory clear, configuration in init mode, mode switch, host injection,
// encoder spikes, synapses between groups, L2 multicast, weight-request queue
// full (stall), memory arbitration between clusters, L1 and L2 back-pressure,
// all three reset modes and all four decay rates firing, timesteps of
// different lengths, output-FIFO pops and drops, decoder read and argmax.
module tb_snapv_accel_top;
  import snapv_pkg::*;
  localparam int NG  = 8;
  localparam int NCL = NG * CL_PER_GRP;
  localparam int NENC = 128;
  `include "lif_ref.svh"
  `include "snn_ref.svh"
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic cmd_valid, cmd_ready, resp_valid, resp_ready, busy;
  logic [6:0] cmd_funct;
  logic [63:0] cmd_rs1, cmd_rs2, resp_data;
  logic [4:0] cmd_rd, resp_rd;

  snapv_accel_top dut (.*);

  // ------------------------------------------------ probes and counters
  logic [NPC-1:0] spk [NCL];
  weight_t thr_hw [NCL][NPC];
  logic [NG-1:0]  g_qfull, g_conflict, g_l1cong;
  for (genvar g = 0; g < NG; g++) begin : g_g
    for (genvar k = 0; k < CL_PER_GRP; k++) begin : g_k
      assign spk[g * CL_PER_GRP + k] = dut.u_cerebra.g_grp[g].u_group.g_cl[k].u_cluster.spikes;
      for (genvar j = 0; j < NPC; j++) begin : g_j
        assign thr_hw[g * CL_PER_GRP + k][j] = dut.u_cerebra.g_grp[g].u_group.g_cl[k].u_cluster.g_neuron[j].u_neuron.threshold;
      end
    end
    logic [3:0] occ_nz, occ_full;
    for (genvar i = 0; i < 4; i++) begin : g_q
      assign occ_nz[i]   = dut.u_cerebra.g_grp[g].u_group.u_wr.req_occ[i] != 0;
      assign occ_full[i] = dut.u_cerebra.g_grp[g].u_group.u_wr.req_occ[i] == 8;
    end
    assign g_qfull[g]    = |occ_full;
    assign g_conflict[g] = $countones(occ_nz) > 1;
    assign g_l1cong[g]   = |dut.u_cerebra.g_grp[g].u_group.u_l1.out_full
                           && !dut.u_cerebra.g_grp[g].u_group.u_l1.idle;
  end

  int n_clear = 0, n_cfg_init = 0, n_qfull = 0, n_conflict = 0, n_l1cong = 0, n_l2cong = 0;
  int n_mcast = 0, n_host = 0, n_enc = 0, n_ts = 0;
  logic [NPC-1:0] spk_acc [NCL];
  always @(negedge clk) if (rst_n) begin
    if (dut.u_cerebra.g_grp[0].u_group.u_wr.istate == 0) n_clear++;
    if (dut.u_cerebra.cfg_valid && dut.u_cerebra.cfg_ready && dut.u_ctrl.init_mode) n_cfg_init++;
    if (|g_qfull) n_qfull++;
    if (|g_conflict) n_conflict++;
    if (|g_l1cong) n_l1cong++;
    if (|dut.u_cerebra.u_l2.out_full[NG-1:0]) n_l2cong++;
    if ($countones(dut.u_cerebra.u_l2.out_push) > 1) n_mcast++;
    if (dut.u_ctrl.spk_pop) n_host++;
    if (dut.u_ctrl.enc_ready && dut.u_enc.out_valid) n_enc++;
    if (dut.u_ctrl.time_step) n_ts++;
    for (int k = 0; k < NCL; k++) spk_acc[k] |= spk[k];
  end

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
      while (!resp_valid && n < 200000) begin @(posedge clk); #1; n++; end
      chk(resp_valid && resp_rd == 5'(f), $sformatf("response to funct %0d", f));
      r = resp_data;
      resp_ready = 1; @(posedge clk); #1; resp_ready = 0;
    end
  endtask

  // bit-exact model of the encoder's scan
  logic [15:0] lfsr_m = 16'hACE1;
  logic [7:0]  enc_val [NENC];
  function automatic void enc_scan(ref int ext [$]);
    for (int c = 0; c < NENC; c++) begin
      if (enc_val[c] > lfsr_m[7:0]) ext.push_back(((32 + c / 32) << 5) | (c % 32));
      lfsr_m = {1'b0, lfsr_m[15:1]} ^ (lfsr_m[0] ? 16'hB400 : 16'h0000);
    end
  endfunction

  int dec_m [1024];
  int decay_fired [4];

  initial begin
    longint r;
    int pool [$];
    int n_cross, total_masked, popped, step_len_min, step_len_max, n_pops;
    cmd_valid = 0; cmd_funct = 0; cmd_rs1 = 0; cmd_rs2 = 0; cmd_rd = 0; resp_ready = 0;
    foreach (dec_m[i]) dec_m[i] = 0;
    foreach (spk_acc[k]) spk_acc[k] = '0;
    n_cross = 0; total_masked = 0; popped = 0; n_pops = 0;
    step_len_min = 1 << 30; step_len_max = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // ---------------- configuration (initialisation mode)
    for (int c = 0; c < NCL; c++) pool.push_back(c);
    for (int c = 32; c < 36; c++) pool.push_back(c);
    repeat (24) pool.push_back(32);   // many clusters listen to input 32: bursts then contend
    build_network(2, pool, 300, 2500);
    for (int k = 0; k < NCL; k++)
      for (int c = 0; c < NCL; c++)
        if (m_tv[k][c] && (c / CL_PER_GRP) != (k / CL_PER_GRP)) n_cross++;
    cmd(F_STATUS, 0, 0, r, 1);
    chk(r[9] == 1'b1, "initialisation mode after reset");
    foreach (cfg_q[i]) cmd(F_CFG_BYTE, cfg_q[i], 0, r, 0);
    while (!dut.u_ctrl.cfg_empty) begin @(posedge clk); #1; end
    do cmd(F_STATUS, 0, 0, r, 1); while (!r[10]);    // accelerator idle: configuration done
    begin
      int bad;
      bad = 0;
      for (int k = 0; k < NCL; k++) for (int j = 0; j < NPC; j++) if (thr_hw[k][j] != m_thr[k][j]) bad++;
      chk(bad == 0, $sformatf("neuron thresholds configured (%0d wrong)", bad));
    end
    cmd(F_SET_MODE, 1, 0, r, 0);
    cmd(F_STATUS, 0, 0, r, 1);
    chk(r[9] == 1'b0, "run mode");

    // ---------------- encoder and decoder set-up
    for (int c = 0; c < NENC; c++) begin
      enc_val[c] = (c % 3 == 0) ? 8'd0 : 8'($urandom_range(20, 200));
      cmd(F_ENC_WRITE, c, enc_val[c], r, 0);
    end
    cmd(F_ENC_CTRL, 1, NENC, r, 0);
    cmd(F_DEC_WINDOW, 992, 1023, r, 0);

    // ---------------- timesteps
    for (int step = 1; step <= 25; step++) begin
      int ext [$];
      int len;
      ext.delete();
      if (step % 2 == 0) begin
        int n;
        n = $urandom_range(20, 60);
        for (int i = 0; i < n; i++) begin
          int p;
          p = (($urandom_range(0, 1) ? 32 : 32 + $urandom_range(0, 3)) << 5) | $urandom_range(0, 31);
          ext.push_back(p);
          cmd(F_SPIKE_IN, p, 0, r, 0);
        end
      end
      enc_scan(ext);
      model_step(ext);
      foreach (spk_acc[k]) spk_acc[k] = '0;
      len = 0;
      fork
        cmd(F_STEP, 0, 0, r, 1);
        while (!(resp_valid)) begin @(posedge clk); len++; end
      join
      if (len < step_len_min) step_len_min = len;
      if (len > step_len_max) step_len_max = len;
      chk(r[31:0] == step, $sformatf("step count %0d", step));
      for (int k = 0; k < NCL; k++) begin
        chk(spk_acc[k] == m_spk[k], $sformatf("step %0d cluster %0d spikes %h expected %h", step, k, spk_acc[k], m_spk[k]));
        for (int j = 0; j < NPC; j++) if (m_spk[k][j]) begin
          decay_fired[m_dsel[k][j]]++;
          if (m_mask[k][j]) begin dec_m[k * 32 + j]++; total_masked++; end
        end
      end
      if (step % 4 == 0) begin
        do begin
          cmd(F_OUT_POP, 0, 0, r, 1);
          if (r[11]) begin
            popped++;
            chk(r[10:5] < NCL && m_mask[r[10:5]][r[4:0]], "popped packet is from a hardware neuron with its output enabled");
          end
        end while (r[11]);
        n_pops++;
      end
    end

    // ---------------- results
    cmd(F_STATUS, 0, 0, r, 1);
    chk(int'(r[55:24]) > 0, "output FIFO drops happened");
    chk(total_masked == popped + int'(r[55:24]) + int'(r[7:0]),
        $sformatf("spikes out %0d = popped %0d + dropped %0d + queued %0d", total_masked, popped, r[55:24], r[7:0]));
    for (int i = 0; i < 1024; i += 37) begin
      cmd(F_DEC_READ, i, 0, r, 1);
      chk(int'(r[15:0]) == dec_m[i], $sformatf("decoder count of neuron %0d: %0d vs %0d", i, r[15:0], dec_m[i]));
    end
    begin
      int mx;
      mx = 0;
      for (int i = 992; i < 1024; i++) if (dec_m[i] > mx) mx = dec_m[i];
      cmd(F_DEC_ARGMAX, 0, 0, r, 1);
      chk(int'(r[31:16]) == mx && r[15:0] >= 992 && dec_m[r[15:0]] == mx,
          $sformatf("argmax %0d count %0d (max %0d)", r[15:0], r[31:16], mx));
    end

    // ---------------- every mechanism must have happened
    chk(n_clear > 1000, "weight memory clear sweep");
    chk(n_cfg_init > 1000, "configuration in initialisation mode");
    chk(n_host > 0, "host spike injection");
    chk(n_enc > 0, "rate-encoder spikes");
    chk(n_cross > 0, "synapses between cluster groups");
    chk(n_mcast > 0, "L2 multicast");
    chk(n_qfull > 0, "weight-request queue full (stall)");
    chk(n_conflict > 0, "memory arbitration between clusters");
    chk(n_l1cong > 0, "L1 router back-pressure");
    chk(n_l2cong > 0, "L2 router back-pressure");
    chk(n_ts == 25, "one time_step per STEP");
    chk(m_fires_by_reset[0] > 0 && m_fires_by_reset[1] > 0 && m_fires_by_reset[2] > 0, "all three reset modes fired");
    chk(decay_fired[0] > 0 && decay_fired[1] > 0 && decay_fired[2] > 0 && decay_fired[3] > 0, "all four decay rates fired");
    chk(step_len_max > step_len_min, $sformatf("timestep length varies (%0d..%0d cycles)", step_len_min, step_len_max));
    chk(popped > 0 && n_pops > 0, "output FIFO pops");
    $display("mechanisms: clear=%0d cfg=%0d host=%0d enc=%0d cross=%0d mcast=%0d qfull=%0d conflict=%0d l1cong=%0d l2cong=%0d steps=%0d..%0d popped=%0d",
             n_clear, n_cfg_init, n_host, n_enc, n_cross, n_mcast, n_qfull, n_conflict, n_l1cong, n_l2cong, step_len_min, step_len_max, popped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
