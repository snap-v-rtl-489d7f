// tb_cluster_group -- one cluster group (L1 spike router, L1 data router,
// weight resolver, four clusters) running a random recurrent network.
// The testbench waits for the memory clear, configures the group through its
// byte port in initialisation mode, then runs timesteps in run mode. Each
// step it injects random external spikes (source clusters 32..63) through the
// upward port, waits for the group to go idle, pulses time_step and compares
// the 128 spikes with the reference network. Spikes that leave the group
// upward are checked against the output masks. The upward port is randomly
// congested, so router back-pressure is exercised too.
module tb_cluster_group;
  import snapv_pkg::*;
  localparam int NCL = 4;
  `include "lif_ref.svh"
  `include "snn_ref.svh"
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, up_cong = 0, lane_busy = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic init_mode, time_step, cfg_valid, cfg_ready, up_in_push, up_in_full;
  logic up_out_push, up_out_full, idle;
  logic [7:0] cfg_byte;
  spike_pkt_t up_in_pkt, up_out_pkt;

  cluster_group #(.GROUP_ID(0)) dut (.*);

  logic [NPC-1:0] spk [NCL];
  for (genvar g = 0; g < NCL; g++) begin : g_spk
    assign spk[g] = dut.g_cl[g].u_cluster.spikes;
  end

  int up_seen [$];
  always @(posedge clk) if (rst_n) begin
    if (up_out_push) begin
      if (up_out_full) begin failures++; $display("FAIL: up push while full"); end
      up_seen.push_back(int'(up_out_pkt));
    end
    if (up_out_full && !idle) up_cong++;
    if ($countones(dut.u_wr.lane_valid) > 0 && $countones(dut.u_wr.req_valid) > 1) lane_busy++;
  end

  task automatic wait_idle();
    int n;
    n = 0;
    do begin @(posedge clk); #1; n++; end while (!idle && n < 20000);
    @(posedge clk); #1;
    chk(idle, "group idle");
  endtask

  initial begin
    int pool [$];
    cfg_valid = 0; cfg_byte = 0; up_in_push = 0; up_in_pkt = '0; up_out_full = 0;
    init_mode = 1; time_step = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 4; c++) pool.push_back(c);
    for (int c = 32; c < 40; c++) pool.push_back(c);
    build_network(5, pool, 300, 2500);
    foreach (cfg_q[i]) begin
      bit r;
      cfg_valid = 1; cfg_byte = cfg_q[i];
      do begin @(negedge clk); r = cfg_ready; @(posedge clk); #1; end while (!r);
      cfg_valid = 0;
    end
    wait_idle();
    init_mode = 0;
    @(posedge clk); #1;
    for (int step = 0; step < 40; step++) begin
      int ext [$];
      int n;
      ext.delete();
      n = $urandom_range(0, 30);
      for (int i = 0; i < n; i++) ext.push_back(((32 + $urandom_range(0, 7)) << 5) | $urandom_range(0, 31));
      model_step(ext);
      fork
        foreach (ext[i]) begin
          while (up_in_full) begin @(posedge clk); #1; end
          up_in_push = 1; up_in_pkt = spike_pkt_t'(ext[i]);
          @(posedge clk); #1;
          up_in_push = 0;
        end
        repeat (60) begin up_out_full = ($urandom_range(0, 2) == 0); @(posedge clk); #1; end
      join
      up_out_full = 0;
      wait_idle();
      up_seen.delete();
      time_step = 1;
      @(posedge clk); #1;
      time_step = 0;
      @(posedge clk); #1;
      for (int k = 0; k < NCL; k++)
        chk(spk[k] == m_spk[k], $sformatf("step %0d cluster %0d spikes %h expected %h", step, k, spk[k], m_spk[k]));
      wait_idle();
      begin
        int exp_n;
        exp_n = 0;
        for (int k = 0; k < NCL; k++) exp_n += $countones(m_spk[k] & m_mask[k]);
        chk(up_seen.size() == exp_n, $sformatf("step %0d %0d spikes left the group, expected %0d", step, up_seen.size(), exp_n));
        foreach (up_seen[i]) chk(m_spk[up_seen[i] >> 5][up_seen[i] & 31] && m_mask[up_seen[i] >> 5][up_seen[i] & 31], "upward packet is a masked spike");
      end
    end
    chk(m_fires_by_reset[0] > 0 && m_fires_by_reset[1] > 0 && m_fires_by_reset[2] > 0, "all reset modes fired");
    chk(up_cong > 10, "upward congestion exercised");
    chk(lane_busy > 0, "several clusters competed for the memory");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
