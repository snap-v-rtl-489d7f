// tb_cerebra_h -- the accelerator fabric with two cluster groups (eight
// clusters): L2 spike router, L2 data router and the groups. A random
// recurrent network spanning both groups is configured through the byte
// port; then timesteps run with random external spikes injected at the
// controller port. Each step the testbench compares all 256 neurons' spikes
// with the reference network and checks that exactly the masked spikes come
// back out of the controller port. Spikes n_cross groups, so both router levels
// and their multicast are exercised.
module tb_cerebra_h;
  import snapv_pkg::*;
  localparam int NG = 2;
  localparam int NCL = NG * CL_PER_GRP;
  `include "lif_ref.svh"
  `include "snn_ref.svh"
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, in_full_cycles = 0, n_cross = 0;
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

  logic init_mode, time_step, cfg_valid, cfg_ready, spk_in_push, spk_in_full, spk_out_push, idle;
  logic [7:0] cfg_byte;
  spike_pkt_t spk_in_pkt, spk_out_pkt;

  cerebra_h #(.NUM_GROUPS(NG)) dut (.*);

  logic [NPC-1:0] spk [NCL];
  for (genvar g = 0; g < NG; g++) begin : g_g
    for (genvar k = 0; k < CL_PER_GRP; k++) begin : g_k
      assign spk[g * CL_PER_GRP + k] = dut.g_grp[g].u_group.g_cl[k].u_cluster.spikes;
    end
  end

  int out_seen [$];
  always @(negedge clk) if (rst_n) begin
    if (spk_out_push) out_seen.push_back(int'(spk_out_pkt));
    if (spk_in_full) in_full_cycles++;
  end

  task automatic wait_idle();
    int n;
    n = 0;
    do begin @(posedge clk); #1; n++; end while (!idle && n < 20000);
    @(posedge clk); #1;
    chk(idle, "fabric idle");
  endtask

  initial begin
    int pool [$];
    cfg_valid = 0; cfg_byte = 0; spk_in_push = 0; spk_in_pkt = '0;
    init_mode = 1; time_step = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < NCL; c++) pool.push_back(c);
    for (int c = 32; c < 36; c++) pool.push_back(c);
    build_network(4, pool, 300, 2500);
    for (int k = 0; k < NCL; k++)
      for (int c = 0; c < NCL; c++)
        if (m_tv[k][c] && (c / CL_PER_GRP) != (k / CL_PER_GRP)) n_cross++;
    foreach (cfg_q[i]) begin
      bit r;
      cfg_valid = 1; cfg_byte = cfg_q[i];
      do begin @(negedge clk); r = cfg_ready; @(posedge clk); #1; end while (!r);
      cfg_valid = 0;
    end
    wait_idle();
    init_mode = 0;
    @(posedge clk); #1;
    for (int step = 0; step < 30; step++) begin
      int ext [$];
      int n;
      ext.delete();
      n = $urandom_range(0, 40);
      for (int i = 0; i < n; i++) ext.push_back(((32 + $urandom_range(0, 3)) << 5) | $urandom_range(0, 31));
      model_step(ext);
      foreach (ext[i]) begin
        while (spk_in_full) begin @(posedge clk); #1; end
        spk_in_push = 1; spk_in_pkt = spike_pkt_t'(ext[i]);
        @(posedge clk); #1;
        spk_in_push = 0;
      end
      wait_idle();
      out_seen.delete();
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
        chk(out_seen.size() == exp_n, $sformatf("step %0d: %0d spikes at the controller port, expected %0d", step, out_seen.size(), exp_n));
        foreach (out_seen[i]) chk(m_spk[out_seen[i] >> 5][out_seen[i] & 31] && m_mask[out_seen[i] >> 5][out_seen[i] & 31], "output packet is a masked spike");
      end
    end
    chk(n_cross > 0, "network has synapses between groups");
    chk(m_fires_by_reset[0] > 0 && m_fires_by_reset[1] > 0 && m_fires_by_reset[2] > 0, "all reset modes fired");
    chk(in_full_cycles > 0, "controller port saw back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
