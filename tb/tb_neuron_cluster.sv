// tb_neuron_cluster -- one full cluster (controller, forwarder, 32 LIF
// neurons, encoder) against a behavioural model of the group's weight
// resolver and of the router. The testbench configures all 32 neurons with
// random decay, reset mode and threshold, loads forwarding-table entries and
// the output mask through the byte-serial data port, then runs timesteps with
// random spike packets. Each step it compares every neuron's spike with a
// reference LIF model. It also checks the outgoing packets against the mask
// and that the request queue never holds more than its depth.
module tb_neuron_cluster;
  import snapv_pkg::*;
  `include "lif_ref.svh"
  localparam logic [CID_W-1:0] CID = 6'd9;
  localparam int QD = 8;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, qfull_cycles = 0, fired = 0, dropped_pkts = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic cfg_valid, cfg_ready, spk_in_push, spk_in_full, spk_out_push, spk_out_full;
  logic [7:0] cfg_byte;
  spike_pkt_t spk_in_pkt, spk_out_pkt;
  logic req_valid, lane_valid, time_step, idle;
  logic [AW-1:0] req_addr;
  logic [$clog2(QD+1)-1:0] req_occ;
  logic [ROW_BITS-1:0] lane_row;
  logic [NPC-1:0] spikes;

  neuron_cluster #(.CLUSTER_ID(CID), .QDEPTH(QD)) dut (.*);
  weight_t vm [NPC];
  for (genvar g = 0; g < NPC; g++) begin : g_vm
    assign vm[g] = dut.g_neuron[g].u_neuron.v_mem;
  end

  // ---------------------------------------------- behavioural weight memory
  weight_t W [int][NPC];          // row -> 32 weights
  int q [$];
  bit stall_res;
  assign req_occ = ($clog2(QD+1))'(q.size());
  always @(posedge clk) begin
    lane_valid <= 1'b0;
    if (rst_n) begin
      if (q.size() > 0 && !stall_res && $urandom_range(0, 2) != 0) begin
        int a;
        a = q.pop_front();
        lane_valid <= 1'b1;
        for (int j = 0; j < NPC; j++) lane_row[32*j +: 32] <= W.exists(a) ? W[a][j] : '0;
      end
      if (req_valid) begin
        if (q.size() >= QD) begin failures++; $display("FAIL: request queue overflow"); end
        q.push_back(int'(req_addr));
      end
      if (q.size() >= QD) qfull_cycles++;
    end
  end

  // ---------------------------------------------- outgoing packets
  int out_seen [$];
  always @(posedge clk) if (rst_n && spk_out_push) begin
    if (spk_out_full) begin failures++; $display("FAIL: out push while full"); end
    if (spk_out_pkt.cluster != CID) begin failures++; $display("FAIL: out cluster id"); end
    out_seen.push_back(int'(spk_out_pkt.neuron));
  end

  // ---------------------------------------------- configuration helpers
  task automatic send_byte(logic [7:0] b);
    bit r;
    cfg_valid = 1; cfg_byte = b;
    do begin @(negedge clk); r = cfg_ready; @(posedge clk); #1; end while (!r);
    cfg_valid = 0;
  endtask

  task automatic send_msg(logic [7:0] op, logic [7:0] row, logic [7:0] data [$]);
    send_byte(8'(CID));
    send_byte(8'(3 + data.size()));
    send_byte(op);
    send_byte(row);
    send_byte(8'(data.size()));
    foreach (data[i]) send_byte(data[i]);
  endtask

  task automatic wait_idle();
    int n;
    n = 0;
    do begin @(posedge clk); #1; n++; end while (!(idle && q.size() == 0 && !lane_valid) && n < 5000);
    @(posedge clk); #1;
    chk(idle, "cluster idle before the timestep");
  endtask

  logic [1:0] dsel [NPC], rsel [NPC];
  weight_t thr [NPC], vref [NPC], accref [NPC];
  bit tbl_v [64];
  int tbl_base [64];
  logic [NPC-1:0] mask;
  int resets_seen [3];

  initial begin
    logic [7:0] d [$];
    cfg_valid = 0; cfg_byte = 0; spk_in_push = 0; spk_in_pkt = '0; spk_out_full = 0;
    time_step = 0; stall_res = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // neurons
    for (int j = 0; j < NPC; j++) begin
      dsel[j] = 2'($urandom_range(0, 3));
      rsel[j] = 2'(j % 3);
      thr[j]  = weight_t'($urandom_range(200, 3000));
      vref[j] = '0;
      d.delete();
      d.push_back({4'd0, rsel[j], dsel[j]});
      for (int b = 0; b < 4; b++) d.push_back(thr[j][8*b +: 8]);
      send_msg(8'(OPCODE_LOAD_NI), 8'(j), d);
    end
    // forwarding table: 20 random source clusters, random bases
    foreach (tbl_v[c]) tbl_v[c] = 0;
    for (int k = 0; k < 20; k++) begin
      int c, base;
      c = $urandom_range(0, 63);
      base = $urandom_range(0, 2047 - 31);
      tbl_v[c] = 1; tbl_base[c] = base;
      d.delete();
      d.push_back(8'(base)); d.push_back({1'b1, 4'd0, 3'(base >> 8)});
      send_msg(8'(OPCODE_LOAD_IF), 8'(c), d);
      for (int n = 0; n < 32; n++)
        for (int j = 0; j < NPC; j++)
          W[base + n][j] = ($urandom_range(0, 3) == 0) ? '0 : weight_t'(int'($urandom_range(0, 900)) - 250);
    end
    // output mask
    mask = 32'($urandom) | 32'($urandom);
    d.delete();
    for (int b = 0; b < 4; b++) d.push_back(mask[8*b +: 8]);
    send_msg(8'(OPCODE_LOAD_OE), 8'd0, d);
    // an unknown opcode is ignored
    d.delete(); d.push_back(8'hAA);
    send_msg(8'd7, 8'd3, d);
    wait_idle();

    for (int step = 0; step < 60; step++) begin
      int npk;
      foreach (accref[j]) accref[j] = '0;
      npk = $urandom_range(0, 40);
      stall_res = (step % 4 == 1);
      for (int p = 0; p < npk; p++) begin
        spike_pkt_t pk;
        pk.cluster = 6'($urandom_range(0, 63));
        pk.neuron  = 5'($urandom);
        if (p % 2 == 0) begin  // prefer mapped sources
          int c;
          c = $urandom_range(0, 63);
          for (int t = 0; t < 64 && !tbl_v[c]; t++) c = (c + 1) % 64;
          pk.cluster = 6'(c);
        end
        if (tbl_v[pk.cluster]) begin
          for (int j = 0; j < NPC; j++) accref[j] = sat_add(accref[j], W[tbl_base[pk.cluster] + pk.neuron][j]);
        end else dropped_pkts++;
        while (spk_in_full) begin @(posedge clk); #1; end
        spk_in_push = 1; spk_in_pkt = pk;
        @(posedge clk); #1;
        spk_in_push = 0;
        if (stall_res && p == npk / 2) begin repeat (20) @(posedge clk); #1; stall_res = 0; end
      end
      stall_res = 0;
      wait_idle();
      out_seen.delete();
      spk_out_full = (step % 3 == 0);
      time_step = 1;
      @(posedge clk); #1;
      time_step = 0;
      @(posedge clk); #1;   // update cycle
      begin
        logic [NPC-1:0] exp;
        for (int j = 0; j < NPC; j++) begin
          bit f;
          vref[j] = ref_lif(vref[j], accref[j], dsel[j], rsel[j], thr[j], f);
          exp[j] = f;
          if (f) begin fired++; resets_seen[rsel[j]]++; end
        end
        chk(spikes == exp, $sformatf("step %0d spikes %h expected %h", step, spikes, exp));
        for (int j = 0; j < NPC; j++) chk(vm[j] == vref[j], $sformatf("step %0d v[%0d]", step, j));
        repeat (5) @(posedge clk); #1;
        spk_out_full = 0;
        wait_idle();
        begin
          int k;
          k = 0;
          for (int j = 0; j < NPC; j++) if (exp[j] && mask[j]) begin
            chk(k < out_seen.size() && out_seen[k] == j, $sformatf("step %0d out packet %0d", step, j));
            k++;
          end
          chk(k == out_seen.size(), "no extra out packets");
        end
      end
    end
    chk(qfull_cycles > 0, "request queue filled (stall exercised)");
    chk(fired > 50, "neurons fired");
    chk(resets_seen[0] > 0 && resets_seen[1] > 0 && resets_seen[2] > 0, "all reset modes fired");
    chk(dropped_pkts > 0, "unmapped packets dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
