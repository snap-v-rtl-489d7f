// tb_spike_router -- a level-1 and a level-2 router under random traffic and
// random downstream congestion. Each packet carries a unique tag; the
// testbench checks that every packet reaches exactly the ports of the fixed
// port mapping, once each, in order per input/output pair, that nothing is
// pushed into a full downstream FIFO, and that idle returns at the end.
module tb_spike_router;
  import snapv_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------- level 1 (5 ports) and level 2 (9 ports)
  logic [4:0] a_in_push, a_in_full, a_out_push, a_out_full; logic a_idle;
  spike_pkt_t a_in_pkt [5], a_out_pkt [5];
  logic [8:0] b_in_push, b_in_full, b_out_push, b_out_full; logic b_idle;
  spike_pkt_t b_in_pkt [9], b_out_pkt [9];

  spike_router #(.NPORTS(5), .LEVEL(1)) u_a (.clk, .rst_n, .in_push(a_in_push), .in_pkt(a_in_pkt),
    .in_full(a_in_full), .out_push(a_out_push), .out_pkt(a_out_pkt), .out_full(a_out_full), .idle(a_idle));
  spike_router #(.NPORTS(9), .LEVEL(2)) u_b (.clk, .rst_n, .in_push(b_in_push), .in_pkt(b_in_pkt),
    .in_full(b_in_full), .out_push(b_out_push), .out_pkt(b_out_pkt), .out_full(b_out_full), .idle(b_idle));

  // expected delivery: tag = packet value (unique per source: cluster = src, neuron = seq)
  int a_exp [5][$], b_exp [9][$];
  int cong = 0;

  always @(negedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) if (a_out_push[o]) begin
      if (a_out_full[o]) begin failures++; $display("FAIL: L1 push into full port"); end
      if (a_exp[o].size() == 0 || !(a_exp[o][0] inside {int'(a_out_pkt[o])})) begin
        // order is only defined per source: search the first entry from the same source
        int idx;
        idx = -1;
        foreach (a_exp[o][i]) if (idx < 0 && (a_exp[o][i] >> 5) == a_out_pkt[o].cluster) idx = i;
        if (idx < 0 || a_exp[o][idx] != int'(a_out_pkt[o])) begin failures++; $display("FAIL: L1 out %0d unexpected %h", o, a_out_pkt[o]); end
        else a_exp[o].delete(idx);
      end else void'(a_exp[o].pop_front());
      checks++;
    end
    for (int o = 0; o < 9; o++) if (b_out_push[o]) begin
      int idx;
      idx = -1;
      if (b_out_full[o]) begin failures++; $display("FAIL: L2 push into full port"); end
      foreach (b_exp[o][i]) if (idx < 0 && (b_exp[o][i] >> 5) == b_out_pkt[o].cluster) idx = i;
      if (idx < 0 || b_exp[o][idx] != int'(b_out_pkt[o])) begin failures++; $display("FAIL: L2 out %0d unexpected %h", o, b_out_pkt[o]); end
      else b_exp[o].delete(idx);
      checks++;
    end
    if (a_out_full != 0 && !a_idle) cong++;
  end

  int seq_a [5], seq_b [9];
  initial begin
    a_in_push = 0; b_in_push = 0; a_out_full = 0; b_out_full = 0;
    foreach (a_in_pkt[i]) a_in_pkt[i] = '0;
    foreach (b_in_pkt[i]) b_in_pkt[i] = '0;
    foreach (seq_a[i]) seq_a[i] = 0;
    foreach (seq_b[i]) seq_b[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(posedge clk); #1;
      a_out_full = 5'($urandom) & 5'($urandom);
      b_out_full = 9'($urandom) & 9'($urandom) & 9'($urandom);
      for (int i = 0; i < 5; i++) begin
        a_in_push[i] = ($urandom_range(0, 3) == 0) && !a_in_full[i] && seq_a[i] < 32;
        a_in_pkt[i] = {6'(i), 5'(seq_a[i])};
        if (a_in_push[i]) begin
          for (int o = 0; o < 5; o++) if (i < 4 || o < 4) a_exp[o].push_back({i[5:0], 5'(seq_a[i])});
          seq_a[i]++;
        end
      end
      for (int i = 0; i < 9; i++) begin
        b_in_push[i] = ($urandom_range(0, 4) == 0) && !b_in_full[i] && seq_b[i] < 32;
        b_in_pkt[i] = {6'(i), 5'(seq_b[i])};
        if (b_in_push[i]) begin
          for (int o = 0; o < 9; o++) if ((i < 8 && o != i) || (i == 8 && o < 8)) b_exp[o].push_back({i[5:0], 5'(seq_b[i])});
          seq_b[i]++;
        end
      end
    end
    @(posedge clk); #1;
    a_in_push = 0; b_in_push = 0; a_out_full = 0; b_out_full = 0;
    repeat (300) @(posedge clk); #1;
    chk(a_idle && b_idle, "routers idle at the end");
    for (int o = 0; o < 5; o++) chk(a_exp[o].size() == 0, $sformatf("L1 port %0d got all (%0d left)", o, a_exp[o].size()));
    for (int o = 0; o < 9; o++) chk(b_exp[o].size() == 0, $sformatf("L2 port %0d got all (%0d left)", o, b_exp[o].size()));
    chk(cong > 20, "congestion exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
