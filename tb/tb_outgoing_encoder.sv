// tb_outgoing_encoder -- random spike vectors with random congestion; checks
// that every enabled spike leaves exactly once, as {CLUSTER_ID, neuron},
// lowest index first, never while the router FIFO is full, and that masked
// neurons are not sent.
module tb_outgoing_encoder;
  import snapv_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [NPC-1:0] spikes, mask;
  logic mask_we, out_push, out_full, idle;
  spike_pkt_t out_pkt;
  int checks = 0, failures = 0, congested = 0;

  outgoing_encoder #(.CLUSTER_ID(6'd13)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int sent[$];
  always @(posedge clk) if (rst_n) begin
    if (out_push) begin
      sent.push_back(out_pkt.neuron);
      if (out_pkt.cluster != 6'd13) begin failures++; $display("FAIL: cluster id"); end
      if (out_full) begin failures++; $display("FAIL: push while full"); end
    end
    if (out_full && !idle) congested++;
  end

  initial begin
    logic [NPC-1:0] en;
    spikes = 0; mask = 0; mask_we = 0; out_full = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      logic [NPC-1:0] v;
      en = (r < 100) ? '1 : 32'hF0F0_3C3C;
      if (r == 100) begin @(negedge clk); mask_we = 1; mask = en; @(negedge clk); mask_we = 0; end
      v = NPC'($urandom);
      sent.delete();
      @(negedge clk); spikes = v;
      @(negedge clk); spikes = 0;
      while (!idle) begin
        out_full = ($urandom_range(0, 2) == 0);
        @(negedge clk);
      end
      out_full = 0;
      begin
        int k;
        bit ok;
        k = 0;
        ok = 1;
        for (int j = 0; j < NPC; j++) if (v[j] && en[j]) begin
          if (k >= sent.size() || sent[k] != j) ok = 0;
          k++;
        end
        chk(ok && k == sent.size(), $sformatf("round %0d packet list v=%h got %p", r, v, sent));
      end
    end
    chk(congested > 100, "congestion exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
