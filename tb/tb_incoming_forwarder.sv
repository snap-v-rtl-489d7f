// tb_incoming_forwarder -- programs lookup entries, sends spike packets and
// checks the weight-row addresses pushed to a modelled resolver queue (base +
// neuron, drop for unmapped sources), the stall while the queue reports full,
// and the splitting of a returned row into per-neuron weights.
module tb_incoming_forwarder;
  import snapv_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_push, in_full, tbl_we, req_valid, lane_valid, idle;
  spike_pkt_t in_pkt;
  logic [CID_W-1:0] tbl_idx;
  logic [15:0] tbl_data;
  logic [AW-1:0] req_addr;
  logic [3:0] req_occ;
  logic [ROW_BITS-1:0] lane_row;
  logic [NPC-1:0] w_valid;
  weight_t w_data [NPC];
  int checks = 0, failures = 0, stalls = 0;

  incoming_forwarder dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int base_of[64];
  bit valid_of[64];
  int exp_q[$], got_q[$];
  bit hold_full;
  bit phase_on = 1;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  assign hold_full = phase_on && ((cyc % 50) >= 40);
  assign req_occ = hold_full ? 4'd8 : 4'd0;

  always @(posedge clk) if (rst_n && req_valid) begin
    if (hold_full) begin failures++; $display("FAIL: request while queue full"); end
    got_q.push_back(req_addr);
  end
  always @(posedge clk) if (rst_n && hold_full && !req_valid) stalls++;

  initial begin
    in_push = 0; tbl_we = 0; lane_valid = 0; lane_row = '0; in_pkt = '0; tbl_idx = 0; tbl_data = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 64; c++) begin
      valid_of[c] = (c % 3 != 1);
      base_of[c] = $urandom_range(0, 2000);
      @(negedge clk);
      tbl_we = 1; tbl_idx = CID_W'(c); tbl_data = {valid_of[c], 4'd0, 11'(base_of[c])};
    end
    @(negedge clk); tbl_we = 0;
    for (int i = 0; i < 300; i++) begin
      spike_pkt_t p;
      p.cluster = CID_W'($urandom_range(0, 63)); p.neuron = NID_W'($urandom);
      @(negedge clk);
      while (in_full) @(negedge clk);
      in_push = 1; in_pkt = p;
      if (valid_of[p.cluster]) exp_q.push_back((base_of[p.cluster] + p.neuron) % 2048);
      @(negedge clk); in_push = 0;
    end
    phase_on = 0;
    repeat (30) @(posedge clk);
    chk(idle, "idle after drain");
    chk(got_q.size() == exp_q.size(), $sformatf("requests %0d exp %0d", got_q.size(), exp_q.size()));
    foreach (exp_q[i]) if (i < got_q.size()) chk(got_q[i] == exp_q[i], "request address");
    chk(stalls > 10, "queue-full stall exercised");
    // weight lane split
    for (int j = 0; j < NPC; j++) lane_row[j*32 +: 32] = 32'(j * 1000 - 7);
    @(negedge clk); lane_valid = 1;
    #1;
    for (int j = 0; j < NPC; j++) begin
      chk(w_valid[j], "w_valid with lane");
      chk(w_data[j] == weight_t'(j * 1000 - 7), "weight slice");
    end
    @(negedge clk); lane_valid = 0; #1;
    chk(w_valid == '0, "w_valid drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
