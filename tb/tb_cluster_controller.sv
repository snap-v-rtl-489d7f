// tb_cluster_controller -- sends LOAD_NI, LOAD_IF and LOAD_OE packets (with
// random stalls of the sender), plus an unknown opcode and a packet that ends
// before its flits are complete, and checks the commit outputs: neuron bytes
// in order with the first one marked, table and mask writes with the right
// index and data, and no commit for the cut-off packet.
module tb_cluster_controller;
  import snapv_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready;
  logic [7:0] in_byte;
  logic ni_valid, ni_first, if_we, oe_we, idle;
  logic [7:0] ni_byte;
  logic [NID_W-1:0] ni_sel;
  logic [CID_W-1:0] if_idx;
  logic [15:0] if_data;
  logic [NPC-1:0] oe_mask;
  int checks = 0, failures = 0;

  cluster_controller dut (.*);
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

  // monitor
  logic [7:0] ni_log[$]; int ni_sel_log[$]; int ni_first_log[$];
  int if_cnt = 0, oe_cnt = 0;
  logic [CID_W-1:0] last_if_idx; logic [15:0] last_if_data; logic [31:0] last_oe;
  always @(posedge clk) if (rst_n) begin
    if (ni_valid) begin ni_log.push_back(ni_byte); ni_sel_log.push_back(ni_sel); ni_first_log.push_back(ni_first); end
    if (if_we) begin if_cnt++; last_if_idx = if_idx; last_if_data = if_data; end
    if (oe_we) begin oe_cnt++; last_oe = oe_mask; end
  end

  task automatic send(logic [7:0] b[$]);
    foreach (b[i]) begin
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_byte = b[i];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    logic [7:0] pkt[$];
    in_valid = 0; in_byte = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 6; n++) begin
      int nrow;
      logic [7:0] d[5];
      nrow = $urandom_range(0, 31);
      foreach (d[i]) d[i] = 8'($urandom);
      pkt = {8'(nrow / 4), 8'd8, OPCODE_LOAD_NI, 8'(nrow), 8'd5, d[0], d[1], d[2], d[3], d[4]};
      ni_log.delete(); ni_sel_log.delete(); ni_first_log.delete();
      send(pkt);
      repeat (8) @(posedge clk);
      chk(ni_log.size() == 5, $sformatf("NI bytes %0d", ni_log.size()));
      for (int i = 0; i < 5 && i < ni_log.size(); i++) begin
        chk(ni_log[i] == d[i], "NI byte value");
        chk(ni_sel_log[i] == nrow, "NI neuron select");
        chk(ni_first_log[i] == (i == 0), "NI first marker");
      end
      chk(idle, "idle after packet");
    end
    // LOAD_IF
    pkt = {8'd5, 8'd5, OPCODE_LOAD_IF, 8'd37, 8'd2, 8'h34, 8'h82};
    send(pkt); repeat (3) @(posedge clk);
    chk(if_cnt == 1 && last_if_idx == 37 && last_if_data == 16'h8234, "LOAD_IF commit");
    // LOAD_OE
    pkt = {8'd5, 8'd7, OPCODE_LOAD_OE, 8'd0, 8'd4, 8'hEF, 8'hBE, 8'hAD, 8'hDE};
    send(pkt); repeat (3) @(posedge clk);
    chk(oe_cnt == 1 && last_oe == 32'hDEADBEEF, "LOAD_OE commit");
    // unknown opcode: consumed, nothing committed
    pkt = {8'd5, 8'd4, 8'h77, 8'd1, 8'd1, 8'h55};
    ni_log.delete();
    send(pkt); repeat (3) @(posedge clk);
    chk(ni_log.size() == 0 && if_cnt == 1 && oe_cnt == 1, "unknown opcode ignored");
    // cut-off packet: length says 4 but count says 2 flits -> only one flit arrives
    pkt = {8'd5, 8'd4, OPCODE_LOAD_IF, 8'd3, 8'd2, 8'h11};
    send(pkt); repeat (3) @(posedge clk);
    chk(if_cnt == 1, "incomplete transfer not committed");
    // a good packet still works afterwards
    pkt = {8'd5, 8'd5, OPCODE_LOAD_IF, 8'd9, 8'd2, 8'h07, 8'h80};
    send(pkt); repeat (3) @(posedge clk);
    chk(if_cnt == 2 && last_if_idx == 9 && last_if_data == 16'h8007, "recovery after cut-off packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
