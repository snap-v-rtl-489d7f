// tb_data_router -- sends random messages {dest, len, body} through a level-1
// and a level-2 data router with random downstream back-pressure. A reference
// model computes the output port (or a drop) for every destination; the
// testbench checks that each port receives exactly the bytes of the messages
// routed to it, in order, that nothing leaks to other ports and that the
// router returns to idle at every message boundary.
module tb_data_router;
  import snapv_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, stalls = 0, drops = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // level 1 (inside group 0): 4 clusters + weight memory; level 2: 8 groups
  logic       a_valid, a_ready, b_valid, b_ready, a_idle, b_idle;
  logic [7:0] a_byte, b_byte, a_obyte, b_obyte;
  logic [4:0] a_ovalid, a_oready;
  logic [7:0] b_ovalid, b_oready;
  data_router #(.NOUT(5), .LEVEL(1)) u_a (.clk, .rst_n, .in_valid(a_valid), .in_ready(a_ready),
    .in_byte(a_byte), .out_valid(a_ovalid), .out_ready(a_oready), .out_byte(a_obyte), .idle(a_idle));
  data_router #(.NOUT(8), .LEVEL(2)) u_b (.clk, .rst_n, .in_valid(b_valid), .in_ready(b_ready),
    .in_byte(b_byte), .out_valid(b_ovalid), .out_ready(b_oready), .out_byte(b_obyte), .idle(b_idle));

  function automatic int route(int level, int d);
    if (d < 32) return (level == 1) ? d % 4 : d / 4;
    if (d < 64) return (level == 1) ? 4 : ((d - 32) < 8 ? d - 32 : -1);
    return -1;
  endfunction

  int a_exp [5][$], b_exp [8][$];

  always @(negedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) if (a_ovalid[o] && a_oready[o]) begin
      checks++;
      if (a_exp[o].size() == 0 || a_exp[o][0] != int'(a_obyte)) begin
        failures++; $display("FAIL: L1 port %0d byte %h", o, a_obyte);
      end else void'(a_exp[o].pop_front());
    end
    for (int o = 0; o < 8; o++) if (b_ovalid[o] && b_oready[o]) begin
      checks++;
      if (b_exp[o].size() == 0 || b_exp[o][0] != int'(b_obyte)) begin
        failures++; $display("FAIL: L2 port %0d byte %h", o, b_obyte);
      end else void'(b_exp[o].pop_front());
    end
    if ($countones(a_ovalid) > 1 || $countones(b_ovalid) > 1) begin failures++; $display("FAIL: multi-hot"); end
    if ((a_valid && !a_ready) || (b_valid && !b_ready)) stalls++;
  end

  // send one message on router a (sel=0) or b (sel=1)
  task automatic send(bit sel, logic [7:0] msg [$]);
    int p;
    bit taken;
    p = route(sel ? 2 : 1, msg[0]);
    if (p < 0) drops++;
    if (!sel) begin
      chk(a_idle, "L1 idle at message start");
      if (p >= 0) foreach (msg[i]) a_exp[p].push_back(msg[i]);
    end else begin
      chk(b_idle, "L2 idle at message start");
      if (p >= 0) foreach (msg[i]) b_exp[p].push_back(msg[i]);
    end
    foreach (msg[i]) begin
      if (!sel) begin a_valid = 1; a_byte = msg[i]; end
      else      begin b_valid = 1; b_byte = msg[i]; end
      do begin
        a_oready = 5'($urandom) | 5'($urandom);
        b_oready = 8'($urandom) | 8'($urandom);
        #2 taken = sel ? b_ready : a_ready;
        @(posedge clk); #1;
      end while (!taken);
      a_valid = 0; b_valid = 0;
    end
  endtask

  initial begin
    logic [7:0] msg [$];
    a_valid = 0; b_valid = 0; a_byte = 0; b_byte = 0; a_oready = 0; b_oready = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 600; n++) begin
      int len;
      msg.delete();
      case ($urandom_range(0, 9))
        0:       msg.push_back(8'($urandom_range(64, 255)));   // unroutable
        1:       msg.push_back(8'($urandom_range(40, 63)));    // unroutable at level 2
        2, 3:    msg.push_back(8'($urandom_range(32, 39)));    // weight memory of a group
        default: msg.push_back(8'($urandom_range(0, 31)));     // a cluster
      endcase
      len = $urandom_range(0, 6);
      msg.push_back(8'(len));
      for (int i = 0; i < len; i++) msg.push_back(8'($urandom));
      send(n % 2 == 1, msg);
    end
    repeat (5) @(posedge clk);
    foreach (a_exp[o]) chk(a_exp[o].size() == 0, $sformatf("L1 port %0d received all", o));
    foreach (b_exp[o]) chk(b_exp[o].size() == 0, $sformatf("L2 port %0d received all", o));
    chk(a_idle && b_idle, "routers idle at the end");
    chk(stalls > 50, "back-pressure exercised");
    chk(drops > 20, "drops exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
