// tb_spike_decoder -- feeds random spike packets (hardware neurons and input
// channels) and checks every counter through the read port against a model,
// the saturation of a counter, the windowed argmax with its first-to-reach
// tie rule, and that clear zeroes everything after its sweep.
module tb_spike_decoder;
  import snapv_pkg::*;
  localparam int NN = 1024, CW = 8;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
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

  logic in_valid, clear, clearing;
  spike_pkt_t in_pkt;
  logic [9:0] rd_id, win_lo, win_hi, argmax;
  logic [CW-1:0] rd_count, maxcount;
  spike_decoder #(.NNEUR(NN), .CW(CW)) dut (.*);

  int cnt_m [NN];
  int max_m, arg_m;

  task automatic wait_clear();
    while (clearing) begin @(posedge clk); #1; end
  endtask

  task automatic send(int id, bit input_ch);
    in_valid = 1;
    in_pkt = input_ch ? spike_pkt_t'({6'(32 + id / 32), 5'(id % 32)}) : spike_pkt_t'(11'(id));
    @(posedge clk); #1;
    in_valid = 0;
    if (!input_ch) begin
      if (cnt_m[id] < (1 << CW) - 1) cnt_m[id]++;
      if (id >= int'(win_lo) && id <= int'(win_hi) && cnt_m[id] > max_m) begin max_m = cnt_m[id]; arg_m = id; end
    end
  endtask

  task automatic check_all(string tag);
    for (int i = 0; i < NN; i++) begin
      rd_id = 10'(i); #1;
      chk(int'(rd_count) == cnt_m[i], $sformatf("%s count %0d: %0d vs %0d", tag, i, rd_count, cnt_m[i]));
    end
    chk(int'(maxcount) == max_m && int'(argmax) == arg_m, $sformatf("%s argmax %0d/%0d vs %0d/%0d", tag, argmax, maxcount, arg_m, max_m));
  endtask

  initial begin
    in_valid = 0; in_pkt = '0; clear = 0; rd_id = 0; win_lo = 10'd100; win_hi = 10'd109;
    foreach (cnt_m[i]) cnt_m[i] = 0;
    max_m = 0; arg_m = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    chk(clearing, "clear sweep after reset");
    wait_clear();
    check_all("after reset");
    for (int round = 0; round < 3; round++) begin
      for (int n = 0; n < 3000; n++) begin
        int id;
        id = ($urandom_range(0, 1) == 0) ? $urandom_range(100, 109) : $urandom_range(0, NN - 1);
        send(id, $urandom_range(0, 9) == 0);
      end
      for (int n = 0; n < 300; n++) send(7, 0);   // saturates neuron 7 (outside the window)
      check_all($sformatf("round %0d", round));
      clear = 1; @(posedge clk); #1; clear = 0;
      chk(clearing, "clear starts a sweep");
      send(3, 0);                                // ignored during the sweep
      cnt_m[3] = 0;
      wait_clear();
      foreach (cnt_m[i]) cnt_m[i] = 0;
      max_m = 0; arg_m = 0;
      check_all("after clear");
    end
    chk(int'(rd_count) == 0, "final");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
