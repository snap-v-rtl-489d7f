// tb_sync_fifo -- random push/pop against a queue model; checks data order,
// full/empty flags, occupancy and simultaneous push+pop when full.
module tb_sync_fifo;
  localparam int W = 11, D = 8;
  logic clk = 0, rst_n = 0;
  logic push, pop, full, empty;
  logic [W-1:0] din, dout;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    push = 0; pop = 0; din = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      chk(empty == (q.size() == 0), "empty flag");
      chk(full == (q.size() == D), "full flag");
      chk(count == q.size(), "count");
      if (q.size() != 0) chk(dout == q[0], $sformatf("dout %0h exp %0h", dout, q[0]));
      // bias toward filling in the first half, draining in the second
      pop  = ($urandom_range(0, 99) < ((i % 400) < 200 ? 30 : 75)) && !empty;
      push = ($urandom_range(0, 99) < ((i % 400) < 200 ? 75 : 30)) && (!full || pop);
      if (full && i % 7 == 0) begin push = 1; pop = 1; end
      din  = W'($urandom);
      @(posedge clk);
      #1;
      if (pop && q.size() != 0) void'(q.pop_front());
      if (push && (q.size() < D)) q.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
