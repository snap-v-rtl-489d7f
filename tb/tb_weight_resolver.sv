// tb_weight_resolver -- checks the clear-after-reset sweep, byte-serial row
// writes (full rows and short rows that must be zero padded), that no read is
// granted in initialisation mode, fixed-priority one-hot arbitration across
// the four queues, the one-cycle request-to-lane latency, lane data against
// a row model, exposed occupancy and the completion flag.
module tb_weight_resolver;
  import snapv_pkg::*;
  localparam int ROWS = 2048;
  logic clk = 0, rst_n = 0;
  logic init_mode, done, in_valid, in_ready;
  logic [7:0] in_byte;
  logic [3:0] req_valid, lane_valid;
  logic [10:0] req_addr [4];
  logic [3:0] req_occ [4];
  logic [ROW_BITS-1:0] lane_row [4];
  int checks = 0, failures = 0;

  weight_resolver dut (.*);
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

  logic [ROW_BITS-1:0] model [int];

  task automatic send_byte(logic [7:0] b);
    @(negedge clk);
    in_valid = 1; in_byte = b;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk); in_valid = 0;
  endtask

  task automatic write_row(int addr, int nbytes);
    logic [ROW_BITS-1:0] r = '0;
    send_byte(DEST_WMEM); send_byte(8'(3 + nbytes));
    send_byte(8'(addr)); send_byte(8'(addr >> 8)); send_byte(8'(nbytes));
    for (int k = 0; k < nbytes; k++) begin
      logic [7:0] b = 8'($urandom);
      r[8*k +: 8] = b;
      send_byte(b);
    end
    model[addr] = r;
  endtask

  // lane monitor
  int grant_cyc [4][$];
  logic [10:0] lane_expect_addr [4][$];
  int lane_seen = 0;
  int req_cycle [int];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    init_mode = 1; in_valid = 0; in_byte = 0; req_valid = 0;
    foreach (req_addr[i]) req_addr[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (5) @(posedge clk);
    chk(!in_ready && !done, "busy during clear sweep");
    wait (in_ready);
    chk(cyc >= ROWS, $sformatf("clear sweep lasts %0d cycles", cyc));
    chk(done, "done after clear");
    // rows
    write_row(5, 128);
    write_row(1000, 17);
    write_row(2047, 0);
    write_row(300, 128);
    write_row(301, 64);
    for (int i = 0; i < 8; i++) write_row(1200 + i, $urandom_range(1, 128));
    // requests in init mode are queued but not served
    @(negedge clk);
    req_valid = 4'b0101; req_addr[0] = 5; req_addr[2] = 300;
    @(negedge clk); req_valid = 0;
    repeat (5) @(negedge clk);
    chk(lane_valid == 0, "no reads in init mode");
    chk(req_occ[0] == 1 && req_occ[2] == 1, "occupancy exposed");
    chk(!done, "not done with queued requests");
    // switch to run: lane 0 granted first, then lane 2
    init_mode = 0;
    @(negedge clk);
    chk(lane_valid == 4'b0001 && lane_row[0] == model[5], "lane 0 first, data");
    chk(lane_row[1] == '0 && lane_row[2] == '0, "other lanes carry zeros");
    @(negedge clk);
    chk(lane_valid == 4'b0100 && lane_row[2] == model[300], "lane 2 second, data");
    @(negedge clk);
    chk(lane_valid == 0 && done, "done after drain");
    // burst: all four lanes request 6 rows each in the same cycles
    begin
      int addrs [4][6];
      int exp_order_lane [$]; int exp_order_addr [$];
      int got_lane [$]; int got_addr_ok [$];
      for (int k = 0; k < 6; k++) for (int l = 0; l < 4; l++) begin
        int pick;
        pick = $urandom_range(0, 5);
        addrs[l][k] = (pick == 0) ? 5 : (pick == 1) ? 1000 : (pick == 2) ? 2047 : (pick == 3) ? 300 : (pick == 4) ? 301 : 1203;
      end
      fork
        begin
          for (int k = 0; k < 6; k++) begin
            @(negedge clk);
            req_valid = 4'hF;
            for (int l = 0; l < 4; l++) req_addr[l] = 11'(addrs[l][k]);
          end
          @(negedge clk); req_valid = 0;
        end
        begin
          // fixed priority: queue 0 is served whenever non-empty
          int served [4] = '{0, 0, 0, 0};
          repeat (40) begin
            @(posedge clk); #1;
            if (lane_valid != 0) begin
              int l;
              chk($onehot(lane_valid), "one-hot lanes");
              l = $clog2(lane_valid);
              chk(lane_row[l] == model[addrs[l][served[l]]], $sformatf("lane %0d row %0d data", l, served[l]));
              for (int h = 0; h < l; h++) chk(served[h] == 6, "priority: lower queue first");
              served[l]++;
            end
          end
          chk(served[0] == 6 && served[1] == 6 && served[2] == 6 && served[3] == 6, "all requests served");
        end
      join
    end
    // latency: single request, lane valid exactly one cycle later
    @(negedge clk); req_valid = 4'b1000; req_addr[3] = 1000;
    @(negedge clk); req_valid = 0;
    chk(lane_valid == 0, "no lane in the push cycle");
    @(posedge clk); #1;
    chk(lane_valid == 4'b1000 && lane_row[3] == model[1000], "one cycle from arbitration to lane");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
