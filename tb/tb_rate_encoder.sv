// tb_rate_encoder -- writes random intensities, runs scans with random
// back-pressure and compares every emitted packet with a bit-exact model of
// the encoder's LFSR comparison. It also checks the channel-to-ID mapping,
// that busy ends after the last channel, and that over many scans the firing
// rate of a channel tracks its intensity / 256.
module tb_rate_encoder;
  import snapv_pkg::*;
  localparam int NCH = 1024;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, stalls = 0;
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

  logic wr_en, start, out_valid, out_ready, busy;
  logic [$clog2(NCH)-1:0] wr_ch;
  logic [7:0] wr_val;
  logic [$clog2(NCH):0] nch;
  spike_pkt_t out_pkt;
  rate_encoder #(.NCH(NCH)) dut (.*);

  logic [7:0] val [NCH];
  logic [15:0] lfsr_m = 16'hACE1;
  int exp_q [$];
  int fires [NCH];

  always @(negedge clk) if (rst_n) begin
    if (out_valid && !out_ready) stalls++;
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || exp_q[0] != int'(out_pkt)) begin
        failures++; $display("FAIL: packet %h", out_pkt);
      end else void'(exp_q.pop_front());
    end
  end

  // model one scan of n channels (the LFSR steps once per channel)
  function automatic void model_scan(int n);
    for (int c = 0; c < n; c++) begin
      if (val[c] > lfsr_m[7:0]) begin
        exp_q.push_back(((32 + c / 32) << 5) | (c % 32));
        fires[c]++;
      end
      lfsr_m = {1'b0, lfsr_m[15:1]} ^ (lfsr_m[0] ? 16'hB400 : 16'h0000);
    end
  endfunction

  initial begin
    wr_en = 0; start = 0; out_ready = 1; wr_ch = 0; wr_val = 0; nch = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < NCH; c++) begin
      val[c] = (c % 4 == 0) ? 8'(c % 256) : 8'($urandom);
      if (c == 5) val[c] = 8'd0;
      wr_en = 1; wr_ch = 10'(c); wr_val = val[c];
      @(posedge clk); #1;
    end
    wr_en = 0;
    foreach (fires[c]) fires[c] = 0;
    for (int s = 0; s < 60; s++) begin
      int n, cyc;
      n = (s < 40) ? NCH : $urandom_range(1, NCH);
      model_scan(n);
      nch = 11'(n); start = 1;
      @(posedge clk); #1;
      start = 0;
      cyc = 0;
      while (busy && cyc < 10 * NCH) begin
        out_ready = (s % 2 == 0) ? 1'b1 : ($urandom_range(0, 3) != 0);
        @(posedge clk); #1; cyc++;
      end
      out_ready = 1;
      chk(!busy, "scan finished");
      chk(exp_q.size() == 0, $sformatf("scan %0d: all packets seen (%0d left)", s, exp_q.size()));
      exp_q.delete();
    end
    chk(fires[5] == 0, "zero intensity never fires");
    begin
      int hi, lo;
      hi = 0; lo = 0;
      for (int c = 0; c < NCH; c++) begin
        if (val[c] > 200) hi += fires[c];
        if (val[c] < 50 && val[c] > 0) lo += fires[c];
      end
      chk(hi > lo, "bright channels fire more often than dim ones");
    end
    chk(stalls > 100, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
