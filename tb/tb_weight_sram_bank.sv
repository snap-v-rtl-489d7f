// tb_weight_sram_bank -- writes random rows and reads them back the same
// cycle the address is applied (asynchronous read), against an array model.
module tb_weight_sram_bank;
  logic clk = 0;
  logic we;
  logic [10:0] waddr, raddr;
  logic [127:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [127:0] model [int];

  weight_sram_bank dut (.*);
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

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      we = 1; waddr = 11'($urandom_range(0, 255) * 8 + (i % 8));
      wdata = {$urandom, $urandom, $urandom, $urandom};
      model[waddr] = wdata;
    end
    @(negedge clk); we = 0;
    foreach (model[a]) begin
      @(negedge clk); raddr = 11'(a); #1;
      chk(rdata == model[a], $sformatf("row %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
