// weight_sram_bank -- one bit-slice sub-bank of a cluster group's weight memory.
//
// A cluster group's 1024-bit weight rows are split over eight such banks of
// 128 bits by 2048 rows. On silicon each bank is a compiled SRAM macro. Here
// it is an array, which synthesis maps to a memory. Writes take effect at the
// clock edge. The read is asynchronous: rdata follows raddr in the same cycle,
// as the architecture requires. The resolver never reads and writes in the
// same cycle, so the bank behaves as a single-port memory. There is no reset;
// the resolver clears the rows after reset by writing zeros.
module weight_sram_bank #(
  parameter int unsigned ROWS = 2048,
  parameter int unsigned BITS = 128
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] waddr,
  input  logic [BITS-1:0]         wdata,
  input  logic [$clog2(ROWS)-1:0] raddr,
  output logic [BITS-1:0]         rdata
);
  logic [BITS-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
