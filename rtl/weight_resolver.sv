// weight_resolver -- shared weight memory of one cluster group (four clusters).
//
// Read side (normal operation). Each cluster has a request queue of QDEPTH
// row addresses, and each queue's occupancy is an output for flow control.
// A fixed-priority arbiter (queue 0 first, then 1, 2, 3) makes a one-hot
// grant. The granted head address reads the memory asynchronously and the
// queue is popped. The row is registered onto the granted cluster's output
// lane with lane_valid. So a lane is valid one cycle after arbitration, and
// the memory adds no cycle. The other lanes carry zeros. done is high when
// every queue is empty and no grant is in flight.
// Write side (initialisation). Bytes arrive in a data/control packet with a
// two-byte router header (dest, length) that is skipped. Then come the low
// address byte, the high address byte, a count of data bytes and the data.
// Data byte k fills row bits 8k+7:8k. The row is committed after the last
// data byte; bytes not sent stay zero. While init_mode is high no reads are
// granted. A write cycle also blocks arbitration, since the memory is
// single-port.
// Reset: after reset the memory is swept to zero, one row per cycle (ROWS
// cycles). in_ready and done are low during the sweep.
// The memory is NBANKS weight_sram_bank slices (8 x 128 bits by default).
// From the architecture: all of the above except the two header bytes and the
// form of the clear (a sweep).
module weight_resolver
  import snapv_pkg::*;
#(
  parameter int unsigned ROWS     = MEM_ROWS,
  parameter int unsigned ROW_W    = ROW_BITS,
  parameter int unsigned NLANES   = CL_PER_GRP,
  parameter int unsigned QDEPTH   = 8,
  parameter int unsigned NBANKS   = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          init_mode,
  // read requests
  input  logic [NLANES-1:0]             req_valid,
  input  logic [$clog2(ROWS)-1:0]       req_addr [NLANES],
  output logic [$clog2(QDEPTH+1)-1:0]   req_occ  [NLANES],
  // output lanes
  output logic [NLANES-1:0]             lane_valid,
  output logic [ROW_W-1:0]              lane_row [NLANES],
  output logic                          done,
  // initialisation byte stream
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [7:0]                    in_byte
);

  localparam int unsigned RA = $clog2(ROWS);
  localparam int unsigned BW = ROW_W / NBANKS;
  localparam int unsigned NB = ROW_W / 8;     // bytes per row

  // ------------------------------------------------------- request queues
  logic [NLANES-1:0] q_empty, q_full, q_pop;
  logic [RA-1:0]     q_head [NLANES];

  for (genvar i = 0; i < NLANES; i++) begin : g_q
    sync_fifo #(.WIDTH(RA), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n, .push(req_valid[i]), .din(req_addr[i]), .pop(q_pop[i]),
      .dout(q_head[i]), .full(q_full[i]), .empty(q_empty[i]), .count(req_occ[i])
    );
  end

  // ------------------------------------------------------- init / clear
  typedef enum logic [2:0] {I_CLEAR, I_DEST, I_LEN, I_LO, I_HI, I_CNT, I_DATA, I_COMMIT} istate_e;
  istate_e istate;

  logic [RA-1:0]     waddr;
  logic [7:0]        wcnt, wgot;
  logic [ROW_W-1:0]  row_buf;
  logic              we;
  logic [ROW_W-1:0]  wdata;

  assign in_ready = (istate != I_CLEAR) && (istate != I_COMMIT);
  assign we       = (istate == I_CLEAR) || (istate == I_COMMIT);
  assign wdata    = (istate == I_CLEAR) ? '0 : row_buf;

  logic take;
  assign take = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      istate  <= I_CLEAR;
      waddr   <= '0;
      wcnt    <= '0;
      wgot    <= '0;
      row_buf <= '0;
    end else begin
      unique case (istate)
        I_CLEAR: begin
          waddr <= waddr + 1'b1;
          if (waddr == RA'(ROWS - 1)) istate <= I_DEST;
        end
        I_DEST: if (take) istate <= I_LEN;
        I_LEN:  if (take) istate <= I_LO;
        I_LO:   if (take) begin
                  waddr      <= RA'(in_byte);
                  row_buf    <= '0;
                  istate     <= I_HI;
                end
        I_HI:   if (take) begin
                  waddr         <= RA'({in_byte, 8'(waddr)});
                  istate        <= I_CNT;
                end
        I_CNT:  if (take) begin
                  wcnt   <= in_byte;
                  wgot   <= '0;
                  istate <= (in_byte == 8'd0) ? I_COMMIT : I_DATA;
                end
        I_DATA: if (take) begin
                  if (wgot < 8'(NB)) row_buf[wgot*8 +: 8] <= in_byte;
                  wgot <= wgot + 8'd1;
                  if (wgot + 8'd1 == wcnt) istate <= I_COMMIT;
                end
        I_COMMIT: istate <= I_DEST;
        default:  istate <= I_DEST;
      endcase
    end
  end

  // ------------------------------------------------------- arbitration
  logic [NLANES-1:0] grant;
  logic [RA-1:0]     raddr;
  logic              arb_en;

  assign arb_en = !init_mode && !we;

  always_comb begin
    grant = '0;
    raddr = '0;
    for (int i = NLANES - 1; i >= 0; i--) begin
      if (arb_en && !q_empty[i]) begin
        grant = '0;
        grant[i] = 1'b1;
        raddr = q_head[i];
      end
    end
  end
  assign q_pop = grant;

  // ------------------------------------------------------- memory
  logic [ROW_W-1:0] rdata;
  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    weight_sram_bank #(.ROWS(ROWS), .BITS(BW)) u_bank (
      .clk, .we, .waddr, .wdata(wdata[b*BW +: BW]), .raddr, .rdata(rdata[b*BW +: BW])
    );
  end

  // ------------------------------------------------------- output lanes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lane_valid <= '0;
      for (int i = 0; i < NLANES; i++) lane_row[i] <= '0;
    end else begin
      lane_valid <= grant;
      for (int i = 0; i < NLANES; i++) lane_row[i] <= grant[i] ? rdata : '0;
    end
  end

  assign done = (&q_empty) && !(|lane_valid) && (istate != I_CLEAR);

  a_onehot_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
  a_no_q_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                    (req_valid & q_full) == '0);

endmodule
