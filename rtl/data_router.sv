// data_router -- buffer-free router of the 8-bit data/control network.
//
// Configuration traffic flows one way, from the accelerator controller down
// to the clusters and weight memories, so the router is a one-input,
// NOUT-output switch with no storage of packet data. A packet is
//   dest, length, then 'length' more bytes.
// The first byte picks the output port (address-based routing). That choice is
// held until the last byte has passed. valid and ready go straight through
// to the chosen port in the same cycle, so a hop adds no cycle.
// Address decoding (dest byte):
//   LEVEL 2 (NOUT = number of groups): cluster c -> port c/4; DEST_WMEM+g -> port g.
//   LEVEL 1 (NOUT = 5): cluster c -> port c%4; DEST_WMEM+g -> port 4 (resolver).
// A dest with no port is consumed and dropped (its bytes are accepted).
// From the architecture: buffer-free, combinational, address-based routing
// with a valid/ready handshake. The dest/length header is this design's
// choice. The architecture's table also lists "three cycles per hop"; this
// router follows the buffer-free combinational description instead and takes
// zero cycles.
module data_router
  import snapv_pkg::*;
#(
  parameter int unsigned NOUT  = 5,
  parameter int unsigned LEVEL = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [7:0]       in_byte,
  output logic [NOUT-1:0]  out_valid,
  input  logic [NOUT-1:0]  out_ready,
  output logic [7:0]       out_byte,
  output logic             idle
);
  localparam int unsigned PW = (NOUT > 1) ? $clog2(NOUT) : 1;

  typedef enum logic [1:0] {R_HEAD, R_LEN, R_BODY} rstate_e;
  rstate_e       state;
  logic [PW-1:0] port_q, port_d;
  logic          drop_q, drop_d;
  logic [7:0]    left;

  // address decode of a destination byte
  always_comb begin
    port_d = '0;
    drop_d = 1'b1;
    if (in_byte < DEST_WMEM) begin
      if (LEVEL == 1) begin
        port_d = PW'(in_byte % CL_PER_GRP);
        drop_d = 1'b0;
      end else if (int'(in_byte) / CL_PER_GRP < NOUT) begin
        port_d = PW'(int'(in_byte) / CL_PER_GRP);
        drop_d = 1'b0;
      end
    end else if (in_byte < DEST_WMEM + 8'd32) begin
      if (LEVEL == 1) begin
        port_d = PW'(NOUT - 1);
        drop_d = 1'b0;
      end else if (int'(in_byte) - int'(DEST_WMEM) < int'(NOUT)) begin
        port_d = PW'(in_byte - DEST_WMEM);
        drop_d = 1'b0;
      end
    end
  end

  logic [PW-1:0] port;
  logic          drop;
  assign port = (state == R_HEAD) ? port_d : port_q;
  assign drop = (state == R_HEAD) ? drop_d : drop_q;

  always_comb begin
    out_valid = '0;
    if (!drop) out_valid[port] = in_valid;
  end
  assign in_ready = drop ? 1'b1 : out_ready[port];
  assign out_byte = in_byte;
  assign idle     = (state == R_HEAD);

  logic take;
  assign take = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= R_HEAD;
      port_q <= '0;
      drop_q <= 1'b0;
      left   <= '0;
    end else if (take) begin
      unique case (state)
        R_HEAD: begin
          port_q <= port_d;
          drop_q <= drop_d;
          state  <= R_LEN;
        end
        R_LEN: begin
          left  <= in_byte;
          state <= (in_byte == 8'd0) ? R_HEAD : R_BODY;
        end
        default: begin
          left <= left - 8'd1;
          if (left == 8'd1) state <= R_HEAD;
        end
      endcase
    end
  end

  a_onehot_out: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(out_valid));

endmodule
