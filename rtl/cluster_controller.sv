// cluster_controller -- configuration sequencer of one neuron cluster.
//
// The controller receives data/control packets from the L1 data router as a
// byte stream with a valid/ready handshake. Packet layout:
//   dest, length, opcode, row, count, data[0..count-1]
// dest and length are the router header; length counts the bytes after it.
// Data flits go into a buffer. Only when all count flits are in does the
// controller act on them, so a cut-off transfer never leaves a half-written
// register.
//   OPCODE_LOAD_NI : stream the flits, one per cycle, to neuron 'row'. The
//                    first flit is marked cfg_first. in_ready is low meanwhile.
//   OPCODE_LOAD_IF : write lookup entry 'row' of the incoming forwarder with
//                    {data[1], data[0]} (bit 15 valid, bits 10:0 base row).
//   OPCODE_LOAD_OE : write the outgoing encoder's 32-bit forward-enable mask
//                    {data[3], data[2], data[1], data[0]}.
// Packets with another opcode are consumed and ignored.
// The architecture gives the three opcode names and the field list (row
// indices, flit counts, data flits). The byte values, field order and buffer
// size are this design's choices.
module cluster_controller
  import snapv_pkg::*;
#(
  parameter int unsigned MAX_FLITS = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [7:0]        in_byte,
  // to the neuron bank
  output logic              ni_valid,
  output logic              ni_first,
  output logic [7:0]        ni_byte,
  output logic [NID_W-1:0]  ni_sel,
  // to the incoming forwarder
  output logic              if_we,
  output logic [CID_W-1:0]  if_idx,
  output logic [15:0]       if_data,
  // to the outgoing encoder
  output logic              oe_we,
  output logic [NPC-1:0]    oe_mask,
  output logic              idle
);

  typedef enum logic [2:0] {S_DEST, S_LEN, S_OP, S_ROW, S_CNT, S_DATA, S_COMMIT, S_SKIP} state_e;
  state_e state;

  localparam int unsigned FW = $clog2(MAX_FLITS + 1);

  logic [7:0] remaining;   // bytes of the packet still to come after 'length'
  logic [7:0] opcode, row, count, got;
  logic [7:0] buf_q [MAX_FLITS];
  logic [FW-1:0] sent;

  logic take;
  assign in_ready = (state != S_COMMIT);
  assign take     = in_valid && in_ready;
  assign idle     = (state == S_DEST);

  // commit outputs
  assign ni_valid = (state == S_COMMIT) && (opcode == OPCODE_LOAD_NI) && (FW'(sent) < FW'(count));
  assign ni_first = (sent == '0);
  assign ni_byte  = buf_q[sent[$clog2(MAX_FLITS)-1:0]];
  assign ni_sel   = row[NID_W-1:0];
  assign if_we    = (state == S_COMMIT) && (opcode == OPCODE_LOAD_IF);
  assign if_idx   = row[CID_W-1:0];
  assign if_data  = {buf_q[1], buf_q[0]};
  assign oe_we    = (state == S_COMMIT) && (opcode == OPCODE_LOAD_OE);
  assign oe_mask  = {buf_q[3], buf_q[2], buf_q[1], buf_q[0]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_DEST;
      remaining <= '0;
      opcode    <= '0;
      row       <= '0;
      count     <= '0;
      got       <= '0;
      sent      <= '0;
      for (int i = 0; i < MAX_FLITS; i++) buf_q[i] <= '0;
    end else begin
      if (take && state != S_DEST && state != S_LEN) remaining <= remaining - 8'd1;
      unique case (state)
        S_DEST: if (take) state <= S_LEN;
        S_LEN:  if (take) begin
                  remaining <= in_byte;
                  state     <= (in_byte == 8'd0) ? S_DEST : S_OP;
                end
        S_OP:   if (take) begin
                  opcode <= in_byte;
                  state  <= (remaining == 8'd1) ? S_DEST : S_ROW;
                end
        S_ROW:  if (take) begin
                  row   <= in_byte;
                  state <= (remaining == 8'd1) ? S_DEST : S_CNT;
                end
        S_CNT:  if (take) begin
                  count <= (in_byte > 8'(MAX_FLITS)) ? 8'(MAX_FLITS) : in_byte;
                  got   <= '0;
                  for (int i = 0; i < MAX_FLITS; i++) buf_q[i] <= '0;
                  if (in_byte == 8'd0)
                    state <= (remaining == 8'd1) ? S_COMMIT : S_SKIP;
                  else
                    state <= (remaining == 8'd1) ? S_DEST : S_DATA;
                end
        S_DATA: if (take) begin
                  if (got < 8'(MAX_FLITS)) buf_q[got[$clog2(MAX_FLITS)-1:0]] <= in_byte;
                  got <= got + 8'd1;
                  if (got + 8'd1 == count)
                    state <= (remaining == 8'd1) ? S_COMMIT : S_SKIP;
                  else if (remaining == 8'd1)
                    state <= S_DEST;    // packet ended early: drop it
                end
        S_SKIP: if (take && remaining == 8'd1) state <= S_COMMIT;
        S_COMMIT: begin
          sent <= sent + 1'b1;
          if (opcode != OPCODE_LOAD_NI || FW'(sent) + 1'b1 >= FW'(count)) begin
            state <= S_DEST;
            sent  <= '0;
          end
        end
        default: state <= S_DEST;
      endcase
    end
  end

endmodule
