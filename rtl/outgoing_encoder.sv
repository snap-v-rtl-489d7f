// outgoing_encoder -- serialises a cluster's spikes into 11-bit packets.
//
// Every neuron of the cluster has a one-bit spike line into the encoder.
// Spike pulses are ORed into a pending vector, gated by the forward-enable
// mask that the cluster controller writes. Each cycle the lowest pending bit
// becomes a packet {CLUSTER_ID, neuron}. The packet is pushed into the L1
// router's input FIFO and the bit is cleared. While the FIFO's full flag is
// set, nothing is pushed and the bits stay pending. Each spike therefore
// leaves exactly once, at one packet per cycle.
// idle is high when nothing is pending.
// From the architecture: serialising spike vectors into packets, the
// congestion check and the exactly-once rule. The lowest-index-first order
// and the mask (reset to all ones) are this design's choices.
module outgoing_encoder
  import snapv_pkg::*;
#(
  parameter logic [CID_W-1:0] CLUSTER_ID = '0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NPC-1:0]  spikes,
  input  logic            mask_we,
  input  logic [NPC-1:0]  mask,
  output logic            out_push,
  output spike_pkt_t      out_pkt,
  input  logic            out_full,
  output logic            idle
);

  logic [NPC-1:0]   pending, en_mask;
  logic [NID_W-1:0] sel;
  logic             any;

  always_comb begin
    sel = '0;
    any = 1'b0;
    for (int i = NPC - 1; i >= 0; i--) begin
      if (pending[i]) begin
        sel = NID_W'(i);
        any = 1'b1;
      end
    end
  end

  assign out_push        = any && !out_full;
  assign out_pkt.cluster = CLUSTER_ID;
  assign out_pkt.neuron  = sel;
  assign idle            = !any;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0;
      en_mask <= '1;
    end else begin
      if (mask_we) en_mask <= mask;
      pending <= (pending & ~(out_push ? (NPC'(1) << sel) : '0)) | (spikes & en_mask);
    end
  end

endmodule
