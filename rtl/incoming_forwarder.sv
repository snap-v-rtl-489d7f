// incoming_forwarder -- turns incoming spike packets into weight deliveries.
//
// Spike packets from the L1 router land in an input FIFO. In forwarding mode
// the head packet's 6-bit source cluster ID selects a lookup-table entry
// {valid, base}. The weight row address is base + source neuron ID. The
// forwarder pushes that address into its request queue at the cluster
// group's weight resolver. It stalls while the queue's occupancy shows it
// full, so the queue can never overflow. A packet whose entry is invalid has
// no synapses in this cluster and is dropped. When the resolver marks this
// cluster's lane valid, the row is split into 32 weights of 32 bits, one per
// neuron (neuron j gets bits 32j+31:32j), and all neurons accumulate in that
// cycle. A zero weight means no synapse.
// Storage mode is a write of one table entry by the cluster controller
// (tbl_we). It may happen in any cycle.
// Timing: one packet per cycle, from FIFO head to request queue.
// From the architecture: the two modes and the 6+5-bit index. The
// base-plus-neuron table layout and the drop rule are this design's choices.
module incoming_forwarder
  import snapv_pkg::*;
#(
  parameter int unsigned IN_DEPTH = 8,
  parameter int unsigned QDEPTH   = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // spike packets from the L1 router
  input  logic                          in_push,
  input  spike_pkt_t                    in_pkt,
  output logic                          in_full,
  // lookup table programming (storage mode)
  input  logic                          tbl_we,
  input  logic [CID_W-1:0]              tbl_idx,
  input  logic [15:0]                   tbl_data,
  // request queue at the weight resolver
  output logic                          req_valid,
  output logic [AW-1:0]                 req_addr,
  input  logic [$clog2(QDEPTH+1)-1:0]   req_occ,
  // weight lane from the resolver
  input  logic                          lane_valid,
  input  logic [ROW_BITS-1:0]           lane_row,
  // to the neurons
  output logic [NPC-1:0]                w_valid,
  output weight_t                       w_data [NPC],
  output logic                          idle
);

  logic           tbl_valid [1 << CID_W];
  logic [AW-1:0]  tbl_base  [1 << CID_W];

  spike_pkt_t head;
  logic       empty, pop;
  logic [$clog2(IN_DEPTH+1)-1:0] unused_cnt;

  sync_fifo #(.WIDTH(PKT_W), .DEPTH(IN_DEPTH)) u_in (
    .clk, .rst_n, .push(in_push), .din(in_pkt), .pop, .dout(head),
    .full(in_full), .empty, .count(unused_cnt)
  );

  logic hit, q_full;
  assign hit      = tbl_valid[head.cluster];
  assign q_full   = (req_occ >= ($clog2(QDEPTH+1))'(QDEPTH));
  assign req_valid = !empty && hit && !q_full;
  assign req_addr  = tbl_base[head.cluster] + AW'(head.neuron);
  assign pop       = !empty && (!hit || !q_full);
  assign idle      = empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < (1 << CID_W); i++) begin
        tbl_valid[i] <= 1'b0;
        tbl_base[i]  <= '0;
      end
    end else if (tbl_we) begin
      tbl_valid[tbl_idx] <= tbl_data[15];
      tbl_base[tbl_idx]  <= tbl_data[AW-1:0];
    end
  end

  always_comb begin
    for (int j = 0; j < NPC; j++) begin
      w_valid[j] = lane_valid;
      w_data[j]  = lane_row[j*WBITS +: WBITS];
    end
  end

endmodule
