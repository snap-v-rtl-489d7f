// neuron_cluster -- one cluster of 32 LIF neurons with its three helpers.
//
//  * cluster_controller : takes configuration packets from the data/control
//    network and writes neuron parameters, lookup entries and the encoder
//    mask.
//  * incoming_forwarder : takes spike packets from the L1 router, requests
//    weight rows from the group's weight resolver, and hands each returned
//    row to the neuron bank as 32 weights, one per neuron.
//  * outgoing_encoder   : turns the bank's one-bit spike lines into 11-bit
//    packets {CLUSTER_ID, neuron} for the L1 router.
//  * neuron bank        : NPC lif_neuron instances sharing the time_step pulse.
// idle is high when the controller, forwarder and encoder have nothing in
// progress and every neuron has finished its timestep update. The accelerator
// controller uses it to detect the end of a timestep.
module neuron_cluster
  import snapv_pkg::*;
#(
  parameter logic [CID_W-1:0] CLUSTER_ID = '0,
  parameter int unsigned      QDEPTH     = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // data/control path
  input  logic                         cfg_valid,
  output logic                         cfg_ready,
  input  logic [7:0]                   cfg_byte,
  // spike path
  input  logic                         spk_in_push,
  input  spike_pkt_t                   spk_in_pkt,
  output logic                         spk_in_full,
  output logic                         spk_out_push,
  output spike_pkt_t                   spk_out_pkt,
  input  logic                         spk_out_full,
  // weight resolver lane
  output logic                         req_valid,
  output logic [AW-1:0]                req_addr,
  input  logic [$clog2(QDEPTH+1)-1:0]  req_occ,
  input  logic                         lane_valid,
  input  logic [ROW_BITS-1:0]          lane_row,
  // timestep
  input  logic                         time_step,
  output logic [NPC-1:0]               spikes,
  output logic                         idle
);

  logic              ni_valid, ni_first;
  logic [7:0]        ni_byte;
  logic [NID_W-1:0]  ni_sel;
  logic              if_we, oe_we;
  logic [CID_W-1:0]  if_idx;
  logic [15:0]       if_data;
  logic [NPC-1:0]    oe_mask;
  logic              cc_idle, fw_idle, oe_idle;

  cluster_controller u_cc (
    .clk, .rst_n, .in_valid(cfg_valid), .in_ready(cfg_ready), .in_byte(cfg_byte),
    .ni_valid, .ni_first, .ni_byte, .ni_sel, .if_we, .if_idx, .if_data,
    .oe_we, .oe_mask, .idle(cc_idle)
  );

  logic [NPC-1:0] w_valid;
  weight_t        w_data [NPC];

  incoming_forwarder #(.QDEPTH(QDEPTH)) u_if (
    .clk, .rst_n, .in_push(spk_in_push), .in_pkt(spk_in_pkt), .in_full(spk_in_full),
    .tbl_we(if_we), .tbl_idx(if_idx), .tbl_data(if_data),
    .req_valid, .req_addr, .req_occ, .lane_valid, .lane_row,
    .w_valid, .w_data, .idle(fw_idle)
  );

  logic [NPC-1:0] done;

  for (genvar n = 0; n < NPC; n++) begin : g_neuron
    weight_t v_unused;
    lif_neuron u_neuron (
      .clk, .rst_n,
      .cfg_valid(ni_valid && ni_sel == NID_W'(n)), .cfg_first(ni_first), .cfg_byte(ni_byte),
      .w_valid(w_valid[n]), .w_data(w_data[n]),
      .time_step, .spike(spikes[n]), .done(done[n]), .v_mem(v_unused)
    );
  end

  outgoing_encoder #(.CLUSTER_ID(CLUSTER_ID)) u_oe (
    .clk, .rst_n, .spikes, .mask_we(oe_we), .mask(oe_mask),
    .out_push(spk_out_push), .out_pkt(spk_out_pkt), .out_full(spk_out_full), .idle(oe_idle)
  );

  assign idle = cc_idle && fw_idle && oe_idle && (&done) && !time_step && !(|spikes);

endmodule
