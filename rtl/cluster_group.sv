// cluster_group -- four neuron clusters around one L1 router pair and one
// shared weight memory.
//
// The four clusters (global IDs 4*GROUP_ID .. 4*GROUP_ID+3) share:
//  * a level-1 spike_router: ports 0..3 are the clusters, port 4 the uplink
//    to the level-2 router;
//  * a level-1 data_router: ports 0..3 are the cluster controllers, port 4
//    the weight resolver's initialisation input;
//  * a weight_resolver: lane i serves cluster i.
// A network that fits in one group never needs the level-2 router for its
// own spikes; the L1 router delivers them locally. Every spike still goes up
// as well, because the controller collects all spikes as outputs.
// idle is high when all of this is quiet (used for timestep completion).
module cluster_group
  import snapv_pkg::*;
#(
  parameter int unsigned GROUP_ID = 0,
  parameter int unsigned ROWS     = MEM_ROWS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init_mode,
  input  logic        time_step,
  // data/control from L2
  input  logic        cfg_valid,
  output logic        cfg_ready,
  input  logic [7:0]  cfg_byte,
  // spike uplink
  input  logic        up_in_push,
  input  spike_pkt_t  up_in_pkt,
  output logic        up_in_full,
  output logic        up_out_push,
  output spike_pkt_t  up_out_pkt,
  input  logic        up_out_full,
  output logic        idle
);
  localparam int unsigned NP     = CL_PER_GRP + 1;
  localparam int unsigned QDEPTH = 8;
  localparam int unsigned QW     = $clog2(QDEPTH + 1);

  // ---------------- spike network
  logic [NP-1:0] r_in_push, r_in_full, r_out_push, r_out_full;
  spike_pkt_t    r_in_pkt [NP], r_out_pkt [NP];
  logic          r_idle;

  spike_router #(.NPORTS(NP), .LEVEL(1)) u_l1 (
    .clk, .rst_n, .in_push(r_in_push), .in_pkt(r_in_pkt), .in_full(r_in_full),
    .out_push(r_out_push), .out_pkt(r_out_pkt), .out_full(r_out_full), .idle(r_idle)
  );

  assign r_in_push[CL_PER_GRP]  = up_in_push;
  assign r_in_pkt[CL_PER_GRP]   = up_in_pkt;
  assign up_in_full             = r_in_full[CL_PER_GRP];
  assign up_out_push            = r_out_push[CL_PER_GRP];
  assign up_out_pkt             = r_out_pkt[CL_PER_GRP];
  assign r_out_full[CL_PER_GRP] = up_out_full;

  // ---------------- data/control network
  logic [NP-1:0] d_valid, d_ready;
  logic [7:0]    d_byte;
  logic          d_idle;

  data_router #(.NOUT(NP), .LEVEL(1)) u_d1 (
    .clk, .rst_n, .in_valid(cfg_valid), .in_ready(cfg_ready), .in_byte(cfg_byte),
    .out_valid(d_valid), .out_ready(d_ready), .out_byte(d_byte), .idle(d_idle)
  );

  // ---------------- weight resolver
  logic [CL_PER_GRP-1:0] req_valid, lane_valid;
  logic [$clog2(ROWS)-1:0] req_addr [CL_PER_GRP];
  logic [QW-1:0]         req_occ  [CL_PER_GRP];
  logic [ROW_BITS-1:0]   lane_row [CL_PER_GRP];
  logic                  wr_done;

  weight_resolver #(.ROWS(ROWS), .QDEPTH(QDEPTH)) u_wr (
    .clk, .rst_n, .init_mode, .req_valid, .req_addr, .req_occ,
    .lane_valid, .lane_row, .done(wr_done),
    .in_valid(d_valid[CL_PER_GRP]), .in_ready(d_ready[CL_PER_GRP]), .in_byte(d_byte)
  );

  // ---------------- clusters
  logic [CL_PER_GRP-1:0] cl_idle;

  for (genvar c = 0; c < CL_PER_GRP; c++) begin : g_cl
    logic [AW-1:0]  addr_full;
    logic [NPC-1:0] spikes_unused;
    neuron_cluster #(.CLUSTER_ID(CID_W'(GROUP_ID * CL_PER_GRP + c)), .QDEPTH(QDEPTH)) u_cluster (
      .clk, .rst_n,
      .cfg_valid(d_valid[c]), .cfg_ready(d_ready[c]), .cfg_byte(d_byte),
      .spk_in_push(r_out_push[c]), .spk_in_pkt(r_out_pkt[c]), .spk_in_full(r_out_full[c]),
      .spk_out_push(r_in_push[c]), .spk_out_pkt(r_in_pkt[c]), .spk_out_full(r_in_full[c]),
      .req_valid(req_valid[c]), .req_addr(addr_full), .req_occ(req_occ[c]),
      .lane_valid(lane_valid[c]), .lane_row(lane_row[c]),
      .time_step, .spikes(spikes_unused), .idle(cl_idle[c])
    );
    assign req_addr[c] = addr_full[$clog2(ROWS)-1:0];
  end

  assign idle = r_idle && d_idle && wr_done && (&cl_idle);

endmodule
