// cerebra_h -- the clustered neuromorphic accelerator.
//
// NUM_GROUPS cluster groups of four 32-neuron clusters each; the default is
// 8 groups = 32 clusters = 1024 neurons. One level-2 spike_router joins the
// groups' L1 routers (ports 0..NUM_GROUPS-1) with the accelerator controller
// (port NUM_GROUPS). A level-2 data_router fans the controller's
// configuration stream out to the groups.
// External interface:
//  * cfg_*     : 8-bit valid/ready configuration stream (dest, length, body).
//  * spk_in_*  : spike injection into the L2 router's controller port
//                (push when spk_in_full is low).
//  * spk_out_* : every spike packet that reaches the controller port. No
//                backpressure: the receiver must take one packet per cycle.
//  * time_step : one-cycle pulse that updates every neuron.
//  * init_mode : high while weights are loaded (weight reads disabled).
//  * idle      : all FIFOs empty, no weight read in flight, no spike waiting
//                in an encoder, all neurons done. Used for timestep completion.
module cerebra_h
  import snapv_pkg::*;
#(
  parameter int unsigned NUM_GROUPS = 8,
  parameter int unsigned ROWS       = MEM_ROWS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init_mode,
  input  logic        time_step,
  input  logic        cfg_valid,
  output logic        cfg_ready,
  input  logic [7:0]  cfg_byte,
  input  logic        spk_in_push,
  input  spike_pkt_t  spk_in_pkt,
  output logic        spk_in_full,
  output logic        spk_out_push,
  output spike_pkt_t  spk_out_pkt,
  output logic        idle
);
  localparam int unsigned NP = NUM_GROUPS + 1;

  logic [NP-1:0] in_push, in_full, out_push, out_full;
  spike_pkt_t    in_pkt [NP], out_pkt [NP];
  logic          r_idle, d_idle;

  spike_router #(.NPORTS(NP), .LEVEL(2)) u_l2 (
    .clk, .rst_n, .in_push, .in_pkt, .in_full, .out_push, .out_pkt, .out_full, .idle(r_idle)
  );

  assign in_push[NUM_GROUPS]  = spk_in_push;
  assign in_pkt[NUM_GROUPS]   = spk_in_pkt;
  assign spk_in_full          = in_full[NUM_GROUPS];
  assign spk_out_push         = out_push[NUM_GROUPS];
  assign spk_out_pkt          = out_pkt[NUM_GROUPS];
  assign out_full[NUM_GROUPS] = 1'b0;

  logic [NUM_GROUPS-1:0] d_valid, d_ready, g_idle;
  logic [7:0]            d_byte;

  data_router #(.NOUT(NUM_GROUPS), .LEVEL(2)) u_d2 (
    .clk, .rst_n, .in_valid(cfg_valid), .in_ready(cfg_ready), .in_byte(cfg_byte),
    .out_valid(d_valid), .out_ready(d_ready), .out_byte(d_byte), .idle(d_idle)
  );

  for (genvar g = 0; g < NUM_GROUPS; g++) begin : g_grp
    cluster_group #(.GROUP_ID(g), .ROWS(ROWS)) u_group (
      .clk, .rst_n, .init_mode, .time_step,
      .cfg_valid(d_valid[g]), .cfg_ready(d_ready[g]), .cfg_byte(d_byte),
      .up_in_push(out_push[g]), .up_in_pkt(out_pkt[g]), .up_in_full(out_full[g]),
      .up_out_push(in_push[g]), .up_out_pkt(in_pkt[g]), .up_out_full(in_full[g]),
      .idle(g_idle[g])
    );
  end

  assign idle = r_idle && d_idle && (&g_idle);

endmodule
