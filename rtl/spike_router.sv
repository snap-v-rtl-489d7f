// spike_router -- buffered router of the spike-packet network, used at both levels.
//
// Every input port has a FIFO. Upstream senders push into it and watch its
// full flag; there is no valid/ready handshake on this network, only FIFO
// status flags. Each cycle a round-robin arbiter picks one non-empty input.
// Its head packet must be deliverable: every output in the port mapping of
// that input must see its downstream FIFO not full. The packet is then pushed
// to all those outputs in that cycle (multicast) and popped. A packet takes
// one cycle per router after it reaches the FIFO head.
// The port mapping is fixed (the architecture's "predefined port mappings").
// Port NPORTS-1 is the special port: the uplink to L2 in a level-1 router,
// the accelerator controller in the level-2 router.
//   LEVEL 1 (4 clusters + uplink): a packet from a cluster goes to all four
//     clusters (its own included, for synapses inside a cluster) and up; a
//     packet from L2 goes to all four clusters.
//   LEVEL 2 (L1 routers + controller): a packet from an L1 router goes to all
//     other L1 routers and the controller; a packet from the controller goes
//     to every L1 router.
// A cluster's incoming forwarder drops packets it has no synapses for.
// idle is high when every input FIFO is empty.
// From the architecture: FIFOs at each port, FIFO flags as flow control,
// multi-cycle pipelined paths and fixed port mappings. The mapping itself and
// the round-robin order are this design's choices.
module spike_router
  import snapv_pkg::*;
#(
  parameter int unsigned NPORTS = 5,
  parameter int unsigned LEVEL  = 1,
  parameter int unsigned DEPTH  = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NPORTS-1:0]  in_push,
  input  spike_pkt_t         in_pkt  [NPORTS],
  output logic [NPORTS-1:0]  in_full,
  output logic [NPORTS-1:0]  out_push,
  output spike_pkt_t         out_pkt [NPORTS],
  input  logic [NPORTS-1:0]  out_full,
  output logic               idle
);

  localparam int unsigned SP = NPORTS - 1;          // special port
  localparam int unsigned PW = $clog2(NPORTS);

  function automatic logic [NPORTS-1:0] port_map(int unsigned src);
    logic [NPORTS-1:0] m;
    m = '1;
    if (src == SP)       m[SP]  = 1'b0;
    else if (LEVEL != 1) m[src] = 1'b0;
    return m;
  endfunction

  logic [NPORTS-1:0] empty, pop;
  spike_pkt_t        head [NPORTS];

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    logic [$clog2(DEPTH+1)-1:0] cnt_unused;
    sync_fifo #(.WIDTH(PKT_W), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n, .push(in_push[i]), .din(in_pkt[i]), .pop(pop[i]),
      .dout(head[i]), .full(in_full[i]), .empty(empty[i]), .count(cnt_unused)
    );
  end

  logic [PW-1:0]     rr;       // highest priority input this cycle
  logic [NPORTS-1:0] eligible;
  logic              found;
  logic [PW-1:0]     sel;

  always_comb begin
    for (int i = 0; i < NPORTS; i++)
      eligible[i] = !empty[i] && ((port_map(i) & out_full) == '0);
    found = 1'b0;
    sel   = '0;
    for (int k = 0; k < NPORTS; k++) begin
      int unsigned idx;
      idx = (int'(rr) + k) % NPORTS;
      if (!found && eligible[idx]) begin
        found = 1'b1;
        sel   = PW'(idx);
      end
    end
    pop = '0;
    if (found) pop[sel] = 1'b1;
    out_push = found ? port_map(int'(sel)) : '0;
    for (int o = 0; o < NPORTS; o++) out_pkt[o] = head[sel];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (found) rr <= (sel == PW'(NPORTS - 1)) ? '0 : sel + 1'b1;
  end

  assign idle = &empty;

  a_push_only_when_room: assert property (@(posedge clk) disable iff (!rst_n)
                                          (out_push & out_full) == '0);

endmodule
