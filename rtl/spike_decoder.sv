// spike_decoder -- rate decoding of output spikes.
//
// Every spike packet from a hardware neuron (source cluster ID below 32)
// adds one to that neuron's counter (global ID = cluster*32 + neuron). The
// counters saturate. Packets from input channels (cluster ID 32 and up) are
// ignored. The decoder also keeps the neuron with the highest count inside
// the window win_lo..win_hi, typically the output layer. argmax is then the
// classification: the class whose neuron spiked most over the inference
// window. On a tie the neuron that reached the count first is kept.
// The counters are a RAM with one read-modify-write per cycle: at most one
// packet arrives per cycle. rd_id/rd_count is an asynchronous read port for
// the host. clear starts a sweep of NNEUR cycles that zeroes the counters
// and the maximum (clearing is high meanwhile); packets are ignored during
// the sweep.
// From the architecture: decoding spikes back into numbers and classifying by
// integrating output spikes. The counter width, window and tie rule are this
// design's choices.
module spike_decoder
  import snapv_pkg::*;
#(
  parameter int unsigned NNEUR = 1024,
  parameter int unsigned CW    = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  spike_pkt_t                in_pkt,
  input  logic [$clog2(NNEUR)-1:0]  rd_id,
  output logic [CW-1:0]             rd_count,
  input  logic [$clog2(NNEUR)-1:0]  win_lo,
  input  logic [$clog2(NNEUR)-1:0]  win_hi,
  input  logic                      clear,
  output logic                      clearing,
  output logic [$clog2(NNEUR)-1:0]  argmax,
  output logic [CW-1:0]             maxcount
);
  localparam int unsigned IW = $clog2(NNEUR);

  logic [CW-1:0] cnt [NNEUR];
  logic [IW-1:0] clr_idx;
  logic [IW-1:0] id;
  logic          hit;
  logic [CW-1:0] cur, nxt;

  assign id  = IW'({in_pkt.cluster[CID_W-2:0], in_pkt.neuron});
  assign hit = in_valid && !in_pkt.cluster[CID_W-1] && !clearing
               && (int'({in_pkt.cluster[CID_W-2:0], in_pkt.neuron}) < NNEUR);
  assign cur = cnt[id];
  assign nxt = (cur == '1) ? cur : cur + 1'b1;
  assign rd_count = cnt[rd_id];

  always_ff @(posedge clk) begin
    if (clearing)  cnt[clr_idx] <= '0;
    else if (hit)  cnt[id]      <= nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing <= 1'b1;
      clr_idx  <= '0;
      argmax   <= '0;
      maxcount <= '0;
    end else if (clearing) begin
      clr_idx <= clr_idx + 1'b1;
      if (clr_idx == IW'(NNEUR - 1)) clearing <= 1'b0;
    end else if (clear) begin
      clearing <= 1'b1;
      clr_idx  <= '0;
      argmax   <= '0;
      maxcount <= '0;
    end else if (hit && id >= win_lo && id <= win_hi && nxt > maxcount) begin
      maxcount <= nxt;
      argmax   <= id;
    end
  end

endmodule
