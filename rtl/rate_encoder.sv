// rate_encoder -- hardware rate (Poisson-like) coding of input intensities.
//
// The host writes an 8-bit intensity per input channel (wr_*). A start pulse
// makes one timestep's worth of spikes: the encoder walks channels 0..nch-1,
// one per cycle. Channel c fires when its intensity is strictly greater than
// the low byte of a 16-bit Galois LFSR (taps x^16+x^14+x^13+x^11+1), so it
// fires with probability value/256 per timestep. The LFSR steps once per
// channel. A firing channel is sent as a spike packet from source cluster
// 32 + c/32, neuron c%32. Cluster IDs from 32 up name input channels, not
// hardware clusters, and the incoming forwarders map them like any other
// source. The packet waits on out_valid/out_ready before the scan moves on.
// busy is high from start until the last channel has been handled.
// From the architecture: on-chip rate coding of sensor data into spike
// packets. The LFSR, the comparison and the channel-to-ID mapping are this
// design's choices.
module rate_encoder
  import snapv_pkg::*;
#(
  parameter int unsigned NCH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [$clog2(NCH)-1:0]   wr_ch,
  input  logic [7:0]               wr_val,
  input  logic                     start,
  input  logic [$clog2(NCH):0]     nch,
  output logic                     out_valid,
  input  logic                     out_ready,
  output spike_pkt_t               out_pkt,
  output logic                     busy
);
  localparam int unsigned CW = $clog2(NCH);

  logic [7:0]   value [NCH];
  logic [CW:0]  ch;
  logic [CW:0]  last;
  logic [15:0]  lfsr;
  logic         fire, advance;

  always_ff @(posedge clk) begin
    if (wr_en) value[wr_ch] <= wr_val;
  end

  assign fire      = busy && (value[ch[CW-1:0]] > lfsr[7:0]);
  assign out_valid = fire;
  assign advance   = busy && (!fire || out_ready);
  assign out_pkt.cluster = CID_W'(32 + (int'(ch) / NPC));
  assign out_pkt.neuron  = NID_W'(ch % NPC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      ch   <= '0;
      last <= '0;
      lfsr <= 16'hACE1;
    end else begin
      if (start && !busy && nch != '0) begin
        busy <= 1'b1;
        ch   <= '0;
        last <= nch - 1'b1;
      end else if (advance) begin
        lfsr <= {1'b0, lfsr[15:1]} ^ (lfsr[0] ? 16'hB400 : 16'h0000);
        if (ch == last) busy <= 1'b0;
        else            ch   <= ch + 1'b1;
      end
    end
  end

endmodule
