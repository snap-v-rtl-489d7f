// snapv_accel_top -- the neuromorphic subsystem of the SoC, seen from the
// host core's custom-instruction port.
//
// It joins the "blackbox" side (accel_controller, rate_encoder and
// spike_decoder) with the cerebra_h accelerator: NUM_GROUPS cluster groups,
// 32*4*NUM_GROUPS LIF neurons, 1024 at the default. The host core, its
// coprocessor interface and the rest of the SoC (second core, TileLink
// buses, memories, peripherals) are not part of this RTL. The command and
// response fields of the coprocessor interface are the ports of this module.
// See accel_controller for the command set and the timestep sequence.
module snapv_accel_top
  import snapv_pkg::*;
#(
  parameter int unsigned NUM_GROUPS = 8,
  parameter int unsigned ROWS       = MEM_ROWS,
  parameter int unsigned NCH        = 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         cmd_valid,
  output logic         cmd_ready,
  input  logic [6:0]   cmd_funct,
  input  logic [63:0]  cmd_rs1,
  input  logic [63:0]  cmd_rs2,
  input  logic [4:0]   cmd_rd,
  output logic         resp_valid,
  input  logic         resp_ready,
  output logic [4:0]   resp_rd,
  output logic [63:0]  resp_data,
  output logic         busy
);
  localparam int unsigned NNEUR = NUM_GROUPS * CL_PER_GRP * NPC;
  localparam int unsigned IW    = $clog2(NNEUR);

  logic       init_mode, time_step, cfg_valid, cfg_ready, acc_idle;
  logic [7:0] cfg_byte;
  logic       spk_in_push, spk_in_full, spk_out_push;
  spike_pkt_t spk_in_pkt, spk_out_pkt;

  logic                 enc_wr_en, enc_start, enc_valid, enc_ready, enc_busy;
  logic [$clog2(NCH)-1:0] enc_wr_ch;
  logic [7:0]           enc_wr_val;
  logic [$clog2(NCH):0] enc_nch;
  spike_pkt_t           enc_pkt;

  logic [IW-1:0] dec_rd_id, dec_win_lo, dec_win_hi, dec_argmax;
  logic [15:0]   dec_rd_count, dec_maxcount;
  logic          dec_clear, dec_clearing;

  accel_controller #(.NCH(NCH), .NNEUR(NNEUR)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_funct, .cmd_rs1, .cmd_rs2, .cmd_rd,
    .resp_valid, .resp_ready, .resp_rd, .resp_data, .busy,
    .init_mode, .time_step, .cfg_valid, .cfg_ready, .cfg_byte,
    .spk_in_push, .spk_in_pkt, .spk_in_full, .spk_out_push, .spk_out_pkt, .acc_idle,
    .enc_wr_en, .enc_wr_ch, .enc_wr_val, .enc_start, .enc_nch,
    .enc_valid, .enc_ready, .enc_pkt, .enc_busy,
    .dec_rd_id, .dec_rd_count, .dec_win_lo, .dec_win_hi, .dec_clear, .dec_clearing,
    .dec_argmax, .dec_maxcount
  );

  rate_encoder #(.NCH(NCH)) u_enc (
    .clk, .rst_n, .wr_en(enc_wr_en), .wr_ch(enc_wr_ch), .wr_val(enc_wr_val),
    .start(enc_start), .nch(enc_nch), .out_valid(enc_valid), .out_ready(enc_ready),
    .out_pkt(enc_pkt), .busy(enc_busy)
  );

  spike_decoder #(.NNEUR(NNEUR), .CW(16)) u_dec (
    .clk, .rst_n, .in_valid(spk_out_push), .in_pkt(spk_out_pkt),
    .rd_id(dec_rd_id), .rd_count(dec_rd_count), .win_lo(dec_win_lo), .win_hi(dec_win_hi),
    .clear(dec_clear), .clearing(dec_clearing), .argmax(dec_argmax), .maxcount(dec_maxcount)
  );

  cerebra_h #(.NUM_GROUPS(NUM_GROUPS), .ROWS(ROWS)) u_cerebra (
    .clk, .rst_n, .init_mode, .time_step, .cfg_valid, .cfg_ready, .cfg_byte,
    .spk_in_push, .spk_in_pkt, .spk_in_full, .spk_out_push, .spk_out_pkt, .idle(acc_idle)
  );

endmodule
