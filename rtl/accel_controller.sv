// accel_controller -- bridge between the host core's custom instructions and
// the accelerator.
//
// The host core issues commands over a RoCC-style interface: cmd_* carries
// funct, rs1, rs2 and rd; resp_* returns rd and 64 bits of data. Function
// codes are in snapv_pkg::acc_funct_e. The controller keeps the two networks
// apart with independent queues:
//  * configuration bytes (8-bit) -> cfg FIFO -> data/control network, drained
//    whenever the network is ready;
//  * input spikes (11-bit) -> spike FIFO -> spike network port of the L2
//    router. The rate encoder's packets merge in behind the FIFO.
// Every spike that reaches the controller port goes to the spike decoder and
// to an output FIFO the host pops. If that FIFO is full the packet is dropped
// and counted.
// Timestep sequencing (F_STEP), which makes the timestep length dynamic:
//   ENC   : if enabled, the rate encoder scans its channels (injected spikes)
//   DRAIN : wait for empty queues and an idle accelerator for 2 cycles
//   TS    : one-cycle time_step pulse; every neuron updates in the next cycle
//   SETTLE: wait until all neurons are done and the spikes they produced have
//           been delivered and accumulated (idle for 2 cycles)
//   then respond with the new step count.
// No spikes are injected in TS and SETTLE, so no weight reaches a neuron in
// its update cycle. cmd_ready is low while a step runs or a response waits.
// From the architecture: instruction decoding, separate queues for 8-bit
// configuration and 11-bit spike packets, and a step that advances only when
// all neurons and the interconnect are done. The command set is this design's
// own.
module accel_controller
  import snapv_pkg::*;
#(
  parameter int unsigned CFG_DEPTH = 16,
  parameter int unsigned SPK_DEPTH = 16,
  parameter int unsigned OUT_DEPTH = 16,
  parameter int unsigned NCH       = 1024,
  parameter int unsigned NNEUR     = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // RoCC-style command/response
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  logic [6:0]               cmd_funct,
  input  logic [63:0]              cmd_rs1,
  input  logic [63:0]              cmd_rs2,
  input  logic [4:0]               cmd_rd,
  output logic                     resp_valid,
  input  logic                     resp_ready,
  output logic [4:0]               resp_rd,
  output logic [63:0]              resp_data,
  output logic                     busy,
  // accelerator
  output logic                     init_mode,
  output logic                     time_step,
  output logic                     cfg_valid,
  input  logic                     cfg_ready,
  output logic [7:0]               cfg_byte,
  output logic                     spk_in_push,
  output spike_pkt_t               spk_in_pkt,
  input  logic                     spk_in_full,
  input  logic                     spk_out_push,
  input  spike_pkt_t               spk_out_pkt,
  input  logic                     acc_idle,
  // rate encoder
  output logic                     enc_wr_en,
  output logic [$clog2(NCH)-1:0]   enc_wr_ch,
  output logic [7:0]               enc_wr_val,
  output logic                     enc_start,
  output logic [$clog2(NCH):0]     enc_nch,
  input  logic                     enc_valid,
  output logic                     enc_ready,
  input  spike_pkt_t               enc_pkt,
  input  logic                     enc_busy,
  // spike decoder
  output logic [$clog2(NNEUR)-1:0] dec_rd_id,
  input  logic [15:0]              dec_rd_count,
  output logic [$clog2(NNEUR)-1:0] dec_win_lo,
  output logic [$clog2(NNEUR)-1:0] dec_win_hi,
  output logic                     dec_clear,
  input  logic                     dec_clearing,
  input  logic [$clog2(NNEUR)-1:0] dec_argmax,
  input  logic [15:0]              dec_maxcount
);
  localparam int unsigned IW = $clog2(NNEUR);

  typedef enum logic [2:0] {C_IDLE, C_ENC, C_DRAIN, C_TS, C_SETTLE} cstate_e;
  cstate_e state;

  // ---------------------------------------------------------- queues
  logic       cfg_full, cfg_empty, spk_full, spk_empty, out_full, out_empty;
  logic [7:0] cfg_head;
  spike_pkt_t spk_head, out_head;
  logic       cfg_push, spk_push, out_pop, spk_pop;
  logic [$clog2(CFG_DEPTH+1)-1:0] cfg_cnt;
  logic [$clog2(SPK_DEPTH+1)-1:0] spk_cnt;
  logic [$clog2(OUT_DEPTH+1)-1:0] out_cnt;

  logic take;
  acc_funct_e funct;
  assign funct = acc_funct_e'(cmd_funct);
  assign take  = cmd_valid && cmd_ready;

  assign cfg_push = take && funct == F_CFG_BYTE;
  assign spk_push = take && funct == F_SPIKE_IN;
  assign out_pop  = take && funct == F_OUT_POP && !out_empty;

  sync_fifo #(.WIDTH(8), .DEPTH(CFG_DEPTH)) u_cfgq (
    .clk, .rst_n, .push(cfg_push), .din(cmd_rs1[7:0]), .pop(cfg_valid && cfg_ready),
    .dout(cfg_head), .full(cfg_full), .empty(cfg_empty), .count(cfg_cnt));
  sync_fifo #(.WIDTH(PKT_W), .DEPTH(SPK_DEPTH)) u_spkq (
    .clk, .rst_n, .push(spk_push), .din(cmd_rs1[PKT_W-1:0]), .pop(spk_pop),
    .dout(spk_head), .full(spk_full), .empty(spk_empty), .count(spk_cnt));
  sync_fifo #(.WIDTH(PKT_W), .DEPTH(OUT_DEPTH)) u_outq (
    .clk, .rst_n, .push(spk_out_push && !out_full), .din(spk_out_pkt), .pop(out_pop),
    .dout(out_head), .full(out_full), .empty(out_empty), .count(out_cnt));

  assign cfg_valid = !cfg_empty;
  assign cfg_byte  = cfg_head;

  // ---------------------------------------------------------- injection
  logic inj_ok;
  assign inj_ok      = (state == C_IDLE || state == C_ENC || state == C_DRAIN) && !spk_in_full;
  assign spk_pop     = inj_ok && !spk_empty;
  assign enc_ready   = inj_ok && spk_empty;
  assign spk_in_push = spk_pop || (enc_ready && enc_valid);
  assign spk_in_pkt  = spk_pop ? spk_head : enc_pkt;

  // ---------------------------------------------------------- command decode
  logic          enc_en;
  logic [31:0]   step_cnt, drop_cnt;
  logic [1:0]    idle_run;
  logic          quiet;

  assign quiet = acc_idle && cfg_empty && spk_empty && !enc_busy;

  assign cmd_ready = (state == C_IDLE) && !resp_valid
                     && !(funct == F_CFG_BYTE && cfg_full)
                     && !(funct == F_SPIKE_IN && spk_full);
  assign busy = (state != C_IDLE) || resp_valid;

  assign enc_wr_en  = take && funct == F_ENC_WRITE;
  assign enc_wr_ch  = cmd_rs1[$clog2(NCH)-1:0];
  assign enc_wr_val = cmd_rs2[7:0];
  assign dec_rd_id  = cmd_rs1[IW-1:0];
  assign dec_clear  = take && funct == F_DEC_CLEAR;
  assign enc_start  = (state == C_IDLE) && take && funct == F_STEP && enc_en;
  assign time_step  = (state == C_TS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      init_mode  <= 1'b1;
      enc_en     <= 1'b0;
      enc_nch    <= '0;
      dec_win_lo <= '0;
      dec_win_hi <= '1;
      step_cnt   <= '0;
      drop_cnt   <= '0;
      idle_run   <= '0;
      resp_valid <= 1'b0;
      resp_rd    <= '0;
      resp_data  <= '0;
    end else begin
      if (spk_out_push && out_full) drop_cnt <= drop_cnt + 1'b1;
      if (resp_valid && resp_ready) resp_valid <= 1'b0;
      idle_run <= quiet ? ((idle_run == 2'd3) ? 2'd3 : idle_run + 2'd1) : 2'd0;

      unique case (state)
        C_IDLE: if (take) begin
          unique case (funct)
            F_STEP:       begin
                            state    <= enc_en ? C_ENC : C_DRAIN;
                            idle_run <= '0;
                            resp_rd  <= cmd_rd;
                          end
            F_OUT_POP:    begin
                            resp_valid <= 1'b1;
                            resp_rd    <= cmd_rd;
                            resp_data  <= {52'd0, !out_empty, out_head};
                          end
            F_SET_MODE:   init_mode <= !cmd_rs1[0];
            F_STATUS:     begin
                            resp_valid <= 1'b1;
                            resp_rd    <= cmd_rd;
                            resp_data  <= {8'd0, drop_cnt, 8'd0, 2'd0, dec_clearing, enc_busy,
                                           out_empty, acc_idle, init_mode, enc_en,
                                           8'(out_cnt)};
                          end
            F_ENC_CTRL:   begin
                            enc_en  <= cmd_rs1[0];
                            enc_nch <= cmd_rs2[$clog2(NCH):0];
                          end
            F_DEC_READ:   begin
                            resp_valid <= 1'b1;
                            resp_rd    <= cmd_rd;
                            resp_data  <= {48'd0, dec_rd_count};
                          end
            F_DEC_ARGMAX: begin
                            resp_valid <= 1'b1;
                            resp_rd    <= cmd_rd;
                            resp_data  <= {32'd0, dec_maxcount, 16'(dec_argmax)};
                          end
            F_DEC_WINDOW: begin
                            dec_win_lo <= cmd_rs1[IW-1:0];
                            dec_win_hi <= cmd_rs2[IW-1:0];
                          end
            default: ;
          endcase
        end
        C_ENC:    if (!enc_busy && !enc_start) state <= C_DRAIN;
        C_DRAIN:  if (idle_run >= 2'd2) state <= C_TS;
        C_TS:     begin
                    state    <= C_SETTLE;
                    idle_run <= '0;
                  end
        C_SETTLE: if (idle_run >= 2'd2 && !time_step) begin
                    state      <= C_IDLE;
                    step_cnt   <= step_cnt + 1'b1;
                    resp_valid <= 1'b1;
                    resp_data  <= {32'd0, step_cnt + 1'b1};
                  end
        default:  state <= C_IDLE;
      endcase
    end
  end

  a_ts_only_when_quiet: assert property (@(posedge clk) disable iff (!rst_n)
                                         time_step |-> $past(acc_idle));
  a_no_inject_in_step: assert property (@(posedge clk) disable iff (!rst_n)
                                        (state == C_TS || state == C_SETTLE) |-> !spk_in_push);

endmodule
