// lif_neuron -- configurable leaky integrate-and-fire neuron.
//
// The neuron has four parts: control logic with a network interface, an
// accumulator, a potential decay unit and a potential adder unit.
//  * The control logic is a small FSM. It takes an 8-bit configuration stream
//    from the cluster controller and sequences the timestep update.
//  * The accumulator adds every 32-bit weight it receives (w_valid) into acc.
//  * The decay unit is combinational. It scales the stored potential by
//    0.125, 0.25, 0.5 or 0.75 with arithmetic right shifts only, so there is
//    no multiplier.
//  * The adder unit forms v_new = decay(v) + acc and compares it with the
//    threshold. On a spike it applies the reset mode: hold (keep v_new), zero,
//    or subtract the threshold.
//
// Configuration record: 5 bytes, the first marked with cfg_first.
//   byte 0 = {4'b0, reset_mode[1:0], decay_sel[1:0]}, bytes 1..4 = threshold,
//   little-endian. The last byte loads the parameters and clears v and acc.
// Timing: time_step is a one-cycle pulse that lowers done. In the next cycle
// (the update cycle, done low) v and acc are updated, spike pulses for one cycle if the
// neuron fired, and done rises again. Weights must not arrive in the update
// cycle. The accelerator controller guarantees this by pulsing time_step only
// when the network is quiet.
// From the architecture: the four units, the shift-based decay rates, the
// three reset modes and the 32-bit weights. Own choices: the byte layout, the
// fire test (v_new > threshold), the timing above, and saturating adds.
module lif_neuron
  import snapv_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // network interface (configuration bytes)
  input  logic        cfg_valid,
  input  logic        cfg_first,
  input  logic [7:0]  cfg_byte,
  // synaptic input
  input  logic        w_valid,
  input  weight_t     w_data,
  // timestep boundary
  input  logic        time_step,
  output logic        spike,
  output logic        done,
  output weight_t     v_mem
);

  // The update cycle is simply the cycle in which done is low, so the
  // neuron needs no separate state register.

  decay_sel_e  decay_sel;
  reset_mode_e reset_mode;
  weight_t     threshold;
  weight_t     v, acc;

  logic [2:0]  cfg_idx;
  logic [23:0] thr_lo;  // threshold bytes 1..3 while the record arrives
  logic [3:0]  mode_b;

  // ---------------------------------------------- potential decay unit
  weight_t v_decayed;
  always_comb begin
    unique case (decay_sel)
      DECAY_0_125: v_decayed = v >>> 3;
      DECAY_0_25:  v_decayed = v >>> 2;
      DECAY_0_5:   v_decayed = v >>> 1;
      default:     v_decayed = (v >>> 1) + (v >>> 2);
    endcase
  end

  // ---------------------------------------------- potential adder unit
  weight_t v_sum, v_next;
  logic    fire;
  always_comb begin
    v_sum = sat_add(v_decayed, acc);
    fire  = (v_sum > threshold);
    v_next = v_sum;
    if (fire) begin
      unique case (reset_mode)
        RESET_ZERO:     v_next = '0;
        RESET_SUBTRACT: v_next = sat_sub(v_sum, threshold);
        default:        v_next = v_sum;
      endcase
    end
  end

  assign v_mem = v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      decay_sel  <= DECAY_0_5;
      reset_mode <= RESET_ZERO;
      threshold  <= {1'b0, {(WBITS-1){1'b1}}};
      v          <= '0;
      acc        <= '0;
      spike      <= 1'b0;
      done       <= 1'b1;
      cfg_idx    <= '0;
      thr_lo     <= '0;
      mode_b     <= '0;
    end else begin
      spike <= 1'b0;
      // ---- control logic: configuration record
      if (cfg_valid) begin
        if (cfg_first) begin
          mode_b  <= cfg_byte[3:0];
          cfg_idx <= 3'd1;
        end else if (cfg_idx != 3'd0) begin
          unique case (cfg_idx)
            3'd1: thr_lo[7:0]   <= cfg_byte;
            3'd2: thr_lo[15:8]  <= cfg_byte;
            3'd3: thr_lo[23:16] <= cfg_byte;
            default: ;
          endcase
          if (cfg_idx == 3'(NEURON_CFG_BYTES - 1)) begin
            threshold  <= {cfg_byte, thr_lo};
            decay_sel  <= decay_sel_e'(mode_b[1:0]);
            reset_mode <= reset_mode_e'(mode_b[3:2]);
            v          <= '0;
            acc        <= '0;
            cfg_idx    <= '0;
          end else begin
            cfg_idx <= cfg_idx + 3'd1;
          end
        end
      end
      // ---- control logic: timestep sequencing, accumulator
      if (done) begin
        if (w_valid) acc <= sat_add(acc, w_data);
        if (time_step) done <= 1'b0;
      end else begin  // update cycle
        v     <= v_next;
        acc   <= '0;
        spike <= fire;
        done  <= 1'b1;
      end
    end
  end

  a_no_weight_in_update: assert property (@(posedge clk) disable iff (!rst_n)
                                          !done |-> !w_valid);

endmodule
