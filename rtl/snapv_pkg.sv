// snapv_pkg -- types and constants shared by the spiking-network accelerator.
//
// The accelerator moves two kinds of traffic. Spike packets are 11 bits wide:
// a 6-bit source cluster ID and a 5-bit source neuron ID, as the packet and
// lookup-table widths of the architecture require. Configuration traffic is a
// stream of bytes. Cluster IDs 0..31 are the physical clusters. IDs 32..63 are
// not backed by hardware and name the input channels of the rate encoder.
// Everything else here (opcode values, destination byte encoding, the
// custom-instruction function codes and the saturating arithmetic) is this
// implementation's own choice. The architecture names the opcodes but gives
// no values.
package snapv_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NPC        = 32;   // neurons per cluster
  localparam int unsigned WBITS      = 32;   // synaptic weight / potential width
  localparam int unsigned ROW_BITS   = NPC * WBITS;  // one weight-memory row
  localparam int unsigned MEM_ROWS   = 2048; // rows per cluster-group memory
  localparam int unsigned AW         = 11;   // weight row address width
  localparam int unsigned CID_W      = 6;    // cluster ID width in a spike packet
  localparam int unsigned NID_W      = 5;    // neuron ID width in a spike packet
  localparam int unsigned PKT_W      = CID_W + NID_W;  // 11-bit spike packet
  localparam int unsigned CL_PER_GRP = 4;    // clusters per cluster group

  typedef struct packed {
    logic [CID_W-1:0] cluster;
    logic [NID_W-1:0] neuron;
  } spike_pkt_t;

  typedef logic signed [WBITS-1:0] weight_t;

  // ------------------------------------------------- neuron configuration
  // Retained fraction after one timestep of leak.
  typedef enum logic [1:0] {
    DECAY_0_125 = 2'd0,   // v >>> 3
    DECAY_0_25  = 2'd1,   // v >>> 2
    DECAY_0_5   = 2'd2,   // v >>> 1
    DECAY_0_75  = 2'd3    // (v >>> 1) + (v >>> 2)
  } decay_sel_e;

  typedef enum logic [1:0] {
    RESET_HOLD     = 2'd0,  // potential unchanged after a spike
    RESET_ZERO     = 2'd1,  // potential set to zero
    RESET_SUBTRACT = 2'd2   // threshold subtracted
  } reset_mode_e;

  localparam int unsigned NEURON_CFG_BYTES = 5; // mode byte + 32-bit threshold

  // ------------------------------------------- cluster controller opcodes
  typedef enum logic [7:0] {
    OPCODE_LOAD_NI = 8'h01,  // neuron parameters
    OPCODE_LOAD_IF = 8'h02,  // incoming-forwarder lookup entry
    OPCODE_LOAD_OE = 8'h03   // outgoing-encoder forward-enable mask
  } cc_opcode_e;

  // ------------------------------------ data/control packet destinations
  // Byte 0 of every data/control packet: 0..31 = cluster controller,
  // DEST_WMEM+g = weight memory of cluster group g. Byte 1 = number of bytes
  // that follow.
  localparam logic [7:0] DEST_WMEM = 8'h20;

  // ----------------------------------------- custom instruction functions
  typedef enum logic [6:0] {
    F_CFG_BYTE   = 7'd0,  // rs1[7:0] -> configuration FIFO
    F_SPIKE_IN   = 7'd1,  // rs1[10:0] -> spike injection FIFO
    F_STEP       = 7'd2,  // run one timestep; responds with the step count
    F_OUT_POP    = 7'd3,  // responds {valid, packet} from the output FIFO
    F_SET_MODE   = 7'd4,  // rs1[0]: 1 = run, 0 = initialisation
    F_STATUS     = 7'd5,  // responds status bits
    F_ENC_WRITE  = 7'd6,  // encoder channel rs1[9:0] <- rs2[7:0]
    F_ENC_CTRL   = 7'd7,  // rs1[0] enable encoder per step, rs2[10:0] channel count
    F_DEC_READ   = 7'd8,  // responds spike count of neuron rs1[9:0]
    F_DEC_ARGMAX = 7'd9,  // responds {maxcount, argmax}
    F_DEC_WINDOW = 7'd10, // argmax window rs1[9:0] .. rs2[9:0]
    F_DEC_CLEAR  = 7'd11  // clear all spike counters
  } acc_funct_e;

  // ------------------------------------------------------- arithmetic
  function automatic weight_t sat_add(weight_t a, weight_t b);
    logic signed [WBITS:0] s;
    s = {a[WBITS-1], a} + {b[WBITS-1], b};
    if (s[WBITS] != s[WBITS-1])
      return s[WBITS] ? {1'b1, {(WBITS-1){1'b0}}} : {1'b0, {(WBITS-1){1'b1}}};
    return s[WBITS-1:0];
  endfunction

  function automatic weight_t sat_sub(weight_t a, weight_t b);
    logic signed [WBITS:0] s;
    s = {a[WBITS-1], a} - {b[WBITS-1], b};
    if (s[WBITS] != s[WBITS-1])
      return s[WBITS] ? {1'b1, {(WBITS-1){1'b0}}} : {1'b0, {(WBITS-1){1'b1}}};
    return s[WBITS-1:0];
  endfunction

endpackage
