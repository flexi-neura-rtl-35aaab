// flexi_pkg: types and constants shared by the Flexi-NeurA core.
//
// Event packets. Packets exchanged between layers are 9 bits wide: bit 8 is
// the control bit, bits 7:0 carry a neuron address. With the control bit
// clear the packet is an ASPL (address of a spike in the previous layer);
// with it set, the low bits tell an EOTS (end of time step) from an EOIN
// (end of input). ASCL packets, which stay inside a core, are the bare 8-bit
// neuron address. The 9/8-bit widths are the paper's; the values chosen for
// EOTS and EOIN are this design's own.
//
// Configuration. cfg_t gathers the twelve run-time configuration registers
// written over SPI; their widths and register indices are this design's own
// choice (the paper names the registers but gives neither).
package flexi_pkg;

  localparam int PKT_W  = 9;   // ASPL / EOTS / EOIN packet width
  localparam int ADDR_W = 8;   // neuron address width (ASCL packet width)
  localparam int MAX_NEURONS = 1 << ADDR_W;

  typedef logic [PKT_W-1:0]  pkt_t;
  typedef logic [ADDR_W-1:0] naddr_t;

  localparam pkt_t PKT_EOTS = 9'h100;
  localparam pkt_t PKT_EOIN = 9'h101;

  function automatic logic pkt_is_ctrl(pkt_t p);
    return p[PKT_W-1];
  endfunction

  function automatic pkt_t make_aspl(naddr_t a);
    return {1'b0, a};
  endfunction

  // SPI command fields (bit positions from the paper's frame description).
  localparam int SPI_FIELD_W = 23;  // address and data field length
  localparam int SPI_FRAME   = 46;  // SCK cycles per frame

  typedef enum logic [1:0] {
    MEM_NEUR   = 2'b00,
    MEM_FF_SYN = 2'b01,
    MEM_REC_SYN = 2'b10
  } mem_target_e;

  // Configuration register indices (order of the paper's register table).
  typedef enum logic [3:0] {
    REG_CORE_NUMBER   = 4'd0,
    REG_ACTIVITY_EN   = 4'd1,
    REG_NEURON_NUMBER = 4'd2,
    REG_FF_RECURRENT  = 4'd3,
    REG_NEURON_MODEL  = 4'd4,
    REG_TIME_STEP     = 4'd5,
    REG_ALL_TO_ALL    = 4'd6,
    REG_ATAF_WEIGHT   = 4'd7,
    REG_THRESHOLD     = 4'd8,
    REG_RESET_MECH    = 4'd9,
    REG_BETA_RATE     = 4'd10,
    REG_ALPHA_RATE    = 4'd11
  } cfg_reg_e;

  localparam int NUM_CFG_REGS = 12;

  typedef struct packed {
    logic [7:0]         core_number;   // compared with the core's CORE_ID
    logic               activity_en;   // core processes packets when 1
    logic [8:0]         neuron_number; // active neurons in the layer
    logic               recurrent;     // 0: feedforward, 1: recurrent
    logic               synaptic;      // 0: leaky (IF/LIF), 1: synaptic model
    logic [15:0]        time_step;     // steps per sample, 0 = only EOIN ends a sample
    logic               all_to_all;    // 1: ATA-T, 0: ATA-F
    logic signed [15:0] ataf_weight;   // self-recurrent weight used in ATA-F
    logic signed [15:0] threshold;     // firing threshold in membrane units
    logic               reset_sub;     // 0: reset to zero, 1: reset by subtraction
    logic [8:0]         beta_rate;     // membrane DecayRate[8:0]
    logic [8:0]         alpha_rate;    // synaptic-current DecayRate[8:0]
  } cfg_t;

  // Operation applied by the neuron core in the write-back cycle.
  typedef enum logic [2:0] {
    OP_NONE     = 3'd0,
    OP_INTEG    = 3'd1,   // add a synaptic weight (from a memory)
    OP_INTEG_SELF = 3'd2, // add the ATA-F self weight register
    OP_LEAK     = 3'd3    // threshold test, reset or leak
  } cnu_op_e;

endpackage
