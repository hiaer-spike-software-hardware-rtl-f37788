// hs_pkg: sizes, memory formats and command encodings shared by the core.
//
// One core keeps its network in three memories. Off-chip HBM holds axon
// pointers, neuron pointers and synapse words in 256-bit rows; each pair of
// rows is a segment of 16 32-bit slots, slot s of a segment belonging to
// lane s. Sixteen URAM banks (one per lane, 4K x 72 bits) hold two neurons
// per row, each neuron as {spike, V}. One BRAM (8K x 16 bits) holds one bit
// per input axon for the current time step. The sizes printed in the
// paper's core figure (256b HBM rows, 16 slots per 2 rows, 16 URAMs of
// 4K x 72b, BRAM 8K x 16b) are used as they are. The bit-level formats of
// pointers, synapse words, neuron models and host commands are this
// design's own, since the paper does not give them.
package hs_pkg;

  // ---- organisation (paper numbers) ----
  localparam int NUM_LANES     = 16;    // neurons processed in parallel
  localparam int URAM_DEPTH    = 4096;  // rows per URAM bank
  localparam int URAM_W        = 72;    // bits per URAM row
  localparam int AXON_ROWS     = 8192;  // BRAM rows
  localparam int AXON_W        = 16;    // BRAM row width, one bit per axon
  localparam int HBM_W         = 256;   // HBM row width
  localparam int SLOT_W        = 32;    // one pointer or synapse
  localparam int SLOTS_PER_ROW = HBM_W / SLOT_W;  // 8, two rows per segment
  localparam int WEIGHT_W      = 16;    // int16 synaptic weights
  localparam int NOISE_W       = 17;    // raw noise width
  localparam int NU_W          = 6;     // signed noise shift
  localparam int LAMBDA_W      = 6;     // leak shift

  // ---- this design's choices ----
  localparam int NEUR_W        = URAM_W / 2;   // 36: {spike, V}, 2 neurons per row
  localparam int V_W           = NEUR_W - 1;   // 35-bit signed membrane potential
  localparam int HBM_AW        = 23;           // 8 GB / 32 cores / 32 B per row
  localparam int PTR_ROWS_W    = SLOT_W - HBM_AW;  // 9: rows covered by a pointer
  localparam int NUM_MODELS    = 16;
  localparam int NEURON_ID_W   = 17;   // 128K neurons per core (16 x 4K x 2)
  localparam int AXON_ID_W     = 17;   // 128K axons per core (8K x 16)
  localparam int K_W           = 13;   // neuron index inside a lane (n >> 4)

  typedef logic signed [V_W-1:0] vmem_t;

  // One neuron model. Neurons are numbered so that each model owns a
  // contiguous range; a neuron belongs to the first model whose end_neuron
  // (exclusive) is above its number.
  typedef struct packed {
    logic                       is_lif;     // 1: LIF, 0: ANN (binary)
    logic signed [V_W-1:0]      theta;      // spike when V > theta
    logic signed [NU_W-1:0]     nu;         // noise shift
    logic [LAMBDA_W-1:0]        lambda;     // leak shift
    logic [NEURON_ID_W:0]       end_neuron; // first neuron not of this model
  } model_t;

  // Pointer: start row and number of rows of the outgoing synapse region.
  typedef struct packed {
    logic [PTR_ROWS_W-1:0] rows;
    logic [HBM_AW-1:0]     start;
  } pointer_t;

  // Synapse word. kind = SYN_WEIGHT: k (postsynaptic n >> 4) and weight;
  // the lane is given by the slot. kind = SYN_OUTPUT: bits [16:0] hold the
  // number of the presynaptic neuron to report as an output spike.
  typedef enum logic [1:0] {
    SYN_EMPTY  = 2'b00,
    SYN_WEIGHT = 2'b01,
    SYN_OUTPUT = 2'b10
  } syn_kind_e;

  typedef struct packed {
    syn_kind_e                   kind;
    logic                        rsvd;
    logic [K_W-1:0]              k;
    logic signed [WEIGHT_W-1:0]  weight;
  } synapse_t;

  typedef struct packed {
    logic                     we;
    logic [HBM_AW-1:0]        addr;
    logic [HBM_W-1:0]         wdata;
    logic [SLOTS_PER_ROW-1:0] wstrb;   // one enable per 32-bit slot
  } hbm_req_t;

  // ---- host command / response stream (stands in for the PCIe side) ----
  typedef enum logic [3:0] {
    CMD_HBM_WRITE   = 4'd0,  // idx = {row, slot}, data[31:0] = word
    CMD_HBM_READ    = 4'd1,  // idx = {row, slot}; answers RSP_DATA
    CMD_SET_AXON    = 4'd2,  // idx = axon number, spike in next step
    CMD_WRITE_MODEL = 4'd3,  // idx = model number, data = model_t
    CMD_SET_CFG     = 4'd4,  // idx = CFG_* register, data = value
    CMD_STEP        = 4'd5,  // run one time step; answers spikes then RSP_STEP_DONE
    CMD_READ_MEM    = 4'd6,  // idx = neuron; answers RSP_DATA {spike, V}
    CMD_WRITE_MEM   = 4'd7,  // idx = neuron, data = {spike, V}
    CMD_LOAD_MODELS = 4'd8   // idx = HBM row of model 0; model m is in the
                             // low bits (slots 0-2) of row idx + m
  } cmd_op_e;

  localparam int CFG_AXON_PTR_BASE = 0;  // HBM row of axon pointer 0
  localparam int CFG_NEUR_PTR_BASE = 1;  // HBM row of neuron pointer 0
  localparam int CFG_NEURON_ROWS   = 2;  // URAM rows in use (32 neurons each)
  localparam int CFG_AXON_ROWS     = 3;  // BRAM rows in use (16 axons each)

  localparam int CMD_DATA_W = 96;

  typedef struct packed {
    cmd_op_e               op;
    logic [31:0]           idx;
    logic [CMD_DATA_W-1:0] data;
  } host_cmd_t;

  typedef enum logic [1:0] {
    RSP_DATA      = 2'd0,  // answer to a read
    RSP_SPIKE     = 2'd1,  // data = output neuron that fired this step
    RSP_STEP_DONE = 2'd2   // data = {HBM row reads, clock cycles}
  } rsp_kind_e;

  typedef struct packed {
    rsp_kind_e   kind;
    logic [63:0] data;
  } host_rsp_t;

endpackage
