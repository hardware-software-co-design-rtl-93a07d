// snn_pkg: types and constants shared by the event-driven TTFS inference design.
//
// Neuron addressing follows the architecture's 2,048-neuron address space, built as
// 16 groups of 128 neurons: an 11-bit neuron id whose upper 4 bits select a group and
// whose lower 7 bits select a neuron inside it. Source ids (input pixels) and target
// ids (neurons of the core) share this space. The decoder defaults (10 classes of 15
// output neurons) are those of the MNIST classifier the design was demonstrated with.
// Word widths of weights, membrane potentials, thresholds and timesteps are this
// design's own choice; the source gives none.
package snn_pkg;

  // ---- address space (from the architecture description) ----
  localparam int unsigned NUM_GROUPS_DEF  = 16;
  localparam int unsigned GROUP_SIZE_DEF  = 128;
  localparam int unsigned NUM_NEURONS_DEF = NUM_GROUPS_DEF * GROUP_SIZE_DEF; // 2048
  localparam int unsigned NID_W           = 11;   // covers 2048 ids

  // ---- word widths (design choices) ----
  localparam int unsigned W_W     = 8;    // signed synaptic weight (INT8)
  localparam int unsigned V_W     = 16;   // signed membrane potential, saturating
  localparam int unsigned T_W     = 8;    // TTFS timestep
  localparam int unsigned LEAK_W  = 8;    // linear leak per timestep (unsigned)

  // ---- connectivity / synapse storage (design choices) ----
  localparam int unsigned SYN_DEPTH_DEF = 131072; // >= 784*150 = 117,600 synapses
  localparam int unsigned SYN_AW        = 17;     // synapse address width
  localparam int unsigned FAN_W         = 12;     // fan-out count, 0..4095

  // ---- grouped TTFS readout (MNIST classifier of the evaluation) ----
  localparam int unsigned MAX_CLASSES       = 16;
  localparam int unsigned CLS_W             = 4;
  localparam int unsigned NUM_CLASSES_DEF   = 10;
  localparam int unsigned CLASS_SIZE_DEF    = 15;
  localparam int unsigned NUM_INPUTS_DEF    = 784;
  localparam int unsigned OUT_BASE_DEF      = NUM_INPUTS_DEF; // first output neuron id

  // A spike event: input spike from the host, or output spike of the core.
  // eoi=1 marks the end of one image (no spike carried).
  typedef struct packed {
    logic             eoi;
    logic [T_W-1:0]   t;
    logic [NID_W-1:0] id;
  } spike_ev_t;

  // A synaptic event leaving the synapse router towards the neuron core.
  typedef struct packed {
    logic                  eoi;
    logic [T_W-1:0]        t;
    logic [NID_W-1:0]      target;
    logic signed [W_W-1:0] w;
  } syn_ev_t;

  // Connectivity descriptor of one source neuron: its synapses are the
  // 'count' consecutive entries of synapse memory starting at 'base'.
  typedef struct packed {
    logic [FAN_W-1:0]  count;
    logic [SYN_AW-1:0] base;
  } conn_desc_t;

  // One packed synapse.
  typedef struct packed {
    logic [NID_W-1:0]      target;
    logic signed [W_W-1:0] w;
  } synapse_t;

  // Configuration memories written from the host through the register interface.
  typedef enum logic [1:0] {
    CFG_CONN = 2'd0,   // connectivity descriptors, addressed by source id
    CFG_SYN  = 2'd1,   // packed synapses, addressed by synapse index
    CFG_THR  = 2'd2    // firing thresholds, addressed by neuron id
  } cfg_sel_e;

  typedef struct packed {
    logic        we;
    cfg_sel_e    sel;
    logic [19:0] addr;
    logic [31:0] data;
  } cfg_wr_t;

  // CFG_DATA layouts
  //   CFG_CONN : data[16:0] = base, data[31:20] = count
  //   CFG_SYN  : data[10:0] = target id, data[23:16] = signed weight
  //   CFG_THR  : data[15:0] = signed threshold
  function automatic conn_desc_t unpack_conn(logic [31:0] d);
    conn_desc_t c;
    c.base  = d[SYN_AW-1:0];
    c.count = d[31:20];
    return c;
  endfunction

  function automatic synapse_t unpack_syn(logic [31:0] d);
    synapse_t s;
    s.target = d[NID_W-1:0];
    s.w      = d[16 +: W_W];
    return s;
  endfunction

  // Result of one image from the grouped TTFS decoder.
  typedef struct packed {
    logic [T_W-1:0]   first_t;   // earliest spike time of the winning class
    logic [7:0]       win_count; // neurons of the winner spiking at first_t
    logic             no_spike;  // no output neuron fired for this image
    logic [CLS_W-1:0] label;
  } result_t;

  // AXI-Stream ingress word layout (one event per 32-bit word):
  //   [10:0] source neuron id, [23:16] timestep, [31] null word (carries no spike;
  //   used with TLAST to close an image that had no spikes). TLAST ends an image.
  localparam int unsigned IN_NULL_BIT = 31;

  // Register map of the AXI-Lite control block (byte addresses).
  localparam logic [7:0] REG_CTRL        = 8'h00;
  localparam logic [7:0] REG_STATUS      = 8'h04;
  localparam logic [7:0] REG_RESULT      = 8'h08;
  localparam logic [7:0] REG_FIRST_CYC   = 8'h0C;
  localparam logic [7:0] REG_IMAGE_CYC   = 8'h10;
  localparam logic [7:0] REG_SERVICE_CYC = 8'h14;
  localparam logic [7:0] REG_IMAGE_CNT   = 8'h18;
  localparam logic [7:0] REG_LEAK        = 8'h1C;
  localparam logic [7:0] REG_OUT_BASE    = 8'h20;
  localparam logic [7:0] REG_CLASS_SIZE  = 8'h24;
  localparam logic [7:0] REG_NUM_CLASSES = 8'h28;
  localparam logic [7:0] REG_CFG_SEL     = 8'h2C;
  localparam logic [7:0] REG_CFG_ADDR    = 8'h30;
  localparam logic [7:0] REG_CFG_DATA    = 8'h34;
  localparam logic [7:0] REG_SYN_EVENTS  = 8'h38;
  localparam logic [7:0] REG_DROPPED     = 8'h3C;
  localparam logic [7:0] REG_STALL_CYC   = 8'h40;

endpackage
