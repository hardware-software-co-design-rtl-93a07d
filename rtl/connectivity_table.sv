// connectivity_table: on-chip storage of the network's connectivity and weights.
//
// Two memories hold what the exported model artifact supplies for routing:
//   * the descriptor memory, one conn_desc_t per source neuron id (NUM_NEURONS entries):
//     the base index and length of that source's run of synapses;
//   * the synapse memory, SYN_DEPTH packed synapses, each a target neuron id and a signed
//     8-bit weight, stored source by source in consecutive entries.
// Both are written one entry per cycle through the configuration port (cfg.sel selects
// CFG_CONN or CFG_SYN) and read through one synchronous read port each: the data for an
// address presented in one cycle appears after the next clock edge, as in a block RAM.
// The memories have no reset; the host loads every entry it uses before inference.
// The split into descriptors and a packed synapse list, the depths and the word layout
// are this design's choices; the source only states that a connectivity table exists,
// that synapses are packed, and that on-chip memory limits the network size. The
// default SYN_DEPTH of 131,072 holds the 784 x 150 = 117,600 synapses of the MNIST
// classifier.
module connectivity_table
  import snn_pkg::*;
#(
  parameter int unsigned NUM_NEURONS = NUM_NEURONS_DEF,
  parameter int unsigned SYN_DEPTH   = SYN_DEPTH_DEF
) (
  input  logic             clk,
  input  cfg_wr_t          cfg,
  input  logic [NID_W-1:0] conn_raddr,
  output conn_desc_t       conn_rdata,
  input  logic [SYN_AW-1:0] syn_raddr,
  output synapse_t         syn_rdata
);

  conn_desc_t conn_mem [NUM_NEURONS];
  synapse_t   syn_mem  [SYN_DEPTH];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.sel == CFG_CONN && 32'(cfg.addr) < NUM_NEURONS)
      conn_mem[cfg.addr[NID_W-1:0]] <= unpack_conn(cfg.data);
    conn_rdata <= conn_mem[conn_raddr];
  end

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.sel == CFG_SYN && 32'(cfg.addr) < SYN_DEPTH)
      syn_mem[cfg.addr[SYN_AW-1:0]] <= unpack_syn(cfg.data);
    syn_rdata <= syn_mem[syn_raddr];
  end

endmodule
