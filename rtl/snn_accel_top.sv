// snn_accel_top: event-driven time-to-first-spike (TTFS) SNN inference engine for the
// programmable logic of a small Zynq-class FPGA.
//
// Data path, in the order an image travels it:
//   s_axis (DMA stream of packed spike words)
//     -> axi_ingress        unpack words into spike events + end-of-image marker
//     -> event_router       in-order FIFO, back-pressures the stream when full
//     -> synapse_router     expand each spike into its fan-out via ...
//        connectivity_table   ... descriptors and packed (target, weight) synapses
//     -> neuron_core        16 groups x 128 LIF neurons, one first spike per neuron
//     -> ttfs_decoder       grouped TTFS readout: 10 classes x 15 neurons
//     -> m_axis (one result word per image) and the RESULT register
// Control path: axi_lite_ctrl (AXI4-Lite registers) loads the configuration memories and
// decode settings and exposes pl_counters (first-spike, image and service latencies in
// cycles, event counts). One clock (aclk, 80 MHz in the reference implementation) and
// one active-low reset (aresetn) drive everything.
//
// Throughput is one synaptic event per cycle: an image of S input spikes with fan-out
// F each takes about S*(F+1) cycles plus a fixed pipeline latency of about 8 cycles from
// stream input to result. The host must load the configuration memories while no image
// is in flight. The block set and the 2,048-neuron, 16 x 128 organisation follow the
// source; interfaces, widths, register map and the pipeline are this design's choices.
module snn_accel_top
  import snn_pkg::*;
#(
  parameter int unsigned NUM_GROUPS   = NUM_GROUPS_DEF,
  parameter int unsigned GROUP_SIZE   = GROUP_SIZE_DEF,
  parameter int unsigned SYN_DEPTH    = SYN_DEPTH_DEF,
  parameter int unsigned FIFO_DEPTH   = 512,
  parameter int unsigned MAX_INFLIGHT = 4
) (
  input  logic        aclk,
  input  logic        aresetn,
  // AXI4-Lite control/status slave
  input  logic [7:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [7:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // AXI4-Stream spike input (from the DMA)
  input  logic [31:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  input  logic        s_axis_tlast,
  output logic        s_axis_tready,
  // AXI4-Stream result output (one word per image)
  output logic [31:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  output logic        m_axis_tlast,
  input  logic        m_axis_tready
);

  localparam int unsigned NUM_NEURONS = NUM_GROUPS * GROUP_SIZE;

  // configuration
  cfg_wr_t           cfg;
  logic [LEAK_W-1:0] leak;
  logic [NID_W-1:0]  out_base;
  logic [7:0]        class_size;
  logic [CLS_W:0]    num_classes;
  logic              counters_clear;

  // data path
  spike_ev_t  ing_ev, rt_ev, core_ev;
  logic       ing_valid, ing_ready, rt_valid, rt_ready, core_valid;
  syn_ev_t    syn_ev;
  logic       syn_valid, sr_busy, bypass_hit;
  conn_desc_t conn_rdata;
  synapse_t   syn_rdata;
  logic [NID_W-1:0]  conn_raddr;
  logic [SYN_AW-1:0] syn_raddr;
  logic [$clog2(FIFO_DEPTH):0] rt_level;

  // status
  logic        img_start, dropped, stall, start_ok, busy, class_spike, res_done, res_ovf;
  result_t     res;
  logic [31:0] first_cyc, image_cyc, service_cyc, image_cnt, syn_cnt, drop_cnt, stall_cnt;

  axi_lite_ctrl u_ctrl (
    .clk(aclk), .rst_n(aresetn),
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .cfg, .leak, .out_base, .class_size, .num_classes, .counters_clear,
    .busy, .res, .res_done(res_done), .res_overflow(res_ovf),
    .first_spike_cycles(first_cyc), .image_cycles(image_cyc),
    .service_cycles(service_cyc), .image_count(image_cnt),
    .syn_event_count(syn_cnt), .dropped_count(drop_cnt), .stall_cycles(stall_cnt)
  );

  axi_ingress #(.NUM_NEURONS(NUM_NEURONS)) u_ingress (
    .clk(aclk), .rst_n(aresetn),
    .s_axis_tdata, .s_axis_tvalid, .s_axis_tlast, .s_axis_tready,
    .start_ok, .img_start, .dropped,
    .out_ev(ing_ev), .out_valid(ing_valid), .out_ready(ing_ready)
  );

  event_router #(.FIFO_DEPTH(FIFO_DEPTH)) u_router (
    .clk(aclk), .rst_n(aresetn),
    .in_ev(ing_ev), .in_valid(ing_valid), .in_ready(ing_ready),
    .out_ev(rt_ev), .out_valid(rt_valid), .out_ready(rt_ready),
    .stall, .level(rt_level)
  );

  synapse_router u_synrouter (
    .clk(aclk), .rst_n(aresetn),
    .in_ev(rt_ev), .in_valid(rt_valid), .in_ready(rt_ready),
    .conn_raddr, .conn_rdata, .syn_raddr, .syn_rdata,
    .out_ev(syn_ev), .out_valid(syn_valid), .busy(sr_busy)
  );

  connectivity_table #(.NUM_NEURONS(NUM_NEURONS), .SYN_DEPTH(SYN_DEPTH)) u_conn (
    .clk(aclk), .cfg, .conn_raddr, .conn_rdata, .syn_raddr, .syn_rdata
  );

  neuron_core #(.NUM_GROUPS(NUM_GROUPS), .GROUP_SIZE(GROUP_SIZE)) u_core (
    .clk(aclk), .rst_n(aresetn), .cfg, .leak,
    .in_ev(syn_ev), .in_valid(syn_valid),
    .out_ev(core_ev), .out_valid(core_valid), .bypass_hit
  );

  ttfs_decoder u_decoder (
    .clk(aclk), .rst_n(aresetn),
    .out_base, .class_size, .num_classes,
    .in_ev(core_ev), .in_valid(core_valid),
    .class_spike, .res, .done(res_done),
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tlast, .m_axis_tready,
    .overflow(res_ovf)
  );

  pl_counters #(.MAX_INFLIGHT(MAX_INFLIGHT)) u_counters (
    .clk(aclk), .rst_n(aresetn), .clear(counters_clear),
    .img_start, .out_spike(class_spike), .img_done(res_done),
    .syn_event(syn_valid && !syn_ev.eoi), .dropped, .stall,
    .start_ok, .busy,
    .first_spike_cycles(first_cyc), .image_cycles(image_cyc),
    .service_cycles(service_cyc), .image_count(image_cnt),
    .syn_event_count(syn_cnt), .dropped_count(drop_cnt), .stall_cycles(stall_cnt)
  );

endmodule
