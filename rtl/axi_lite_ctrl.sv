// axi_lite_ctrl: AXI4-Lite register block through which the host configures the
// accelerator and reads its status, results and cycle counters.
//
// Register map (byte offsets, 32-bit registers):
//   0x00 CTRL        W   bit0: clear counters, bit1: clear result-overflow flag (pulses)
//   0x04 STATUS      R   bit0 busy, bit1 new result since last RESULT read, bit2 overflow
//   0x08 RESULT      R   last result word {first_t, win_count, no_spike, label};
//                        reading it clears STATUS bit1
//   0x0C FIRST_CYC   R   first-output-spike latency of the last image (cycles)
//   0x10 IMAGE_CYC   R   first-word-to-result latency of the last image (cycles)
//   0x14 SERVICE_CYC R   interval between the last two results (cycles)
//   0x18 IMAGE_CNT   R   images completed
//   0x1C LEAK        RW  linear leak per timestep (8 bits, reset 0)
//   0x20 OUT_BASE    RW  first output-population neuron id (reset 784)
//   0x24 CLASS_SIZE  RW  neurons per class population (reset 15)
//   0x28 NUM_CLASSES RW  number of class populations (reset 10)
//   0x2C CFG_SEL     RW  configuration memory: 0 connectivity, 1 synapses, 2 thresholds
//   0x30 CFG_ADDR    RW  entry address inside it; increments after each CFG_DATA write
//   0x34 CFG_DATA    W   writes one entry (layouts in snn_pkg)
//   0x38 SYN_EVENTS  R   synaptic events processed
//   0x3C DROPPED     R   input spikes dropped for an out-of-range id
//   0x40 STALL_CYC   R   cycles the input stream was held back by a full event queue
// The write channel takes AW and W together (AWREADY = WREADY, both raised only when
// both valids are present and no response is pending) and answers OKAY one cycle later;
// a read answers one cycle after ARVALID is accepted. Write strobes are ignored: every
// write is a full 32-bit word. The configuration memories are written with the
// indirect CFG_SEL/ADDR/DATA scheme so that loading the model (the weights, thresholds
// and connectivity of the exported artifact) needs no wide address window. The source
// names an AXI-Lite control path for configuration and status; the register map is this
// design's choice.
module axi_lite_ctrl
  import snn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [7:0]        s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [7:0]        s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  // configuration outputs
  output cfg_wr_t           cfg,
  output logic [LEAK_W-1:0] leak,
  output logic [NID_W-1:0]  out_base,
  output logic [7:0]        class_size,
  output logic [CLS_W:0]    num_classes,
  output logic              counters_clear,
  // status inputs
  input  logic              busy,
  input  result_t           res,
  input  logic              res_done,
  input  logic              res_overflow,
  input  logic [31:0]       first_spike_cycles,
  input  logic [31:0]       image_cycles,
  input  logic [31:0]       service_cycles,
  input  logic [31:0]       image_count,
  input  logic [31:0]       syn_event_count,
  input  logic [31:0]       dropped_count,
  input  logic [31:0]       stall_cycles
);

  logic        wr_en, rd_en;
  logic        new_result, ovf_flag;
  cfg_sel_e    cfg_sel;
  logic [19:0] cfg_addr;
  logic [31:0] res_word, rd_mux;

  assign s_axil_awready = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_wready  = s_axil_awready;
  assign wr_en          = s_axil_awready;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_arready = !s_axil_rvalid;
  assign rd_en          = s_axil_arvalid && s_axil_arready;
  assign s_axil_rresp   = 2'b00;

  assign res_word = {res.first_t, res.win_count, 7'b0, res.no_spike, 4'b0, res.label};

  always_comb begin
    unique case (s_axil_araddr)
      REG_STATUS:      rd_mux = {29'b0, ovf_flag, new_result, busy};
      REG_RESULT:      rd_mux = res_word;
      REG_FIRST_CYC:   rd_mux = first_spike_cycles;
      REG_IMAGE_CYC:   rd_mux = image_cycles;
      REG_SERVICE_CYC: rd_mux = service_cycles;
      REG_IMAGE_CNT:   rd_mux = image_count;
      REG_LEAK:        rd_mux = 32'(leak);
      REG_OUT_BASE:    rd_mux = 32'(out_base);
      REG_CLASS_SIZE:  rd_mux = 32'(class_size);
      REG_NUM_CLASSES: rd_mux = 32'(num_classes);
      REG_CFG_SEL:     rd_mux = 32'(cfg_sel);
      REG_CFG_ADDR:    rd_mux = 32'(cfg_addr);
      REG_SYN_EVENTS:  rd_mux = syn_event_count;
      REG_DROPPED:     rd_mux = dropped_count;
      REG_STALL_CYC:   rd_mux = stall_cycles;
      default:         rd_mux = 32'h0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axil_bvalid  <= 1'b0;
      s_axil_rvalid  <= 1'b0;
      s_axil_rdata   <= '0;
      cfg            <= '0;
      cfg_sel        <= CFG_CONN;
      cfg_addr       <= '0;
      leak           <= '0;
      out_base       <= NID_W'(OUT_BASE_DEF);
      class_size     <= 8'(CLASS_SIZE_DEF);
      num_classes    <= (CLS_W+1)'(NUM_CLASSES_DEF);
      counters_clear <= 1'b0;
      new_result     <= 1'b0;
      ovf_flag       <= 1'b0;
    end else begin
      cfg.we         <= 1'b0;
      counters_clear <= 1'b0;
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;

      if (res_done)     new_result <= 1'b1;
      if (res_overflow) ovf_flag   <= 1'b1;

      if (wr_en) begin
        s_axil_bvalid <= 1'b1;
        unique case (s_axil_awaddr)
          REG_CTRL: begin
            counters_clear <= s_axil_wdata[0];
            if (s_axil_wdata[1]) ovf_flag <= 1'b0;
          end
          REG_LEAK:        leak        <= s_axil_wdata[LEAK_W-1:0];
          REG_OUT_BASE:    out_base    <= s_axil_wdata[NID_W-1:0];
          REG_CLASS_SIZE:  class_size  <= s_axil_wdata[7:0];
          REG_NUM_CLASSES: num_classes <= s_axil_wdata[CLS_W:0];
          REG_CFG_SEL:     cfg_sel     <= cfg_sel_e'(s_axil_wdata[1:0]);
          REG_CFG_ADDR:    cfg_addr    <= s_axil_wdata[19:0];
          REG_CFG_DATA: begin
            cfg.we   <= 1'b1;
            cfg.sel  <= cfg_sel;
            cfg.addr <= cfg_addr;
            cfg.data <= s_axil_wdata;
            cfg_addr <= cfg_addr + 20'd1;
          end
          default: ;
        endcase
      end

      if (rd_en) begin
        s_axil_rvalid <= 1'b1;
        s_axil_rdata  <= rd_mux;
        if (s_axil_araddr == REG_RESULT && !res_done) new_result <= 1'b0;
      end
    end
  end

  // AXI rule: a response, once offered, stays until it is taken.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_axil_bvalid && !s_axil_bready) |=> s_axil_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_axil_rvalid && !s_axil_rready) |=> (s_axil_rvalid && $stable(s_axil_rdata)));

endmodule
