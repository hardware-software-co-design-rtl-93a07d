// tb_axi_lite_ctrl: AXI4-Lite writes and reads with random BREADY/RREADY delays.
// Checks reset values and read-back of the writable registers, the configuration
// write pulse produced by CFG_DATA (selector, address, data) and the address
// auto-increment, the one-cycle counter-clear pulse, the status flags (new result
// cleared by reading RESULT, overflow cleared through CTRL) and the read mux of every
// counter input.
module tb_axi_lite_ctrl;
  import snn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0]  s_axil_awaddr, s_axil_araddr;
  logic        s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic [3:0]  s_axil_wstrb;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic        s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
  logic        s_axil_rvalid, s_axil_rready;
  cfg_wr_t     cfg;
  logic [LEAK_W-1:0] leak;
  logic [NID_W-1:0]  out_base;
  logic [7:0]        class_size;
  logic [CLS_W:0]    num_classes;
  logic        counters_clear, busy, res_done, res_overflow;
  result_t     res;
  logic [31:0] first_spike_cycles, image_cycles, service_cycles, image_count,
               syn_event_count, dropped_count, stall_cycles;

  axi_lite_ctrl dut (.*);

  int checks = 0, failures = 0, n_cfg = 0, n_clear = 0;
  cfg_wr_t cfg_log[$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (cfg.we) begin cfg_log.push_back(cfg); n_cfg++; end
    if (counters_clear) n_clear++;
  end

  task automatic axil_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_awvalid = 1; s_axil_wdata = d; s_axil_wvalid = 1; s_axil_wstrb = 4'hF;
    do begin #1; if (s_axil_awready) break; @(negedge clk); end while (1);
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    s_axil_bready = 1;
    do begin #1; if (s_axil_bvalid) break; @(negedge clk); end while (1);
    check(s_axil_bresp == 2'b00, "write response OKAY");
    @(negedge clk);
    s_axil_bready = 0;
  endtask

  task automatic axil_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axil_araddr = a; s_axil_arvalid = 1;
    do begin #1; if (s_axil_arready) break; @(negedge clk); end while (1);
    @(negedge clk);
    s_axil_arvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    s_axil_rready = 1;
    do begin #1; if (s_axil_rvalid) break; @(negedge clk); end while (1);
    d = s_axil_rdata;
    @(negedge clk);
    s_axil_rready = 0;
  endtask

  initial begin
    logic [31:0] d;
    s_axil_awaddr = 0; s_axil_awvalid = 0; s_axil_wdata = 0; s_axil_wvalid = 0; s_axil_wstrb = 0;
    s_axil_bready = 0; s_axil_araddr = 0; s_axil_arvalid = 0; s_axil_rready = 0;
    busy = 0; res = '0; res_done = 0; res_overflow = 0;
    first_spike_cycles = 32'h1111_0001; image_cycles = 32'h2222_0002; service_cycles = 32'h3333_0003;
    image_count = 32'h4444_0004; syn_event_count = 32'h5555_0005; dropped_count = 32'h6666_0006;
    stall_cycles = 32'h7777_0007;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // reset values
    axil_read(REG_OUT_BASE, d);    check(d == 32'd784, "OUT_BASE reset");
    axil_read(REG_CLASS_SIZE, d);  check(d == 32'd15, "CLASS_SIZE reset");
    axil_read(REG_NUM_CLASSES, d); check(d == 32'd10, "NUM_CLASSES reset");
    axil_read(REG_LEAK, d);        check(d == 32'd0, "LEAK reset");
    // writable registers
    axil_write(REG_LEAK, 32'd3);        axil_read(REG_LEAK, d);        check(d == 3 && leak == 3, "LEAK");
    axil_write(REG_OUT_BASE, 32'd900);  axil_read(REG_OUT_BASE, d);    check(d == 900 && out_base == 900, "OUT_BASE");
    axil_write(REG_CLASS_SIZE, 32'd7);  check(class_size == 7, "CLASS_SIZE");
    axil_write(REG_NUM_CLASSES, 32'd4); check(num_classes == 4, "NUM_CLASSES");
    // configuration stream with auto-increment
    axil_write(REG_CFG_SEL, 32'd1);
    axil_write(REG_CFG_ADDR, 32'd100);
    for (int i = 0; i < 20; i++) axil_write(REG_CFG_DATA, 32'hA500_0000 + i);
    axil_read(REG_CFG_ADDR, d); check(d == 120, "CFG_ADDR auto-increment");
    axil_write(REG_CFG_SEL, 32'd2);
    axil_write(REG_CFG_ADDR, 32'd7);
    axil_write(REG_CFG_DATA, 32'h0000_BEEF);
    check(n_cfg == 21, "one config pulse per CFG_DATA write");
    for (int i = 0; i < 20 && cfg_log.size() > 0; i++) begin
      cfg_write_check(cfg_log.pop_front(), CFG_SYN, 20'(100 + i), 32'hA500_0000 + i);
    end
    if (cfg_log.size() > 0) cfg_write_check(cfg_log.pop_front(), CFG_THR, 20'd7, 32'h0000_BEEF);
    // control pulses
    axil_write(REG_CTRL, 32'd1);
    check(n_clear == 1, "counter clear pulse");
    // status flags
    @(negedge clk); res = '{first_t: 8'd9, win_count: 8'd3, no_spike: 1'b0, label: 4'd6}; res_done = 1;
    @(negedge clk); res_done = 0; res_overflow = 1;
    @(negedge clk); res_overflow = 0; busy = 1;
    axil_read(REG_STATUS, d); check(d[2:0] == 3'b111, "STATUS busy/new/overflow");
    axil_read(REG_RESULT, d); check(d == {8'd9, 8'd3, 7'd0, 1'b0, 4'd0, 4'd6}, "RESULT word");
    axil_read(REG_STATUS, d); check(d[1] == 0 && d[2] == 1, "RESULT read clears new flag only");
    axil_write(REG_CTRL, 32'd2);
    axil_read(REG_STATUS, d); check(d[2] == 0, "overflow cleared");
    // counter read mux
    axil_read(REG_FIRST_CYC, d);   check(d == first_spike_cycles, "FIRST_CYC");
    axil_read(REG_IMAGE_CYC, d);   check(d == image_cycles, "IMAGE_CYC");
    axil_read(REG_SERVICE_CYC, d); check(d == service_cycles, "SERVICE_CYC");
    axil_read(REG_IMAGE_CNT, d);   check(d == image_count, "IMAGE_CNT");
    axil_read(REG_SYN_EVENTS, d);  check(d == syn_event_count, "SYN_EVENTS");
    axil_read(REG_DROPPED, d);     check(d == dropped_count, "DROPPED");
    axil_read(REG_STALL_CYC, d);   check(d == stall_cycles, "STALL_CYC");
    axil_read(8'hFC, d);           check(d == 0, "unmapped reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write_check(cfg_wr_t c, cfg_sel_e sel, logic [19:0] a, logic [31:0] d);
    check(c.sel == sel && c.addr == a && c.data == d, "config write fields");
  endtask
endmodule
