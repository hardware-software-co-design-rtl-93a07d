// tb_connectivity_table: loads descriptors and synapses through the configuration
// port, including writes aimed at other memories that must not land, then reads random
// addresses back and checks the data one cycle after the address (synchronous read).
module tb_connectivity_table;
  import snn_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic [NID_W-1:0] conn_raddr;
  conn_desc_t conn_rdata;
  logic [SYN_AW-1:0] syn_raddr;
  synapse_t syn_rdata;

  connectivity_table dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] conn_ref [2048];
  logic [31:0] syn_ref  [4096];

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

  initial begin
    cfg = '0; conn_raddr = '0; syn_raddr = '0;
    @(negedge clk);
    for (int i = 0; i < 2048; i++) begin
      conn_ref[i] = {12'($urandom_range(0, 4095)), 3'b0, 17'($urandom)};
      cfg.we = 1; cfg.sel = CFG_CONN; cfg.addr = 20'(i); cfg.data = conn_ref[i];
      @(negedge clk);
    end
    // synapses at the low 4096 entries and a few at the top of the memory
    for (int i = 0; i < 4096; i++) begin
      syn_ref[i] = {8'h0, 8'($urandom), 5'h0, 11'($urandom)};
      cfg.we = 1; cfg.sel = CFG_SYN; cfg.addr = 20'(i < 4000 ? i : SYN_DEPTH_DEF - 4096 + i);
      cfg.data = syn_ref[i];
      @(negedge clk);
    end
    // threshold writes must not disturb either memory
    for (int i = 0; i < 64; i++) begin
      cfg.we = 1; cfg.sel = CFG_THR; cfg.addr = 20'(i); cfg.data = 32'hFFFF_FFFF;
      @(negedge clk);
    end
    cfg.we = 0;
    for (int k = 0; k < 3000; k++) begin
      int ca, sa, si;
      ca = $urandom_range(0, 2047);
      si = $urandom_range(0, 4095);
      sa = si < 4000 ? si : SYN_DEPTH_DEF - 4096 + si;
      conn_raddr = NID_W'(ca);
      syn_raddr  = SYN_AW'(sa);
      @(negedge clk);
      check(conn_rdata.base == conn_ref[ca][16:0] && conn_rdata.count == conn_ref[ca][31:20],
            "descriptor readback");
      check(syn_rdata.target == syn_ref[si][10:0] && syn_rdata.w == syn_ref[si][23:16],
            "synapse readback");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
