// tb_synapse_router: the connectivity memories are modelled here as arrays with a
// one-cycle read. A stream of spikes with random fan-outs (0..6) and end-of-image
// markers goes in; every synaptic event that comes out is compared, in order, with the
// list built from the same tables. With the input always valid, the gap between two
// accepted spikes must be F+1 cycles (2 for F = 0): one synaptic event per cycle.
module tb_synapse_router;
  import snn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  spike_ev_t in_ev;
  logic in_valid, in_ready;
  logic [NID_W-1:0] conn_raddr;
  conn_desc_t conn_rdata;
  logic [SYN_AW-1:0] syn_raddr;
  synapse_t syn_rdata;
  syn_ev_t out_ev;
  logic out_valid, busy;

  synapse_router dut (.*);

  conn_desc_t conn_m [2048];
  synapse_t   syn_m  [16384];
  always_ff @(posedge clk) begin
    conn_rdata <= conn_m[conn_raddr];
    syn_rdata  <= syn_m[syn_raddr[13:0]];
  end

  int checks = 0, failures = 0;
  syn_ev_t exp_q[$];
  spike_ev_t stim[$];

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

  // output checker
  always @(negedge clk) if (rst_n && out_valid) begin
    syn_ev_t e;
    if (exp_q.size() == 0) begin
      check(0, "unexpected output");
    end else begin
      e = exp_q.pop_front();
      check(out_ev.eoi == e.eoi, "eoi order");
      if (!e.eoi) check(out_ev.target == e.target && out_ev.w == e.w && out_ev.t == e.t,
                        "synaptic event");
    end
  end

  int last_acc, last_gap, n_acc, cyc;
  bit last_eoi;
  always @(posedge clk) cyc++;
  task automatic note_accept();
    if (n_acc > 0 && !last_eoi && !in_ev.eoi && gap_mode) begin
      check(cyc - last_acc == last_gap, "spike service time F+1");
      if (cyc - last_acc != last_gap && failures < 5) $display("gap %0d exp %0d", cyc - last_acc, last_gap);
    end
    last_acc = cyc;
    last_gap = (conn_m[in_ev.id].count > 1 ? int'(conn_m[in_ev.id].count) : 1) + 1;
    last_eoi = in_ev.eoi;
    n_acc++;
  endtask

  bit gap_mode;
  initial begin
    int base = 0;
    gap_mode = 1; n_acc = 0;
    for (int s = 0; s < 2048; s++) begin
      conn_m[s].count = FAN_W'($urandom_range(0, 6));
      conn_m[s].base  = SYN_AW'(base);
      base += conn_m[s].count;
    end
    for (int i = 0; i < 16384; i++) begin
      syn_m[i].target = NID_W'($urandom);
      syn_m[i].w      = W_W'($urandom);
    end
    in_valid = 0; in_ev = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int img = 0; img < 30; img++) begin
      int nspk;
      nspk = $urandom_range(0, 40);
      for (int k = 0; k < nspk; k++) begin
        spike_ev_t ev;
        ev.eoi = 0; ev.id = NID_W'($urandom_range(0, 2047)); ev.t = T_W'(k);
        stim.push_back(ev);
        for (int j = 0; j < int'(conn_m[ev.id].count); j++) begin
          syn_ev_t se;
          se.eoi = 0; se.t = ev.t;
          se.target = syn_m[conn_m[ev.id].base + SYN_AW'(j)].target;
          se.w      = syn_m[conn_m[ev.id].base + SYN_AW'(j)].w;
          exp_q.push_back(se);
        end
      end
      stim.push_back('{eoi: 1'b1, t: '0, id: '0});
      exp_q.push_back('{eoi: 1'b1, t: '0, target: '0, w: '0});
    end
    // drive: always valid for the first half, random gaps afterwards
    while (stim.size() > 0) begin
      if (stim.size() < 300) gap_mode = 0;
      in_ev    = stim[0];
      in_valid = gap_mode ? 1'b1 : ($urandom_range(0, 2) != 0);
      #1;
      if (in_valid && in_ready) begin note_accept(); void'(stim.pop_front()); end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (20) @(negedge clk);
    check(exp_q.size() == 0, "all expected events delivered");
    check(!busy, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
