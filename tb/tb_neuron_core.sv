// tb_neuron_core: the full 16 x 128 fabric. Thresholds of all 2,048 neurons are loaded
// through the configuration port; then random synaptic events (half of them aimed at a
// few neurons spread over several groups, so neurons fire and same-neuron updates follow
// each other) and end-of-image markers are applied. Each cycle the output stream is
// compared with the reference LIF model's prediction from two cycles earlier: global
// neuron id and spike time, and the EOI marker in its place in the stream.
module tb_neuron_core;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int unsigned NN = NUM_NEURONS_DEF;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic [LEAK_W-1:0] leak;
  syn_ev_t in_ev;
  logic in_valid, out_valid, bypass_hit;
  spike_ev_t out_ev;

  neuron_core dut (.*);

  int checks = 0, failures = 0, spikes = 0, bypasses = 0, groups_fired = 0;
  int v[NN], tl[NN], thr[NN];
  bit touched[NN], fired[NN];
  bit [15:0] gmask;
  bit ev_v[3], ev_e[3]; int ev_id[3], ev_t[3];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step_check();
    check(out_valid == (ev_v[2] || ev_e[2]), "output valid");
    if (out_valid) begin
      check(out_ev.eoi == ev_e[2], "EOI position");
      if (ev_v[2]) begin
        check(out_ev.id == NID_W'(ev_id[2]) && out_ev.t == T_W'(ev_t[2]), "spike id/time");
        spikes++;
        gmask[ev_id[2] / 128] = 1'b1;
      end
    end
    ev_v[2] = ev_v[1]; ev_e[2] = ev_e[1]; ev_id[2] = ev_id[1]; ev_t[2] = ev_t[1];
    ev_v[1] = 0; ev_e[1] = 0;
  endtask

  initial begin
    int hot[8];
    cfg = '0; leak = 0; in_valid = 0; in_ev = '0; gmask = '0;
    for (int i = 0; i < 3; i++) begin ev_v[i] = 0; ev_e[i] = 0; end
    for (int i = 0; i < 8; i++) hot[i] = i * 257 + 3;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NN; i++) begin
      @(negedge clk);
      thr[i] = 30 + (i % 5) * 20;
      cfg.we = 1; cfg.sel = CFG_THR; cfg.addr = 20'(i); cfg.data = 32'(thr[i]);
    end
    @(negedge clk);
    cfg.we = 0;
    for (int i = 0; i < NN; i++) begin touched[i] = 0; fired[i] = 0; v[i] = 0; tl[i] = 0; end
    for (int img = 0; img < 30; img++) begin
      int t;
      t = 0;
      leak = LEAK_W'(img % 3);
      for (int e = 0; e < 400; e++) begin
        int a, w;
        @(negedge clk);
        step_check();
        if ($urandom_range(0, 3) == 0) t++;
        if ($urandom_range(0, 7) == 0) begin in_valid = 0; continue; end
        a = ($urandom_range(0, 1) == 0) ? hot[$urandom_range(0, 7)] : $urandom_range(0, NN - 1);
        w = $urandom_range(0, 70) - 20;
        in_valid = 1;
        in_ev = '{eoi: 1'b0, t: T_W'(t), target: NID_W'(a), w: W_W'(w)};
        ev_v[1] = lif_step(v[a], tl[a], touched[a], fired[a], w, t, thr[a], int'(leak));
        ev_id[1] = a; ev_t[1] = t;
        #1 if (bypass_hit) bypasses++;
      end
      @(negedge clk);
      step_check();
      in_valid = 1; in_ev = '{eoi: 1'b1, t: '0, target: '0, w: '0};
      ev_e[1] = 1;
      for (int i = 0; i < NN; i++) begin touched[i] = 0; fired[i] = 0; end
    end
    @(negedge clk); step_check(); in_valid = 0;
    @(negedge clk); step_check();
    @(negedge clk); step_check();
    for (int g = 0; g < 16; g++) groups_fired += int'(gmask[g]);
    check(spikes > 200, "enough spikes");
    check(groups_fired >= 8, "spikes from many groups");
    check(bypasses > 50, "bypass exercised");
    $display("spikes=%0d groups=%0d bypasses=%0d", spikes, groups_fired, bypasses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
