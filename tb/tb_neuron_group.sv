// tb_neuron_group: random synaptic events against the reference LIF model.
// Events are biased towards a few neurons so that back-to-back updates of the same
// neuron (the stage-0 bypass) happen often; end-of-image markers are mixed in. Every
// cycle the spike output is compared with the model's prediction made two cycles
// earlier (the pipeline latency), and the bypass path is required to have been used.
module tb_neuron_group;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int unsigned GS  = 128;
  localparam int unsigned GID = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic [LEAK_W-1:0] leak;
  logic in_valid, in_eoi;
  logic [6:0] in_addr;
  logic signed [W_W-1:0] in_w;
  logic [T_W-1:0] in_t;
  logic spk_valid, bypass_hit;
  logic [6:0] spk_addr;
  logic [T_W-1:0] spk_t;

  neuron_group #(.GROUP_SIZE(GS), .GROUP_ID(GID)) dut (.*);

  int checks = 0, failures = 0, bypasses = 0, spikes = 0;
  int v[GS], tl[GS], thr[GS];
  bit touched[GS], fired[GS];
  // expected output two cycles after input
  bit exp_v[3]; int exp_a[3]; int exp_t[3];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t_now;
    cfg = '0; leak = 0; in_valid = 0; in_eoi = 0; in_addr = 0; in_w = 0; in_t = 0;
    for (int i = 0; i < 3; i++) exp_v[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load thresholds
    for (int i = 0; i < GS; i++) begin
      @(negedge clk);
      thr[i]   = 20 + (i % 7) * 15;
      cfg.we   = 1; cfg.sel = CFG_THR; cfg.addr = 20'(GID * GS + i); cfg.data = 32'(thr[i]);
    end
    @(negedge clk);
    // a write to another group must not land here
    cfg.addr = 20'((GID + 1) * GS + 5); cfg.data = 32'd0;
    @(negedge clk);
    cfg.we = 0;
    for (int i = 0; i < GS; i++) begin touched[i] = 0; fired[i] = 0; v[i] = 0; tl[i] = 0; end

    for (int img = 0; img < 40; img++) begin
      leak  = LEAK_W'(img % 4);
      t_now = 0;
      for (int e = 0; e < 300; e++) begin
        int a, w;
        bit f;
        @(negedge clk);
        // check expected output for this cycle (inputs of two cycles ago)
        check(spk_valid == exp_v[2], "spike valid");
        if (exp_v[2]) check(spk_addr == 7'(exp_a[2]) && spk_t == T_W'(exp_t[2]), "spike id/time");
        if (spk_valid) spikes++;
        exp_v[2] = exp_v[1]; exp_a[2] = exp_a[1]; exp_t[2] = exp_t[1];
        exp_v[1] = 0;
        if ($urandom_range(0, 3) == 0 && t_now < 250) t_now += $urandom_range(1, 3);
        if ($urandom_range(0, 9) == 0) begin in_valid = 0; continue; end
        a = ($urandom_range(0, 1) == 0) ? $urandom_range(0, 3) : $urandom_range(0, GS - 1);
        if (e == 299) a = 5;  // 5 lies in this group; the foreign write above must be ignored
        w = $urandom_range(0, 60) - 20;
        in_valid = 1; in_eoi = 0; in_addr = 7'(a); in_w = W_W'(w); in_t = T_W'(t_now);
        f = lif_step(v[a], tl[a], touched[a], fired[a], w, t_now, thr[a], int'(leak));
        exp_v[1] = f; exp_a[1] = a; exp_t[1] = t_now;
        #1 if (bypass_hit) bypasses++;
      end
      // end of image
      @(negedge clk);
      check(spk_valid == exp_v[2], "spike valid");
      if (exp_v[2]) check(spk_addr == 7'(exp_a[2]) && spk_t == T_W'(exp_t[2]), "spike id/time");
      exp_v[2] = exp_v[1]; exp_a[2] = exp_a[1]; exp_t[2] = exp_t[1]; exp_v[1] = 0;
      in_valid = 0; in_eoi = 1;
      for (int i = 0; i < GS; i++) begin touched[i] = 0; fired[i] = 0; end
      @(negedge clk);
      check(spk_valid == exp_v[2], "spike valid");
      if (exp_v[2]) check(spk_addr == 7'(exp_a[2]) && spk_t == T_W'(exp_t[2]), "spike id/time");
      exp_v[2] = 0; exp_v[1] = 0;
      in_eoi = 0;
    end
    @(negedge clk);
    check(spikes > 100, "enough spikes seen");
    check(bypasses > 100, "bypass path exercised");
    $display("spikes=%0d bypasses=%0d", spikes, bypasses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
