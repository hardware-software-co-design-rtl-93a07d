// tb_spike_drop: input-sparsity stress at the default size. The 784 -> 150 network of
// the end-to-end test (pseudo-random weights, 10 x 15 output populations) is loaded
// through AXI4-Lite; then one 160-spike image is sent four times, with 0, 25, 50 and
// 75 % of its spikes removed. Every decision is compared with the reference model, and
// each run must cost exactly one synaptic event per kept spike and synapse, with an
// image latency of kept*(F+1)+6 cycles.
module tb_spike_drop;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int NIN = 784, NOUT = 150, BASE = 784, CSZ = 15, NCL = 10;

  logic aclk = 0, aresetn = 0;
  always #6.25 aclk = ~aclk;   // 80 MHz

  logic [7:0]  s_axil_awaddr, s_axil_araddr;
  logic        s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic [3:0]  s_axil_wstrb;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic        s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
  logic        s_axil_rvalid, s_axil_rready;
  logic [31:0] s_axis_tdata, m_axis_tdata;
  logic        s_axis_tvalid, s_axis_tlast, s_axis_tready;
  logic        m_axis_tvalid, m_axis_tlast, m_axis_tready;

  snn_accel_top dut (.*);

  int checks = 0, failures = 0;
  int n_nospike = 0, n_tie = 0, n_leak_img = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #100ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- network tables ----------------
  int perm_a[NIN], perm_b[NIN];
  int tgt[NIN][NOUT];
  byte wt[NIN][NOUT];
  int thr[NOUT];
  int coprime[8] = '{1, 7, 11, 13, 17, 19, 23, 29};

  function automatic int target_of(int s, int j);
    return tgt[s][j];
  endfunction

  // ---------------- AXI4-Lite master ----------------
  task automatic axil_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge aclk);
    s_axil_awaddr = a; s_axil_awvalid = 1; s_axil_wdata = d; s_axil_wvalid = 1;
    do begin #1; if (s_axil_awready) break; @(negedge aclk); end while (1);
    @(negedge aclk);
    s_axil_awvalid = 0; s_axil_wvalid = 0;
  endtask

  task automatic axil_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge aclk);
    s_axil_araddr = a; s_axil_arvalid = 1;
    do begin #1; if (s_axil_arready) break; @(negedge aclk); end while (1);
    @(negedge aclk);
    s_axil_arvalid = 0;
    do begin #1; if (s_axil_rvalid) break; @(negedge aclk); end while (1);
    d = s_axil_rdata;
  endtask

  // ---------------- images and reference ----------------
  typedef struct { int n; int id[$]; int t[$]; } image_t;
  logic [32:0] words[$];          // {tlast, tdata} waiting to be streamed
  result_t     exp_res[$];        // expected results, in order
  bit          check_stream = 1;
  int          leak_now = 0;

  function automatic result_t reference(image_t im, int leak);
    int v[NOUT], tl[NOUT], ft[NCL], cn[NCL];
    bit tc[NOUT], fd[NOUT], sn[NCL];
    result_t r;
    int tie_classes;
    for (int n = 0; n < NOUT; n++) begin v[n] = 0; tl[n] = 0; tc[n] = 0; fd[n] = 0; end
    for (int c = 0; c < NCL; c++) begin sn[c] = 0; ft[c] = 0; cn[c] = 0; end
    for (int k = 0; k < im.n; k++)
      for (int j = 0; j < NOUT; j++) begin
        int n, c;
        n = target_of(im.id[k], j);
        if (lif_step(v[n], tl[n], tc[n], fd[n], int'(wt[im.id[k]][j]), im.t[k], thr[n], leak)) begin
          c = n / CSZ;
          if (!sn[c] || im.t[k] < ft[c]) begin sn[c] = 1; ft[c] = im.t[k]; cn[c] = 1; end
          else if (im.t[k] == ft[c]) cn[c]++;
        end
      end
    r = '0; r.no_spike = 1;
    for (int c = 0; c < NCL; c++)
      if (sn[c] && (r.no_spike || ft[c] < int'(r.first_t) ||
                    (ft[c] == int'(r.first_t) && cn[c] > int'(r.win_count)))) begin
        r.no_spike = 0; r.label = CLS_W'(c); r.first_t = T_W'(ft[c]); r.win_count = 8'(cn[c]);
      end
    tie_classes = 0;
    for (int c = 0; c < NCL; c++) if (sn[c] && !r.no_spike && ft[c] == int'(r.first_t)) tie_classes++;
    if (tie_classes > 1) n_tie++;
    if (r.no_spike) n_nospike++;
    return r;
  endfunction

  task automatic send_image(int nspk);
    image_t im;
    bit used[NIN];
    int t;
    for (int p = 0; p < NIN; p++) used[p] = 0;
    im.n = nspk;
    t = 0;
    for (int k = 0; k < nspk; k++) begin
      int p;
      do p = $urandom_range(0, NIN - 1); while (used[p]);
      used[p] = 1;
      if ($urandom_range(0, 2) == 0) t += $urandom_range(1, 3);
      im.id.push_back(p); im.t.push_back(t);
      words.push_back({k == nspk - 1, 8'h00, 8'(t), 5'h0, 11'(p)});
    end
    if (nspk == 0) words.push_back({1'b1, 32'h8000_0000});   // null word closes an empty image
    exp_res.push_back(reference(im, leak_now));
    if (leak_now != 0) n_leak_img++;
  endtask

  // ---------------- stream driver ----------------
  always @(negedge aclk) begin
    s_axis_tvalid <= 1'b0;
    if (aresetn && words.size() > 0) begin
      {s_axis_tlast, s_axis_tdata} <= words[0];
      s_axis_tvalid <= $urandom_range(0, 15) != 0;
    end
  end
  always @(posedge aclk) if (aresetn && s_axis_tvalid && s_axis_tready) void'(words.pop_front());

  // ---------------- monitors ----------------
  int n_results = 0;
  always @(negedge aclk) if (aresetn) begin
    if (dut.res_done) begin
      if (exp_res.size() == 0) check(0, "unexpected result");
      else begin
        result_t e;
        e = exp_res.pop_front();
        check(dut.res.no_spike == e.no_spike && dut.res.label == e.label, "label");
        if (!e.no_spike) check(dut.res.first_t == e.first_t && dut.res.win_count == e.win_count,
                               "first spike time and population count");
        if (check_stream)
          check(m_axis_tvalid && m_axis_tdata[8:0] == {e.no_spike, 4'b0, e.label}, "result stream word");
      end
      n_results++;
    end
  end

  task automatic wait_results(int n);
    while (n_results < n) @(negedge aclk);
  endtask

  initial begin
    logic [31:0] d;
    int k_fix, img_lat, fs_lat, sent;
    s_axil_awaddr = 0; s_axil_awvalid = 0; s_axil_wdata = 0; s_axil_wvalid = 0; s_axil_wstrb = 4'hF;
    s_axil_bready = 1; s_axil_araddr = 0; s_axil_arvalid = 0; s_axil_rready = 1;
    m_axis_tready = 1;
    for (int s = 0; s < NIN; s++) begin
      perm_a[s] = coprime[$urandom_range(0, 7)];
      perm_b[s] = $urandom_range(0, NOUT - 1);
      for (int j = 0; j < NOUT; j++) wt[s][j] = byte'($urandom_range(0, 47) - 16);
      // a permutation of the 150 outputs; the first 16 sources instead hit each of
      // their targets twice in a row, which makes back-to-back updates of one neuron
      for (int j = 0; j < NOUT; j++)
        tgt[s][j] = (s < 16 && j % 2 == 1) ? tgt[s][j-1] : (j * perm_a[s] + perm_b[s]) % NOUT;
    end
    for (int n = 0; n < NOUT; n++) thr[n] = $urandom_range(150, 450);
    repeat (4) @(negedge aclk);
    aresetn = 1;

    // ---- load the model ----
    axil_write(REG_CFG_SEL, 32'(CFG_CONN));
    axil_write(REG_CFG_ADDR, 32'd0);
    for (int s = 0; s < 2048; s++)
      axil_write(REG_CFG_DATA, s < NIN ? {12'(NOUT), 3'b0, 17'(s * NOUT)} : 32'd0);
    axil_write(REG_CFG_SEL, 32'(CFG_SYN));
    axil_write(REG_CFG_ADDR, 32'd0);
    for (int s = 0; s < NIN; s++)
      for (int j = 0; j < NOUT; j++)
        axil_write(REG_CFG_DATA, {8'h0, 8'(wt[s][j]), 5'h0, 11'(BASE + target_of(s, j))});
    axil_write(REG_CFG_SEL, 32'(CFG_THR));
    axil_write(REG_CFG_ADDR, 32'(BASE));
    for (int n = 0; n < NOUT; n++) axil_write(REG_CFG_DATA, 32'(thr[n]));
    axil_read(REG_OUT_BASE, d);    check(d == BASE, "default output base");
    axil_read(REG_NUM_CLASSES, d); check(d == NCL, "default class count");
    axil_read(REG_CLASS_SIZE, d);  check(d == CSZ, "default class size");
    $display("model loaded at %0t", $time);

    // ---- one image at 0 / 25 / 50 / 75 % input spike drop ----
    begin
      int base_ids[$], base_t[$];
      int t = 0, syn_before, syn_after;
      bit used[NIN];
      for (int p = 0; p < NIN; p++) used[p] = 0;
      for (int k = 0; k < 160; k++) begin
        int p;
        do p = $urandom_range(0, NIN - 1); while (used[p]);
        used[p] = 1;
        if ($urandom_range(0, 2) == 0) t += $urandom_range(1, 3);
        base_ids.push_back(p); base_t.push_back(t);
      end
      sent = 0;
      for (int drop = 0; drop <= 75; drop += 25) begin
        image_t im;
        int kept;
        axil_read(REG_SYN_EVENTS, d); syn_before = int'(d);
        im.n = 0;
        for (int k = 0; k < 160; k++)
          if ((k * 37 + 11) % 100 >= drop) begin   // deterministic, spread-out selection
            im.id.push_back(base_ids[k]); im.t.push_back(base_t[k]); im.n++;
          end
        kept = im.n;
        for (int k = 0; k < kept; k++)
          words.push_back({k == kept - 1, 8'h00, 8'(im.t[k]), 5'h0, 11'(im.id[k])});
        exp_res.push_back(reference(im, leak_now));
        sent++;
        wait_results(sent);
        axil_read(REG_SYN_EVENTS, d); syn_after = int'(d);
        check(syn_after - syn_before == kept * NOUT, "synaptic events = kept spikes x fan-out");
        axil_read(REG_IMAGE_CYC, d);
        check(int'(d) == kept * (NOUT + 1) + 6, "image latency for the kept spikes");
        axil_read(REG_RESULT, d);
        $display("drop %0d%%: %0d spikes kept, label %0d, no_spike %0d, first spike at t=%0d, %0d cycles",
                 drop, kept, d[3:0], d[8], d[31:24], kept * (NOUT + 1) + 6);
      end
    end

    check(exp_res.size() == 0, "all results received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
