// tb_ttfs_decoder: random images of output spikes (inside and outside the class
// populations, with many ties on the first spike time) are decoded and the result of
// each image is compared with the readout rule computed here: earliest first spike,
// then more neurons at that time, then lower class. Two layouts are used: the default
// 10 x 15 from id 784, and 4 x 3 from id 10. Also checks the result stream word, that a
// held-off stream reports overflow, and the one-cycle decision latency after the EOI.
module tb_ttfs_decoder;
  import snn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NID_W-1:0] out_base;
  logic [7:0] class_size;
  logic [CLS_W:0] num_classes;
  spike_ev_t in_ev;
  logic in_valid, class_spike, done, m_axis_tvalid, m_axis_tlast, m_axis_tready, overflow;
  result_t res;
  logic [31:0] m_axis_tdata;

  ttfs_decoder dut (.*);

  int checks = 0, failures = 0, n_ovf = 0, n_nospike = 0, n_tiebreak = 0;

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
    in_valid = 0; in_ev = '0; m_axis_tready = 1;
    out_base = 11'd784; class_size = 8'd15; num_classes = 5'd10;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int img = 0; img < 400; img++) begin
      int ft[16], cn[16];
      bit sn[16];
      int t, nsp, base, csz, ncl, hits;
      int wl, wt, wc;
      bit ws;
      if (img == 200) begin out_base = 11'd10; class_size = 8'd3; num_classes = 5'd4; end
      if (img >= 300) m_axis_tready = 0;
      t = 0; hits = 0;
      base = int'(out_base); csz = int'(class_size); ncl = int'(num_classes);
      for (int c = 0; c < 16; c++) begin sn[c] = 0; ft[c] = 0; cn[c] = 0; end
      nsp = (img % 17 == 0) ? 0 : $urandom_range(1, 30);
      for (int k = 0; k < nsp; k++) begin
        int id;
        @(negedge clk);
        if ($urandom_range(0, 2) == 0) t += 1;
        id = ($urandom_range(0, 4) == 0) ? $urandom_range(0, 2047)
                                         : base + $urandom_range(0, ncl * csz - 1);
        in_valid = 1; in_ev.eoi = 0; in_ev.id = NID_W'(id); in_ev.t = T_W'(t);
        #1;
        if (id >= base && id < base + ncl * csz) begin
          int c;
          c = (id - base) / csz;
          hits++;
          check(class_spike, "class spike flagged");
          if (!sn[c] || t < ft[c]) begin sn[c] = 1; ft[c] = t; cn[c] = 1; end
          else if (t == ft[c]) cn[c]++;
        end else check(!class_spike, "non-output spike ignored");
      end
      @(negedge clk);
      in_valid = 1; in_ev = '{eoi: 1'b1, t: '0, id: '0};
      ws = 1; wl = 0; wt = 0; wc = 0;
      for (int c = 0; c < ncl; c++)
        if (sn[c] && (ws || ft[c] < wt || (ft[c] == wt && cn[c] > wc))) begin
          ws = 0; wl = c; wt = ft[c]; wc = cn[c];
        end
      for (int c = 0; c < ncl; c++) if (sn[c] && c != wl && ft[c] == wt) begin n_tiebreak++; break; end
      @(negedge clk);
      in_valid = 0;
      if (res.label != CLS_W'(wl) && failures < 3) begin
        $display("img %0d exp label %0d t %0d c %0d got %0d t %0d c %0d", img, wl, wt, wc, res.label, res.first_t, res.win_count);
        for (int c = 0; c < ncl; c++) $display("  c%0d sn %0d ft %0d cn %0d", c, sn[c], ft[c], cn[c]);
      end
      check(done, "decision one cycle after EOI");
      check(res.no_spike == ws && res.label == CLS_W'(wl), "label");
      if (!ws) check(res.first_t == T_W'(wt) && res.win_count == 8'(wc), "first time and count");
      check(m_axis_tvalid && m_axis_tdata == {res.first_t, res.win_count, 7'b0, res.no_spike, 4'b0, res.label},
            "result stream word");
      if (ws) n_nospike++;
      if (overflow) n_ovf++;
    end
    check(n_ovf == 100, "overflow for each replaced result");
    check(n_nospike > 10 && n_tiebreak > 10, "no-spike and tie cases exercised");
    $display("nospike=%0d ties=%0d ovf=%0d", n_nospike, n_tiebreak, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
