// tb_axi_ingress: streams images of random spike words (some null, some with ids out
// of range, some images empty) with random TVALID and random downstream ready, and
// compares the unpacked events with a list built from the words: one spike event per
// valid word and exactly one end-of-image marker per TLAST, in order. Also checks
// 'img_start' once per image, 'dropped' per out-of-range word, and that start_ok = 0
// holds back the first word of an image.
module tb_axi_ingress;
  import snn_pkg::*;

  localparam int unsigned NN = 1000;  // address space smaller than the id field

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] s_axis_tdata;
  logic s_axis_tvalid, s_axis_tlast, s_axis_tready, start_ok, img_start, dropped;
  spike_ev_t out_ev;
  logic out_valid, out_ready;

  axi_ingress #(.NUM_NEURONS(NN)) dut (.*);

  int checks = 0, failures = 0, n_start = 0, n_drop = 0, exp_start = 0, exp_drop = 0;
  int held_back = 0;
  spike_ev_t exp_q[$];
  logic [32:0] words[$];   // {tlast, tdata}

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
    bit in_img;
    for (int img = 0; img < 200; img++) begin
      int n;
      n = $urandom_range(1, 12);
      exp_start++;
      for (int k = 0; k < n; k++) begin
        logic [31:0] w;
        bit last;
        int id;
        last = (k == n - 1);
        id   = $urandom_range(0, 2047);
        w    = {1'b0, 7'($urandom), 8'($urandom), 5'($urandom), 11'(id)};
        if ($urandom_range(0, 7) == 0) w[31] = 1'b1;
        words.push_back({last, w});
        if (!w[31]) begin
          if (id < NN) exp_q.push_back('{eoi: 1'b0, t: w[23:16], id: 11'(id)});
          else exp_drop++;
        end
        if (last) exp_q.push_back('{eoi: 1'b1, t: '0, id: '0});
      end
    end
    s_axis_tvalid = 0; s_axis_tlast = 0; s_axis_tdata = 0; out_ready = 0; start_ok = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    in_img = 0;
    while (words.size() > 0 || exp_q.size() > 0) begin
      @(negedge clk);
      s_axis_tvalid = (words.size() > 0) && ($urandom_range(0, 3) != 0);
      if (words.size() > 0) {s_axis_tlast, s_axis_tdata} = words[0];
      out_ready = $urandom_range(0, 3) != 0;
      start_ok  = $urandom_range(0, 4) != 0;
      #1;
      if (s_axis_tvalid && !in_img && !start_ok) begin
        check(!s_axis_tready, "first word held back while start_ok = 0");
        held_back++;
      end
      if (out_valid && out_ready) begin
        if (exp_q.size() == 0) check(0, "unexpected event");
        else begin
          check(out_ev.eoi == exp_q[0].eoi, "eoi position");
          if (!out_ev.eoi) check(out_ev.id == exp_q[0].id && out_ev.t == exp_q[0].t, "event fields");
          void'(exp_q.pop_front());
        end
      end
      if (img_start) n_start++;
      if (dropped) n_drop++;
      if (s_axis_tvalid && s_axis_tready) begin
        in_img = !s_axis_tlast;
        void'(words.pop_front());
      end
    end
    check(n_start == exp_start, "one img_start per image");
    check(n_drop == exp_drop, "dropped count");
    check(held_back > 5, "start_ok back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
