// tb_pl_counters: random image starts, output spikes, results and event pulses, with
// up to three images in flight (MAX_INFLIGHT = 3). A cycle-accurate model kept here
// (start times in a queue, latencies as cycle differences) predicts every counter
// after every cycle. Also checks that start_ok falls when three images are in flight
// and that 'clear' zeroes the counters.
module tb_pl_counters;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, img_start, out_spike, img_done, syn_event, dropped, stall, start_ok, busy;
  logic [31:0] first_spike_cycles, image_cycles, service_cycles, image_count,
               syn_event_count, dropped_count, stall_cycles;

  pl_counters #(.MAX_INFLIGHT(3)) dut (.*);

  int checks = 0, failures = 0, n_full = 0;
  int q[$];
  int m_fs, m_img, m_srv, m_cnt, m_syn, m_drop, m_stall, m_prev;
  bit m_got, m_have_prev;

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
    {clear, img_start, out_spike, img_done, syn_event, dropped, stall} = '0;
    {m_fs, m_img, m_srv, m_cnt, m_syn, m_drop, m_stall, m_prev} = '0;
    m_got = 0; m_have_prev = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 30000; cyc++) begin
      @(negedge clk);
      check(start_ok == (q.size() < 3), "start_ok");
      check(busy == (q.size() > 0), "busy");
      check(first_spike_cycles == 32'(m_fs) && image_cycles == 32'(m_img) &&
            service_cycles == 32'(m_srv) && image_count == 32'(m_cnt), "latency counters");
      check(syn_event_count == 32'(m_syn) && dropped_count == 32'(m_drop) &&
            stall_cycles == 32'(m_stall), "event counters");
      if (q.size() == 3) n_full++;
      img_start = $urandom_range(0, 30) == 0;
      out_spike = $urandom_range(0, 10) == 0;
      img_done  = $urandom_range(0, 40) == 0;
      syn_event = $urandom_range(0, 1);
      dropped   = $urandom_range(0, 20) == 0;
      stall     = $urandom_range(0, 5) == 0;
      clear     = $urandom_range(0, 3000) == 0;
      // model of this cycle (clock edge at the end of the cycle)
      if (out_spike && !m_got && q.size() > 0) begin m_got = 1; m_fs = cyc - q[0]; end
      if (img_done) m_got = 0;
      if (clear) begin
        {m_fs, m_img, m_srv, m_cnt, m_syn, m_drop, m_stall} = '0;
        m_have_prev = 0;
        if (img_done && q.size() > 0) void'(q.pop_front());
      end else begin
        if (img_done && q.size() > 0) begin
          m_img = cyc - q.pop_front();
          m_cnt++;
          if (m_have_prev) m_srv = cyc - m_prev;
          m_have_prev = 1;
          m_prev = cyc;
        end
        m_syn += int'(syn_event); m_drop += int'(dropped); m_stall += int'(stall);
      end
      if (img_start && start_ok) q.push_back(cyc);
    end
    check(n_full > 100, "in-flight limit reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
