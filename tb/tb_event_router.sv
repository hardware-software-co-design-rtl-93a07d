// tb_event_router: random traffic through a 16-entry queue with a slow, bursty reader.
// Checks that events leave in arrival order and unchanged, that in_ready falls exactly
// when 16 events are held, that 'stall' flags each refused offer, and that the queue
// both filled and emptied during the run.
module tb_event_router;
  import snn_pkg::*;

  localparam int unsigned DEPTH = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  spike_ev_t in_ev, out_ev;
  logic in_valid, in_ready, out_valid, out_ready, stall;
  logic [$clog2(DEPTH):0] level;

  event_router #(.FIFO_DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_stall = 0, held = 0;
  spike_ev_t model[$];

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
    in_valid = 0; out_ready = 0; in_ev = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      in_valid  = $urandom_range(0, 1);
      in_ev     = spike_ev_t'($urandom);
      out_ready = (cyc % 2000 < 1000) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      #1;
      check(in_ready == (model.size() < DEPTH), "in_ready tracks occupancy");
      check(out_valid == (model.size() > 0), "out_valid tracks occupancy");
      check(stall == (in_valid && model.size() == DEPTH), "stall flag");
      check(int'(level) == model.size(), "level");
      if (model.size() == DEPTH) n_full++;
      if (stall) n_stall++;
      if (out_valid && out_ready) begin
        check(out_ev == model[0], "in-order data");
        void'(model.pop_front());
      end
      if (in_valid && in_ready) model.push_back(in_ev);
    end
    check(n_full > 10 && n_stall > 10, "queue filled and stalled");
    $display("full=%0d stalls=%0d", n_full, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
