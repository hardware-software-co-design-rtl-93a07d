// pl_counters: on-chip cycle counters that time the programmable-logic path alone.
//
// Three latencies are measured, in clock cycles, for every image:
//   first_spike_cycles  from the cycle the image's first word is accepted at the stream
//                       input to the cycle its first output-population spike reaches the
//                       decoder (the pipeline-fill latency);
//   image_cycles        from that first word to the cycle the decoder's result is ready;
//   service_cycles      between this image's result and the previous one (the
//                       steady-state service interval once the pipeline is full).
// Images may overlap in the pipeline, so the start cycle of each image in flight is
// kept in a small FIFO of MAX_INFLIGHT entries, pushed at image start and popped at its
// result. When the FIFO is full 'start_ok' falls and the ingress holds back the next
// image. Event counters count images, synaptic events, dropped input spikes and input
// stall cycles. 'clear' zeroes every counter (the in-flight FIFO is kept). All counters
// are 32 bits and wrap. The source states that PL cycle counters report the
// first-output-spike latency and the steady-state service latency; how they are
// delimited here is this design's choice.
module pl_counters #(
  parameter int unsigned MAX_INFLIGHT = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        img_start,
  input  logic        out_spike,
  input  logic        img_done,
  input  logic        syn_event,
  input  logic        dropped,
  input  logic        stall,
  output logic        start_ok,
  output logic        busy,
  output logic [31:0] first_spike_cycles,
  output logic [31:0] image_cycles,
  output logic [31:0] service_cycles,
  output logic [31:0] image_count,
  output logic [31:0] syn_event_count,
  output logic [31:0] dropped_count,
  output logic [31:0] stall_cycles
);

  localparam int unsigned AW = (MAX_INFLIGHT > 1) ? $clog2(MAX_INFLIGHT) : 1;

  logic [31:0]   now;
  logic [31:0]   start_q [MAX_INFLIGHT];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   n_inflight;
  logic          got_first, have_prev;
  logic [31:0]   prev_done;

  assign start_ok = n_inflight != (AW+1)'(MAX_INFLIGHT);
  assign busy     = n_inflight != '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now                <= '0;
      wp                 <= '0;
      rp                 <= '0;
      n_inflight         <= '0;
      got_first          <= 1'b0;
      have_prev          <= 1'b0;
      prev_done          <= '0;
      first_spike_cycles <= '0;
      image_cycles       <= '0;
      service_cycles     <= '0;
      image_count        <= '0;
      syn_event_count    <= '0;
      dropped_count      <= '0;
      stall_cycles       <= '0;
      for (int i = 0; i < MAX_INFLIGHT; i++) start_q[i] <= '0;
    end else begin
      now <= now + 1;
      if (img_start && start_ok) begin
        start_q[wp] <= now;
        wp          <= (wp == AW'(MAX_INFLIGHT-1)) ? '0 : wp + 1'b1;
      end
      if (img_done && busy)
        rp <= (rp == AW'(MAX_INFLIGHT-1)) ? '0 : rp + 1'b1;
      n_inflight <= n_inflight + (AW+1)'(img_start && start_ok) - (AW+1)'(img_done && busy);

      if (out_spike && !got_first && busy) begin
        got_first          <= 1'b1;
        first_spike_cycles <= now - start_q[rp];
      end
      if (img_done) got_first <= 1'b0;

      if (clear) begin
        first_spike_cycles <= '0;
        image_cycles       <= '0;
        service_cycles     <= '0;
        image_count        <= '0;
        syn_event_count    <= '0;
        dropped_count      <= '0;
        stall_cycles       <= '0;
        have_prev          <= 1'b0;
      end else begin
        if (img_done && busy) begin
          image_cycles <= now - start_q[rp];
          image_count  <= image_count + 1;
          have_prev    <= 1'b1;
          prev_done    <= now;
          if (have_prev) service_cycles <= now - prev_done;
        end
        if (syn_event) syn_event_count <= syn_event_count + 1;
        if (dropped)   dropped_count   <= dropped_count + 1;
        if (stall)     stall_cycles    <= stall_cycles + 1;
      end
    end
  end

endmodule
