// event_router: in-order event buffer between the AXI ingress and the synapse router.
//
// Input spike events and end-of-image markers arrive from the ingress at up to one per
// cycle, but the synapse router spends one cycle per synapse of a spike's fan-out (150
// for the MNIST classifier). The router queues events in a FIFO of FIFO_DEPTH entries and
// hands them to the synapse router strictly in arrival order, so an image's EOI always
// leaves after all of its spikes. When the FIFO is full it deasserts in_ready, which
// stalls the AXI stream (back-pressure to the DMA). 'stall' pulses for every cycle an
// offered event is refused. Both sides use valid/ready; out_ev is read combinationally
// from the head entry (first-word fall-through), so an event written in one cycle can
// leave in the next. The source names an "AXI-fed event router" without detailing it:
// the FIFO, its depth and the stall behaviour are this design's choices.
module event_router
  import snn_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 512
) (
  input  logic      clk,
  input  logic      rst_n,
  input  spike_ev_t in_ev,
  input  logic      in_valid,
  output logic      in_ready,
  output spike_ev_t out_ev,
  output logic      out_valid,
  input  logic      out_ready,
  output logic      stall,
  output logic [$clog2(FIFO_DEPTH):0] level
);

  localparam int unsigned AW = $clog2(FIFO_DEPTH);

  spike_ev_t       mem [FIFO_DEPTH];
  logic [AW-1:0]   wr_ptr, rd_ptr;
  logic [AW:0]     count;
  logic            push, pop;

  always_comb begin
    in_ready  = count != (AW+1)'(FIFO_DEPTH);
    out_valid = count != '0;
    out_ev    = mem[rd_ptr];
    push      = in_valid && in_ready;
    pop       = out_valid && out_ready;
    stall     = in_valid && !in_ready;
    level     = count;
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_ev;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(FIFO_DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(FIFO_DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  count <= (AW+1)'(FIFO_DEPTH));

endmodule
