// axi_ingress: AXI4-Stream bridge that unpacks host spike words into spike events.
//
// The host packs each image as a burst of 32-bit words that the DMA streams in; this
// block is the programmable-logic end of that stream. Each word carries one input spike:
// bits [10:0] source neuron id, bits [23:16] TTFS timestep; bit 31 marks a null word that
// carries no spike. TLAST on a word closes the image: the block then emits an
// end-of-image (EOI) marker after that word's spike, so one image reaches the event
// router as its spikes followed by one EOI. A spike word with TLAST needs two output
// beats; TREADY is held low for the one cycle in which the EOI is sent. A spike whose id
// lies outside the NUM_NEURONS address space is dropped and reported on 'dropped'.
//
// 'start_ok' lets the latency counters hold back the first word of a new image when
// they cannot track another image in flight; 'img_start' pulses when the first word of
// an image is accepted. The output handshake is valid/ready; the spike beat is passed
// through combinationally (zero latency), the EOI beat of a TLAST spike word follows one
// cycle later. The word layout and the null/EOI convention are this design's choice; the
// source only names an AXI ingress bridge that unpacks the DMA stream.
module axi_ingress
  import snn_pkg::*;
#(
  parameter int unsigned NUM_NEURONS = NUM_NEURONS_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  // AXI4-Stream slave (from the DMA)
  input  logic [31:0]      s_axis_tdata,
  input  logic             s_axis_tvalid,
  input  logic             s_axis_tlast,
  output logic             s_axis_tready,
  // admission control from the latency counters
  input  logic             start_ok,
  output logic             img_start,
  output logic             dropped,
  // unpacked events
  output spike_ev_t        out_ev,
  output logic             out_valid,
  input  logic             out_ready
);

  logic in_image;   // at least one word of the current image has been accepted
  logic eoi_pend;   // EOI still owed for an accepted TLAST spike word

  logic [NID_W-1:0] word_id;
  logic             word_null, in_range, emits_spike, emits_eoi, emits_any, gate, accept;

  always_comb begin
    word_id     = s_axis_tdata[NID_W-1:0];
    word_null   = s_axis_tdata[IN_NULL_BIT];
    in_range    = 32'(word_id) < NUM_NEURONS;
    emits_spike = !word_null && in_range;
    emits_eoi   = s_axis_tlast && !emits_spike;
    emits_any   = emits_spike || emits_eoi;
    gate        = !eoi_pend && (in_image || start_ok);

    if (eoi_pend) begin
      out_valid     = 1'b1;
      out_ev.eoi    = 1'b1;
      out_ev.t      = '0;
      out_ev.id     = '0;
      s_axis_tready = 1'b0;
    end else begin
      out_valid     = s_axis_tvalid && gate && emits_any;
      out_ev.eoi    = emits_eoi;
      out_ev.t      = s_axis_tdata[16 +: T_W];
      out_ev.id     = emits_eoi ? '0 : word_id;
      s_axis_tready = gate && (out_ready || !emits_any);
    end
    accept    = s_axis_tvalid && s_axis_tready;
    img_start = accept && !in_image;
    dropped   = accept && !word_null && !in_range;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_image <= 1'b0;
      eoi_pend <= 1'b0;
    end else begin
      if (accept) begin
        in_image <= !s_axis_tlast;
        if (s_axis_tlast && emits_spike) eoi_pend <= 1'b1;
      end
      if (eoi_pend && out_ready) eoi_pend <= 1'b0;
    end
  end

  // AXI-Stream rule: once TVALID is high it must stay high until accepted.
  // Checked on the output side, which this block drives.
  property p_out_hold;
    @(posedge clk) disable iff (!rst_n) (out_valid && !out_ready && eoi_pend) |=> out_valid;
  endproperty
  a_out_hold: assert property (p_out_hold);

endmodule
