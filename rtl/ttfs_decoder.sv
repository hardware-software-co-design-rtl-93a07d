// ttfs_decoder: grouped time-to-first-spike (TTFS) population readout.
//
// The output layer is a set of class populations: num_classes groups of class_size
// consecutive neurons starting at neuron id out_base (10 groups of 15 neurons from id 784
// by default, the MNIST classifier's layout). For every output spike of the core the
// decoder finds the spike's class and keeps, per class, the earliest spike time seen in
// the current image and how many of the class's neurons spiked at that time. On the
// image's end-of-image marker it picks the winner:
//   1. the class with the earliest first spike;
//   2. among classes tied on that time, the one with more neurons spiking at it;
//   3. among classes still tied, the lowest class index.
// If no output neuron spiked, the result carries no_spike = 1 and label 0. The per-class
// state is then cleared for the next image.
//
// Each result is published twice: 'done' pulses for one cycle with 'res' valid (for the
// counters and registers), and the AXI-Stream master m_axis_* offers it to the host as a
// 32-bit word {first_t[31:24], win_count[23:16], 7'b0, no_spike[8], 4'b0, label[3:0]},
// holding TVALID until TREADY. If a new result arrives while the previous one has not
// been taken, the old word is replaced and 'overflow' pulses. The decision comes one
// cycle after the EOI. The class populations follow the source; the tie-break rules,
// the no-spike convention and the output word are this design's choices.
module ttfs_decoder
  import snn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NID_W-1:0]   out_base,
  input  logic [7:0]         class_size,
  input  logic [CLS_W:0]     num_classes,
  input  spike_ev_t          in_ev,
  input  logic               in_valid,
  output logic               class_spike,  // an output-population spike arrived
  output result_t            res,
  output logic               done,
  output logic [31:0]        m_axis_tdata,
  output logic               m_axis_tvalid,
  output logic               m_axis_tlast,
  input  logic               m_axis_tready,
  output logic               overflow
);

  logic [T_W-1:0]         first_t [MAX_CLASSES];
  logic [7:0]             cnt     [MAX_CLASSES];
  logic [MAX_CLASSES-1:0] seen;

  logic [CLS_W-1:0] cls;
  logic             hit;
  logic [NID_W:0]   rel;

  // class of the incoming spike
  always_comb begin
    cls = '0;
    hit = 1'b0;
    rel = {1'b0, in_ev.id} - {1'b0, out_base};
    if (in_valid && !in_ev.eoi && in_ev.id >= out_base) begin
      for (int c = 0; c < MAX_CLASSES; c++) begin
        if (c < int'(num_classes) &&
            int'(rel) >= c * int'(class_size) &&
            int'(rel) <  (c + 1) * int'(class_size)) begin
          cls = CLS_W'(c);
          hit = 1'b1;
        end
      end
    end
    class_spike = hit;
  end

  // winner over the current per-class state
  result_t win;
  always_comb begin
    win          = '0;
    win.no_spike = 1'b1;
    for (int c = 0; c < MAX_CLASSES; c++) begin
      if (seen[c]) begin
        if (win.no_spike || first_t[c] < win.first_t ||
            (first_t[c] == win.first_t && cnt[c] > win.win_count)) begin
          win.no_spike  = 1'b0;
          win.label     = CLS_W'(c);
          win.first_t   = first_t[c];
          win.win_count = cnt[c];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen <= '0;
      for (int c = 0; c < MAX_CLASSES; c++) begin
        first_t[c] <= '0;
        cnt[c]     <= '0;
      end
      res           <= '0;
      done          <= 1'b0;
      m_axis_tdata  <= '0;
      m_axis_tvalid <= 1'b0;
      overflow      <= 1'b0;
    end else begin
      done     <= 1'b0;
      overflow <= 1'b0;
      if (m_axis_tvalid && m_axis_tready) m_axis_tvalid <= 1'b0;
      if (in_valid && in_ev.eoi) begin
        res           <= win;
        done          <= 1'b1;
        seen          <= '0;
        m_axis_tdata  <= {win.first_t, win.win_count, 7'b0, win.no_spike, 4'b0, win.label};
        m_axis_tvalid <= 1'b1;
        overflow      <= m_axis_tvalid && !m_axis_tready;
      end else if (hit) begin
        if (!seen[cls] || in_ev.t < first_t[cls]) begin
          seen[cls]    <= 1'b1;
          first_t[cls] <= in_ev.t;
          cnt[cls]     <= 8'd1;
        end else if (in_ev.t == first_t[cls] && cnt[cls] != 8'hFF) begin
          cnt[cls] <= cnt[cls] + 8'd1;
        end
      end
    end
  end

  assign m_axis_tlast = 1'b1;  // one word per image

  a_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (m_axis_tvalid && !m_axis_tready) |=> m_axis_tvalid);

endmodule
