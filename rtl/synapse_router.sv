// synapse_router: expands each input spike into its synaptic events.
//
// For a spike of source s at timestep t the router reads s's descriptor from the
// connectivity table (one cycle), then streams the descriptor's run of synapses out of
// the synapse memory, one per cycle, as syn_ev_t {target, weight, t} towards the neuron
// core. A spike with fan-out F occupies the router for F+1 cycles (one lookup cycle, in
// which the first synapse read is already issued, then F-1 more reads); a spike with no
// synapses takes one cycle. The next spike is accepted while the last read of the
// previous one is still in flight, so back-to-back spikes leave no bubble. An
// end-of-image marker is forwarded once all reads of earlier spikes have returned, which
// keeps the image boundary in order with the synaptic events.
//
// Interface: in_ev/in_valid/in_ready from the event router (valid/ready); synchronous
// read ports of the connectivity table; out_ev/out_valid towards the neuron core, which
// accepts one event every cycle and so needs no ready. out_ev follows the memory read
// by one cycle. The source names a synapse router and its fan-out limit; the
// descriptor-based sequencing is this design's choice.
module synapse_router
  import snn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  spike_ev_t         in_ev,
  input  logic              in_valid,
  output logic              in_ready,
  output logic [NID_W-1:0]  conn_raddr,
  input  conn_desc_t        conn_rdata,
  output logic [SYN_AW-1:0] syn_raddr,
  input  synapse_t          syn_rdata,
  output syn_ev_t           out_ev,
  output logic              out_valid,
  output logic              busy
);

  typedef enum logic [1:0] {S_IDLE, S_LOOKUP, S_FANOUT} state_e;

  state_e            state;
  logic [SYN_AW-1:0] ptr;
  logic [FAN_W-1:0]  remain;
  logic [T_W-1:0]    t_q;
  logic              rd_pending;   // a synapse read issued last cycle returns now
  logic              eoi_q;        // an EOI is presented this cycle
  logic              accept, issue;

  always_comb begin
    in_ready   = (state == S_IDLE) && !(in_ev.eoi && rd_pending);
    accept     = in_valid && in_ready;
    conn_raddr = in_ev.id;
    issue      = 1'b0;
    syn_raddr  = ptr;
    if (state == S_LOOKUP) begin
      syn_raddr = conn_rdata.base;
      issue     = conn_rdata.count != '0;
    end else if (state == S_FANOUT) begin
      issue     = 1'b1;
    end

    out_valid     = rd_pending || eoi_q;
    out_ev.eoi    = eoi_q;
    out_ev.t      = t_q;
    out_ev.target = syn_rdata.target;
    out_ev.w      = syn_rdata.w;
    busy          = (state != S_IDLE) || rd_pending || eoi_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      ptr        <= '0;
      remain     <= '0;
      t_q        <= '0;
      rd_pending <= 1'b0;
      eoi_q      <= 1'b0;
    end else begin
      rd_pending <= issue;
      eoi_q      <= accept && in_ev.eoi;
      unique case (state)
        S_IDLE: begin
          if (accept && !in_ev.eoi) begin
            t_q   <= in_ev.t;
            state <= S_LOOKUP;
          end
        end
        S_LOOKUP: begin
          ptr    <= conn_rdata.base + 1'b1;
          remain <= conn_rdata.count - 1'b1;
          state  <= (conn_rdata.count > FAN_W'(1)) ? S_FANOUT : S_IDLE;
        end
        S_FANOUT: begin
          ptr    <= ptr + 1'b1;
          remain <= remain - 1'b1;
          if (remain == FAN_W'(1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // An EOI never shares a cycle with a synaptic event.
  a_eoi_alone: assert property (@(posedge clk) disable iff (!rst_n) !(eoi_q && rd_pending));

endmodule
