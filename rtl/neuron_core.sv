// neuron_core: the grouped spike-processing fabric, NUM_GROUPS neuron groups of
// GROUP_SIZE neurons (16 x 128 = 2,048 neurons by default).
//
// A synaptic event's target id splits into a group index (upper bits) and a neuron
// index inside the group (lower bits); the event goes to that group only. Targets beyond
// NUM_GROUPS * GROUP_SIZE are ignored. Every group sees each end-of-image marker and
// resets its neurons on it. Since at most one event enters per cycle, at most one group
// fires per cycle, and the output spike stream is the OR of the groups' registered
// spike outputs, with the group index put back on top of the neuron index. The EOI
// marker is delayed by the same two cycles as a spike so that it leaves after every
// spike of its image.
//
// Timing: an event entering in cycle n produces its spike (if any) in cycle n+2. The
// core accepts one event per cycle and never stalls. Group count and size follow the
// source; the one-event-per-cycle dispatch is this design's choice (the groups could be
// fed in parallel by a wider synapse router).
module neuron_core
  import snn_pkg::*;
#(
  parameter int unsigned NUM_GROUPS = NUM_GROUPS_DEF,
  parameter int unsigned GROUP_SIZE = GROUP_SIZE_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_wr_t           cfg,
  input  logic [LEAK_W-1:0] leak,
  input  syn_ev_t           in_ev,
  input  logic              in_valid,
  output spike_ev_t         out_ev,
  output logic              out_valid,
  output logic              bypass_hit
);

  localparam int unsigned LW = $clog2(GROUP_SIZE);

  logic [NUM_GROUPS-1:0] g_spk, g_byp;
  logic [LW-1:0]         g_addr [NUM_GROUPS];
  logic [T_W-1:0]        g_t    [NUM_GROUPS];
  logic                  in_range;
  logic [1:0]            eoi_d;

  assign in_range = 32'(in_ev.target) < NUM_GROUPS * GROUP_SIZE;

  for (genvar g = 0; g < NUM_GROUPS; g++) begin : gen_group
    logic sel;
    assign sel = in_valid && !in_ev.eoi && in_range &&
                 (32'(in_ev.target) >> LW) == g;
    neuron_group #(.GROUP_SIZE(GROUP_SIZE), .GROUP_ID(g)) u_group (
      .clk       (clk),
      .rst_n     (rst_n),
      .cfg       (cfg),
      .leak      (leak),
      .in_valid  (sel),
      .in_eoi    (in_valid && in_ev.eoi),
      .in_addr   (in_ev.target[LW-1:0]),
      .in_w      (in_ev.w),
      .in_t      (in_ev.t),
      .spk_valid (g_spk[g]),
      .spk_addr  (g_addr[g]),
      .spk_t     (g_t[g]),
      .bypass_hit(g_byp[g])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) eoi_d <= '0;
    else        eoi_d <= {eoi_d[0], in_valid && in_ev.eoi};
  end

  always_comb begin
    out_valid  = (|g_spk) || eoi_d[1];
    out_ev     = '0;
    out_ev.eoi = eoi_d[1];
    bypass_hit = |g_byp;
    for (int g = 0; g < NUM_GROUPS; g++) begin
      if (g_spk[g]) begin
        out_ev.id = NID_W'((g << LW) | int'(g_addr[g]));
        out_ev.t  = g_t[g];
      end
    end
  end

  a_one_spike: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(g_spk));
  a_eoi_alone: assert property (@(posedge clk) disable iff (!rst_n) !(eoi_d[1] && |g_spk));

endmodule
