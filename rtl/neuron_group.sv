// neuron_group: one group of GROUP_SIZE leaky integrate-and-fire neurons with
// time-to-first-spike (TTFS) output.
//
// Each neuron has a membrane word {t_last, v} in a simple-dual-port memory and a
// firing threshold in a second memory, plus two flag bits kept in registers: 'touched'
// (v is valid for this image; an untouched neuron reads as v = 0) and 'fired' (the neuron
// has emitted its single spike of this image). A synaptic event {neuron, weight, t}
// updates one neuron in a two-stage pipeline:
//   stage 0  read membrane word, threshold and flags of the addressed neuron;
//   stage 1  apply the leak for the timesteps elapsed since t_last, add the weight with
//            saturation, write the word back, and fire if the neuron has not fired yet
//            and v >= threshold. The spike {neuron, t} is registered, so it appears two
//            cycles after the event entered.
// Two events for the same neuron in consecutive cycles are handled by a bypass: stage 0
// takes the value stage 1 is writing instead of the stale memory word. The leak is
// linear towards zero, 'leak' units per timestep, applied lazily when a neuron is next
// touched; leak = 0 gives a plain integrate-and-fire neuron. An end-of-image marker
// (in_eoi) clears every 'touched' and 'fired' flag in one cycle, so the next image starts
// from rest without a sweep over the memories. Thresholds are loaded by the host through
// cfg (sel = CFG_THR, addr = global neuron id of this group).
//
// The grouping into 16 x 128 neurons, per-neuron thresholds, the LIF neuron and the
// single first spike per neuron follow the source; the pipeline, the lazy linear leak,
// the flag-based reset and all word widths are this design's choices.
module neuron_group
  import snn_pkg::*;
#(
  parameter int unsigned GROUP_SIZE = GROUP_SIZE_DEF,
  parameter int unsigned GROUP_ID   = 0
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  cfg_wr_t                       cfg,
  input  logic [LEAK_W-1:0]             leak,
  input  logic                          in_valid,
  input  logic                          in_eoi,
  input  logic [$clog2(GROUP_SIZE)-1:0] in_addr,
  input  logic signed [W_W-1:0]         in_w,
  input  logic [T_W-1:0]                in_t,
  output logic                          spk_valid,
  output logic [$clog2(GROUP_SIZE)-1:0] spk_addr,
  output logic [T_W-1:0]                spk_t,
  output logic                          bypass_hit
);

  localparam int unsigned LW = $clog2(GROUP_SIZE);

  typedef struct packed {
    logic [T_W-1:0]        t_last;
    logic signed [V_W-1:0] v;
  } mem_word_t;

  mem_word_t             vmem [GROUP_SIZE];
  logic signed [V_W-1:0] thr  [GROUP_SIZE];
  logic [GROUP_SIZE-1:0] touched, fired;

  // stage 1 registers
  logic                  s1_valid, s1_eoi, s1_touched, s1_fired;
  logic [LW-1:0]         s1_addr;
  logic signed [W_W-1:0] s1_w;
  logic [T_W-1:0]        s1_t;
  mem_word_t             s1_rd;
  logic signed [V_W-1:0] s1_thr;

  // stage 1 datapath
  logic signed [V_W-1:0]  v_old, v_leak, v_new;
  logic [T_W-1:0]         dt;
  logic [LEAK_W+T_W-1:0]  leak_amt;
  logic signed [V_W+1:0]  v_mag, sum;
  logic                   fire;
  mem_word_t              wr_word;

  always_comb begin
    v_old    = s1_touched ? s1_rd.v : '0;
    dt       = (s1_touched && s1_t > s1_rd.t_last) ? s1_t - s1_rd.t_last : '0;
    leak_amt = leak * dt;
    // leak towards zero, never across it
    v_mag = (v_old < 0) ? -(V_W+2)'(v_old) : (V_W+2)'(v_old);
    if (v_mag <= $signed({2'b00, leak_amt}))
      v_leak = '0;
    else if (v_old < 0)
      v_leak = V_W'((V_W+2)'(v_old) + $signed({2'b00, leak_amt}));
    else
      v_leak = V_W'((V_W+2)'(v_old) - $signed({2'b00, leak_amt}));
    sum = (V_W+2)'(v_leak) + (V_W+2)'(s1_w);
    if (sum > (V_W+2)'(2**(V_W-1) - 1))       v_new = {1'b0, {(V_W-1){1'b1}}};
    else if (sum < -(V_W+2)'(2**(V_W-1)))     v_new = {1'b1, {(V_W-1){1'b0}}};
    else                                      v_new = V_W'(sum);
    fire           = s1_valid && !s1_fired && (v_new >= s1_thr);
    wr_word.t_last = s1_t;
    wr_word.v      = v_new;
    bypass_hit     = in_valid && s1_valid && (s1_addr == in_addr);
  end

  // threshold memory (host-loaded) and membrane memory
  always_ff @(posedge clk) begin
    if (cfg.we && cfg.sel == CFG_THR && cfg.addr[19:LW] == (20-LW)'(GROUP_ID))
      thr[cfg.addr[LW-1:0]] <= cfg.data[V_W-1:0];
    if (s1_valid) vmem[s1_addr] <= wr_word;
  end

  // stage 0 -> stage 1
  always_ff @(posedge clk) begin
    s1_addr <= in_addr;
    s1_w    <= in_w;
    s1_t    <= in_t;
    s1_thr  <= thr[in_addr];
    s1_rd   <= bypass_hit ? wr_word : vmem[in_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid   <= 1'b0;
      s1_eoi     <= 1'b0;
      s1_touched <= 1'b0;
      s1_fired   <= 1'b0;
      touched    <= '0;
      fired      <= '0;
      spk_valid  <= 1'b0;
      spk_addr   <= '0;
      spk_t      <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_eoi   <= in_eoi;
      if (s1_eoi) begin
        // image boundary: every neuron returns to rest
        s1_touched <= 1'b0;
        s1_fired   <= 1'b0;
        touched    <= '0;
        fired      <= '0;
      end else begin
        s1_touched <= bypass_hit ? 1'b1 : touched[in_addr];
        s1_fired   <= bypass_hit ? (s1_fired | fire) : fired[in_addr];
        if (s1_valid) begin
          touched[s1_addr] <= 1'b1;
          if (fire) fired[s1_addr] <= 1'b1;
        end
      end
      spk_valid <= fire;
      spk_addr  <= s1_addr;
      spk_t     <= s1_t;
    end
  end

  a_eoi_alone: assert property (@(posedge clk) disable iff (!rst_n) !(in_eoi && in_valid));

endmodule
