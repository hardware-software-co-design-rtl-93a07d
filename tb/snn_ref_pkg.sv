// snn_ref_pkg: reference model used by the testbenches to predict what the hardware
// must produce. It restates the neuron and readout rules in plain behavioural code,
// written independently of the RTL datapath: integer arithmetic, no pipelines.
//   LIF update : v <- sat16( leak_towards_zero(v, leak * dt) + w ), dt = timesteps since
//                the neuron's previous update in this image (0 for its first update);
//                the neuron fires once, at the first update that leaves v >= threshold.
//   Readout    : earliest class first-spike time, then more neurons at that time, then
//                lower class index; no output spike gives no_spike = 1, label 0.
package snn_ref_pkg;

  function automatic int sat16(int x);
    if (x > 32767)  return 32767;
    if (x < -32768) return -32768;
    return x;
  endfunction

  function automatic int leak_to_zero(int v, int amt);
    if (v > 0) return (v > amt) ? v - amt : 0;
    if (v < 0) return (-v > amt) ? v + amt : 0;
    return 0;
  endfunction

  // One synaptic update of the reference neuron state. Returns 1 if it fires.
  function automatic bit lif_step(ref int v, ref int t_last, ref bit touched, ref bit fired,
                                  input int w, input int t, input int thr, input int leak);
    int dt;
    bit f;
    dt = (touched && t > t_last) ? t - t_last : 0;
    v  = sat16(leak_to_zero(touched ? v : 0, leak * dt) + w);
    t_last  = t;
    touched = 1'b1;
    f = !fired && (v >= thr);
    if (f) fired = 1'b1;
    return f;
  endfunction

endpackage
