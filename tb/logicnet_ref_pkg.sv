// logicnet_ref_pkg: reference model used by the testbenches.
//
// It recomputes a LogicNet layer the way the network is defined, as arithmetic:
// for every neuron, sum weight * input value over its chosen synapses, add the folded
// batch-norm offset and quantize. It does not use truth tables, so comparing it with
// the RTL checks the table generation, the table layout, the sparse wiring and the
// look-up together. The random choices (which features, which weights) are read from
// logicnet_pkg, since they define the network; the quantizers are written out again here.
package logicnet_ref_pkg;
  import logicnet_pkg::*;

  localparam int MAXN = 256;
  typedef int unsigned vec_t[MAXN];

  // Input quantizer: sign for one bit, round(x/step) clamped to 0..2^bw-1 otherwise.
  function automatic int unsigned ref_quant(int x, int unsigned bw, int unsigned step);
    int n;
    if (bw == 1) return (x >= 0) ? 1 : 0;
    n = 2 * x + int'(step);
    if (n < 0) return 0;
    n = n / (2 * int'(step));
    if (n > (1 << bw) - 1) n = (1 << bw) - 1;
    return n;
  endfunction

  // Output quantizer of a neuron: sign, or floor(v/4) clamped to 0..2^bw-1.
  function automatic int unsigned ref_act(int v, int unsigned bw);
    int q;
    if (bw == 1) return (v >= 0) ? 1 : 0;
    if (v < 0) return 0;
    q = v / 4;
    if (q > (1 << bw) - 1) q = (1 << bw) - 1;
    return q;
  endfunction

  function automatic int ref_value(int unsigned code, int unsigned bw);
    if (bw == 1) return code ? 1 : -1;
    return code;
  endfunction

  // One layer: codes in[0..n_in-1] to codes out[0..n_neurons-1].
  function automatic vec_t ref_layer(vec_t in, int unsigned n_in, int unsigned in_bw,
                                     int unsigned n_neurons, int unsigned fanin,
                                     int unsigned out_bw, int unsigned seed,
                                     int unsigned layer);
    vec_t o;
    int   acc;
    for (int unsigned i = 0; i < MAXN; i++) o[i] = 0;
    for (int unsigned n = 0; n < n_neurons; n++) begin
      acc = bias(seed, layer, n);
      for (int unsigned k = 0; k < fanin; k++)
        acc += weight(seed, layer, n, k) * ref_value(in[conn_idx(seed, layer, n, k, n_in)], in_bw);
      o[n] = ref_act(acc, out_bw);
    end
    return o;
  endfunction
endpackage
