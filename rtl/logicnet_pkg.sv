// logicnet_pkg: constants and constant functions shared by the LogicNet RTL.
//
// A LogicNet layer is built from "neuron equivalents" (NEQs): a sparse neuron whose
// few quantized inputs and quantized output make it small enough to store as a
// complete truth table. Everything in this package is evaluated at elaboration time;
// nothing here becomes logic by itself.
//
//  * lut_cost()      closed-form number of 6:1 LUTs for an N-input, M-output table,
//                    M * (2^(N-4) - (-1)^N) / 3 for N >= 6 (one LUT per output below).
//  * rnd()           a 32-bit integer hash; every "random" choice below is a hash of
//                    (seed, layer, neuron, index), so a network is fixed by its seed.
//  * conn_idx()      a-priori fixed sparsity: neuron n of a layer reads FANIN distinct
//                    input features picked at random (a random bipartite expander of
//                    degree FANIN).
//  * weight(), bias() the neuron's integer weights and its folded batch-norm offset.
//  * act_value()     numeric value of an input code: QuantHardTanh (1 bit: -1/+1) or
//                    QuantReLU (k bits: 0 .. 2^k-1).
//  * activate()      the output quantizer applied to (sum + bias): a 1-bit output is the
//                    sign, a k-bit output is floor(v / 2^ACT_SHIFT) clamped to 0..2^k-1.
//  * neq_eval()      the NEQ function for one truth-table address.
//
// What is the paper's: the cost formula, the random-expander connectivity, the NEQ
// structure (sum, batch norm, quantized activation) and the two quantizer shapes.
// What is this design's own: the hash, the weight range (+-1..+-3), the bias range and
// the fixed 2^ACT_SHIFT batch-norm scale. The paper's tables come from training, which
// is outside the hardware; these functions stand in for a trained network so that the
// RTL elaborates to a complete, deterministic circuit.
package logicnet_pkg;

  // Largest fan-in (in synapses) the constant functions support.
  localparam int unsigned MAX_FANIN = 32;
  // Width of one entry of an explicit connectivity list.
  localparam int unsigned CONN_IDX_W = 16;
  // Batch-norm scale folded into the output quantizer: v / 2^ACT_SHIFT.
  localparam int unsigned ACT_SHIFT = 2;

  typedef enum logic [0:0] {
    IMPL_TABLE = 1'b0,   // truth table left to logic synthesis (as generated in the paper)
    IMPL_LUT6  = 1'b1    // truth table mapped explicitly onto 6:1 LUTs
  } neuron_impl_e;

  // Closed-form 6:1 LUT cost of an N-input, M-output truth table.
  function automatic int unsigned lut_cost(int unsigned n, int unsigned m);
    int unsigned p;
    if (n <= 6) return m;
    p = 1 << (n - 4);
    if (n % 2 == 1) return m * ((p + 1) / 3);
    return m * ((p - 1) / 3);
  endfunction

  // 32-bit integer hash (xor-shift-multiply).
  function automatic logic [31:0] mix(logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic logic [31:0] rnd(int unsigned seed, int unsigned layer,
                                      int unsigned neuron, int unsigned idx);
    return mix(mix(mix(mix(seed) + layer) + neuron) + idx);
  endfunction

  // Index of the input feature that synapse k of a neuron reads. The FANIN choices of
  // one neuron are distinct: a collision moves on to the next free feature.
  function automatic int unsigned conn_idx(int unsigned seed, int unsigned layer,
                                           int unsigned neuron, int unsigned k,
                                           int unsigned n_in);
    int unsigned picks[MAX_FANIN];
    int unsigned c;
    bit          taken;
    for (int unsigned j = 0; j <= k; j++) begin
      c = rnd(seed, layer, neuron, 1000 + j) % n_in;
      do begin
        taken = 1'b0;
        for (int unsigned i = 0; i < j; i++)
          if (picks[i] == c) taken = 1'b1;
        if (taken) c = (c + 1) % n_in;
      end while (taken);
      picks[j] = c;
    end
    return picks[k];
  endfunction

  // Weight of synapse k: one of -3, -2, -1, +1, +2, +3.
  function automatic int weight(int unsigned seed, int unsigned layer,
                                int unsigned neuron, int unsigned k);
    int r;
    r = int'(rnd(seed, layer, neuron, 2000 + k) % 6);
    return (r < 3) ? r - 3 : r - 2;
  endfunction

  // Folded batch-norm offset of a neuron: -4 .. +7.
  function automatic int bias(int unsigned seed, int unsigned layer, int unsigned neuron);
    return int'(rnd(seed, layer, neuron, 3000) % 12) - 4;
  endfunction

  // Numeric value of a quantized activation code of width bw.
  function automatic int act_value(int unsigned code, int unsigned bw);
    if (bw == 1) return (code != 0) ? 1 : -1;
    return int'(code);
  endfunction

  // Output quantizer: sign for one bit, clamped uniform levels otherwise.
  function automatic int unsigned activate(int v, int unsigned bw);
    int q;
    if (bw == 1) return (v >= 0) ? 1 : 0;
    q = v >>> ACT_SHIFT;
    if (q < 0) return 0;
    if (q > (1 << bw) - 1) return (1 << bw) - 1;
    return int'(q);
  endfunction

  // NEQ output for truth-table address addr. Synapse 0 occupies the most significant
  // in_bw bits of the address, synapse fanin-1 the least significant.
  function automatic int unsigned neq_eval(int unsigned seed, int unsigned layer,
                                           int unsigned neuron, int unsigned fanin,
                                           int unsigned in_bw, int unsigned out_bw,
                                           int unsigned addr);
    int acc;
    int unsigned code;
    acc = bias(seed, layer, neuron);
    for (int unsigned k = 0; k < fanin; k++) begin
      code = (addr >> ((fanin - 1 - k) * in_bw)) & ((1 << in_bw) - 1);
      acc += weight(seed, layer, neuron, k) * act_value(code, in_bw);
    end
    return activate(acc, out_bw);
  endfunction

endpackage
