// lut_neuron: one neuron equivalent (NEQ) held as its complete truth table.
//
// A trained sparse, quantized neuron is a Boolean function of IN_BITS input bits
// (its FANIN synapses times the input bit-width) to OUT_BITS output bits. The module
// stores all 2^IN_BITS outputs in TABLE and looks the current input up:
//   out = TABLE[in * OUT_BITS +: OUT_BITS].
// Purely combinational, no clock.
//
// IMPL selects how the table is expressed, with identical function:
//   IMPL_TABLE (default) - the table is written as a plain look-up and logic synthesis
//       is left to find the circuit, as the paper's code generator does (one case
//       statement per neuron, no LUT primitives).
//   IMPL_LUT6 - each output bit becomes a lut6_tree, the explicit 6:1 LUT mapping the
//       analytical cost model counts (OUT_BITS trees of lut_cost(IN_BITS,1) LUTs).
// The packed TABLE layout (entry a at bits [a*OUT_BITS +: OUT_BITS]) is this design's
// choice; the paper's generator writes the same content as case items.
module lut_neuron
  import logicnet_pkg::*;
#(
  parameter int unsigned                      IN_BITS  = 3,
  parameter int unsigned                      OUT_BITS = 1,
  parameter neuron_impl_e                     IMPL     = IMPL_TABLE,
  parameter logic [(2**IN_BITS)*OUT_BITS-1:0] TABLE    = '0
) (
  input  logic [IN_BITS-1:0]  in,
  output logic [OUT_BITS-1:0] out
);
  // Column b of the table: output bit b for every address.
  function automatic logic [2**IN_BITS-1:0] column(int unsigned b);
    logic [2**IN_BITS-1:0] c;
    for (int unsigned a = 0; a < 2**IN_BITS; a++) c[a] = TABLE[a * OUT_BITS + b];
    return c;
  endfunction

  if (IMPL == IMPL_TABLE) begin : g_table
    always_comb out = TABLE[in * OUT_BITS +: OUT_BITS];
  end else begin : g_lut6
    for (genvar b = 0; b < OUT_BITS; b++) begin : g_bit
      lut6_tree #(.N(IN_BITS), .INIT(column(b))) u_tree (.addr(in), .out(out[b]));
    end
  end
endmodule
