// lut_layer: one sparse LogicNet layer, N_NEURONS neuron equivalents side by side.
//
// The layer input is N_IN features of IN_BW bits each (feature f at
// in[f*IN_BW +: IN_BW]). Every neuron reads FANIN of them, fixed at design time, and
// concatenates them into its truth-table address, the first chosen feature in the most
// significant position, exactly as the generated wiring {M0[0], M0[2], M0[4]} does.
// Neuron n's OUT_BW-bit result is out[n*OUT_BW +: OUT_BW]. Purely combinational;
// registers between layers are added by the enclosing module.
//
// Connectivity and truth tables come from one of two sources:
//   USE_GIVEN = 0 (default): a-priori fixed random sparsity. Neuron n reads the features
//       logicnet_pkg::conn_idx(SEED, LAYER, n, k, N_IN), k = 0..FANIN-1, and its table is
//       the neuron-equivalent function logicnet_pkg::neq_eval() over every address
//       (weighted sum, folded batch norm, quantized activation). The seed fixes the whole
//       network; training, which would set the real weights, is outside the hardware.
//   USE_GIVEN = 1: GIVEN_CONN and GIVEN_TABLE supply the wiring and tables of a network
//       trained elsewhere. Feature index of neuron n, synapse k is at
//       GIVEN_CONN[(n*FANIN+k)*CONN_IDX_W +: CONN_IDX_W]; neuron n's table occupies
//       GIVEN_TABLE[n*TBITS +: TBITS] in the lut_neuron layout.
// Random sparse wiring can leave some input features unread by every neuron of the
// layer; their bits are then unused, which is expected for a random expander.
//
// The layer structure follows the paper's generated LUTLayer modules; the packed
// parameter layout for given tables is this design's own.
module lut_layer
  import logicnet_pkg::*;
#(
  parameter int unsigned  N_IN      = 5,
  parameter int unsigned  IN_BW     = 1,
  parameter int unsigned  N_NEURONS = 3,
  parameter int unsigned  FANIN     = 3,
  parameter int unsigned  OUT_BW    = 1,
  parameter int unsigned  SEED      = 1,
  parameter int unsigned  LAYER     = 0,
  parameter neuron_impl_e IMPL      = IMPL_TABLE,
  parameter bit           USE_GIVEN = 1'b0,
  parameter logic [N_NEURONS*FANIN*CONN_IDX_W-1:0]                GIVEN_CONN  = '0,
  parameter logic [N_NEURONS*(2**(FANIN*IN_BW))*OUT_BW-1:0]       GIVEN_TABLE = '0
) (
  input  logic [N_IN*IN_BW-1:0]      in,
  output logic [N_NEURONS*OUT_BW-1:0] out
);
  localparam int unsigned AW    = FANIN * IN_BW;          // table address bits
  localparam int unsigned TBITS = (2**AW) * OUT_BW;       // table bits per neuron

  if (FANIN > N_IN || FANIN > MAX_FANIN) begin : g_bad_fanin
    $error("lut_layer: FANIN must not exceed N_IN or MAX_FANIN");
  end

  function automatic int unsigned src(int unsigned n, int unsigned k);
    if (USE_GIVEN) return int'(GIVEN_CONN[(n * FANIN + k) * CONN_IDX_W +: CONN_IDX_W]);
    return conn_idx(SEED, LAYER, n, k, N_IN);
  endfunction

  function automatic logic [TBITS-1:0] table_of(int unsigned n);
    logic [TBITS-1:0] t;
    if (USE_GIVEN) return GIVEN_TABLE[n * TBITS +: TBITS];
    for (int unsigned a = 0; a < 2**AW; a++)
      t[a * OUT_BW +: OUT_BW] = OUT_BW'(neq_eval(SEED, LAYER, n, FANIN, IN_BW, OUT_BW, a));
    return t;
  endfunction

  for (genvar n = 0; n < N_NEURONS; n++) begin : g_neuron
    logic [AW-1:0] addr;
    for (genvar k = 0; k < FANIN; k++) begin : g_syn
      localparam int unsigned F = src(n, k);
      assign addr[(FANIN - 1 - k) * IN_BW +: IN_BW] = in[F * IN_BW +: IN_BW];
    end
    lut_neuron #(
      .IN_BITS (AW),
      .OUT_BITS(OUT_BW),
      .IMPL    (IMPL),
      .TABLE   (table_of(n))
    ) u_neq (
      .in (addr),
      .out(out[n * OUT_BW +: OUT_BW])
    );
  end
endmodule
