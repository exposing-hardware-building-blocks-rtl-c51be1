// logicnet_module: a complete LogicNet inference circuit, the jet-substructure tagger
// (five classes: g, q, W, Z, t) in the configuration of model E: three sparse hidden
// layers of 64 neurons, 2-bit activations, fan-in 4, and a sparse output layer of fan-in 4
// with 4-bit outputs.
//
// Dataflow (one stage per line):
//   features --input_quantizer--> codes (N_FEATURES x IN_BW bits)
//   act_register (input)  -> lut_layer 1 (HL1 neurons, FANIN X,    BW-bit out)
//   act_register          -> lut_layer 2 (HL2 neurons, FANIN X,    BW-bit out)
//   act_register          -> lut_layer 3 (HL3 neurons, FANIN X,    BW-bit out)
//   act_register          -> lut_layer 4 (N_CLASSES,   FANIN X_FC, BW_FC-bit out) -> scores
// Every neuron is a truth table; there are no multipliers, adders or memories, and no
// scheduler: the network is fully unrolled in space.
//
// Timing. With PIPELINED = 1 (default) a register sits at the network input and before
// each later layer, so a feature vector sampled with in_valid on one rising edge appears
// on scores with out_valid after LATENCY = 4 rising edges, and a new vector can be
// accepted on every edge (initiation interval 1). The output layer's table is not
// registered. With PIPELINED = 0 the whole network is combinational (scores follow the
// features within the cycle, out_valid = in_valid), as in the paper's unregistered code.
//
// Ports: features is N_FEATURES signed DATA_W-bit values, feature f at
// features[f*DATA_W +: DATA_W]; scores holds class c at scores[c*BW_FC +: BW_FC], a
// quantized (unsigned) class score; the caller takes the largest as the predicted class.
//
// Follows the paper: layer sizes, bit-widths and fan-ins of model E, truth-table
// neurons with sparse wiring, registers at the input and between layers. This design's
// own: 16 input features of 16 bits (the jet data's feature count, not stated in the
// text), the input quantizer scale, the valid flag and reset, the seed that stands in
// for trained weights, and unsigned 4-bit class scores.
module logicnet_module
  import logicnet_pkg::*;
#(
  parameter int unsigned  N_FEATURES = 16,
  parameter int unsigned  DATA_W     = 16,
  parameter int unsigned  STEP       = 256,   // input quantizer scale, in input LSBs
  parameter int unsigned  IN_BW      = 2,     // input quantizer bit-width
  parameter int unsigned  HL1        = 64,
  parameter int unsigned  HL2        = 64,
  parameter int unsigned  HL3        = 64,
  parameter int unsigned  BW         = 2,     // hidden activation bit-width
  parameter int unsigned  X          = 4,     // hidden fan-in, synapses
  parameter int unsigned  X_FC       = 4,     // output layer fan-in, synapses
  parameter int unsigned  BW_FC      = 4,     // output bit-width
  parameter int unsigned  N_CLASSES  = 5,
  parameter int unsigned  SEED       = 2019,
  parameter bit           PIPELINED  = 1'b1,
  parameter neuron_impl_e IMPL       = IMPL_TABLE
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [N_FEATURES*DATA_W-1:0]  features,
  output logic                          out_valid,
  output logic [N_CLASSES*BW_FC-1:0]    scores
);
  localparam int unsigned LATENCY = PIPELINED ? 4 : 0;

  // Analytical 6:1 LUT cost of the four layers (model E: 640 + 640 + 640 + 100).
  localparam int unsigned LUTS_L1 = HL1 * lut_cost(X * IN_BW, BW);
  localparam int unsigned LUTS_L2 = HL2 * lut_cost(X * BW, BW);
  localparam int unsigned LUTS_L3 = HL3 * lut_cost(X * BW, BW);
  localparam int unsigned LUTS_L4 = N_CLASSES * lut_cost(X_FC * BW, BW_FC);

  logic [N_FEATURES*IN_BW-1:0] q_codes, a0;
  logic [HL1*BW-1:0]           l1_out, a1;
  logic [HL2*BW-1:0]           l2_out, a2;
  logic [HL3*BW-1:0]           l3_out, a3;
  logic                        v0, v1, v2, v3;

  input_quantizer #(
    .N_FEATURES(N_FEATURES), .DATA_W(DATA_W), .BW(IN_BW), .STEP(STEP)
  ) u_inq (
    .x(features), .code(q_codes)
  );

  if (PIPELINED) begin : g_regs
    act_register #(.WIDTH(N_FEATURES*IN_BW)) u_reg0 (
      .clk, .rst_n, .in_valid(in_valid), .d(q_codes), .out_valid(v0), .q(a0));
    act_register #(.WIDTH(HL1*BW)) u_reg1 (
      .clk, .rst_n, .in_valid(v0), .d(l1_out), .out_valid(v1), .q(a1));
    act_register #(.WIDTH(HL2*BW)) u_reg2 (
      .clk, .rst_n, .in_valid(v1), .d(l2_out), .out_valid(v2), .q(a2));
    act_register #(.WIDTH(HL3*BW)) u_reg3 (
      .clk, .rst_n, .in_valid(v2), .d(l3_out), .out_valid(v3), .q(a3));
  end else begin : g_comb
    // Unregistered network: clk and rst_n are unused in this mode.
    assign {v0, a0} = {in_valid, q_codes};
    assign {v1, a1} = {v0, l1_out};
    assign {v2, a2} = {v1, l2_out};
    assign {v3, a3} = {v2, l3_out};
  end

  lut_layer #(
    .N_IN(N_FEATURES), .IN_BW(IN_BW), .N_NEURONS(HL1), .FANIN(X), .OUT_BW(BW),
    .SEED(SEED), .LAYER(0), .IMPL(IMPL)
  ) u_layer1 (.in(a0), .out(l1_out));

  lut_layer #(
    .N_IN(HL1), .IN_BW(BW), .N_NEURONS(HL2), .FANIN(X), .OUT_BW(BW),
    .SEED(SEED), .LAYER(1), .IMPL(IMPL)
  ) u_layer2 (.in(a1), .out(l2_out));

  lut_layer #(
    .N_IN(HL2), .IN_BW(BW), .N_NEURONS(HL3), .FANIN(X), .OUT_BW(BW),
    .SEED(SEED), .LAYER(2), .IMPL(IMPL)
  ) u_layer3 (.in(a2), .out(l3_out));

  lut_layer #(
    .N_IN(HL3), .IN_BW(BW), .N_NEURONS(N_CLASSES), .FANIN(X_FC), .OUT_BW(BW_FC),
    .SEED(SEED), .LAYER(3), .IMPL(IMPL)
  ) u_layer4 (.in(a3), .out(scores));

  assign out_valid = v3;
endmodule
