// input_quantizer: turns raw input features into the BW-bit codes the first LUT layer
// reads.
//
// Each of N_FEATURES signed DATA_W-bit fixed-point features (feature f at
// x[f*DATA_W +: DATA_W]) is quantized independently and combinationally:
//   BW = 1  QuantHardTanh: code 1 (+1) for x >= 0, code 0 (-1) for x < 0.
//   BW > 1  QuantReLU: code = clamp(round(x / STEP), 0, 2^BW - 1), with rounding half
//           up. It is built as 2^BW-1 comparators against the level boundaries
//           (2k-1)*STEP/2, whose results are summed, so no divider is needed.
// STEP is the quantizer's scale factor expressed in input LSBs.
//
// The two quantizer shapes (HardTanh for one bit, uniform ReLU levels 0..2^BW-1
// otherwise) follow the paper. The fixed-point input format, the rounding rule and the
// choice to realise the input quantizer in hardware in front of the first layer are
// this design's own.
module input_quantizer #(
  parameter int unsigned N_FEATURES = 16,
  parameter int unsigned DATA_W     = 16,
  parameter int unsigned BW         = 2,
  parameter int unsigned STEP       = 256
) (
  input  logic [N_FEATURES*DATA_W-1:0] x,
  output logic [N_FEATURES*BW-1:0]     code
);
  localparam int unsigned LEVELS = (1 << BW) - 1;

  for (genvar f = 0; f < N_FEATURES; f++) begin : g_feat
    logic signed [DATA_W-1:0] xf;
    assign xf = x[f * DATA_W +: DATA_W];
    if (BW == 1) begin : g_tanh
      assign code[f] = ~xf[DATA_W - 1];
    end else begin : g_relu
      // 2*x compared with (2k-1)*STEP, one extra bit to avoid overflow.
      logic signed [DATA_W+1:0] x2;
      logic [BW-1:0]            level;
      assign x2 = {xf[DATA_W - 1], xf, 1'b0};
      always_comb begin
        level = '0;
        for (int unsigned k = 1; k <= LEVELS; k++)
          if (int'(x2) >= int'((2 * k - 1) * STEP)) level = BW'(k);
      end
      assign code[f * BW +: BW] = level;
    end
  end
endmodule
