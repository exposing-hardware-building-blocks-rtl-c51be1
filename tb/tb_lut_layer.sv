// tb_lut_layer: checks a sparse LUT layer two ways.
//  1. The published single-layer example: 5 one-bit inputs, 3 neurons of fan-in 3
//     wired {M0[0],M0[2],M0[4]}, {M0[1],M0[2],M0[3]}, {M0[0],M0[1],M0[2]} with the
//     tables 1,1,1,0,1,0,0,0 / 1,0,1,0,1,0,1,0 / 1,0,1,0,1,0,1,0; all 32 inputs.
//  2. A randomly wired layer (16 features of 2 bits, 8 neurons, fan-in 4, 2-bit
//     outputs), in both neuron implementations, against the arithmetic reference model
//     on 300 random inputs.
module tb_lut_layer;
  import logicnet_pkg::*;
  import logicnet_ref_pkg::*;
  int checks = 0, failures = 0;

  localparam int W = CONN_IDX_W;
  // Neuron n synapse k at [(n*3+k)*W].
  localparam logic [9*W-1:0] CONN = {W'(2), W'(1), W'(0),    // neuron 2: 0,1,2
                                     W'(3), W'(2), W'(1),    // neuron 1: 1,2,3
                                     W'(4), W'(2), W'(0)};   // neuron 0: 0,2,4
  localparam logic [23:0] TABLES = {8'b0101_0101, 8'b0101_0101, 8'b0001_0111};

  logic [4:0]  m0;
  logic [2:0]  m1;
  logic [31:0] x;
  logic [15:0] yt, yl;

  lut_layer #(.N_IN(5), .IN_BW(1), .N_NEURONS(3), .FANIN(3), .OUT_BW(1),
              .USE_GIVEN(1'b1), .GIVEN_CONN(CONN), .GIVEN_TABLE(TABLES))
    u_ex (.in(m0), .out(m1));
  lut_layer #(.N_IN(16), .IN_BW(2), .N_NEURONS(8), .FANIN(4), .OUT_BW(2), .SEED(42), .LAYER(1))
    u_rt (.in(x), .out(yt));
  lut_layer #(.N_IN(16), .IN_BW(2), .N_NEURONS(8), .FANIN(4), .OUT_BW(2), .SEED(42), .LAYER(1),
              .IMPL(IMPL_LUT6))
    u_rl (.in(x), .out(yl));

  function automatic bit lut_n0(logic [2:0] a);
    return a inside {3'd0, 3'd1, 3'd2, 3'd4};
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2:0] e;
    vec_t in, o;
    for (int i = 0; i < 32; i++) begin
      m0 = 5'(i);
      #1;
      e[0] = lut_n0({m0[0], m0[2], m0[4]});
      e[1] = ~m0[3];   // table 1,0,1,0,...: output = NOT(last address bit)
      e[2] = ~m0[2];
      checks++;
      if (m1 != e) begin failures++; $display("FAIL example in=%b got %b exp %b", m0, m1, e); end
    end
    for (int t = 0; t < 300; t++) begin
      x = $urandom;
      #1;
      for (int f = 0; f < MAXN; f++) in[f] = (f < 16) ? int'(x[2 * f +: 2]) : 0;
      o = ref_layer(in, 16, 2, 8, 4, 2, 42, 1);
      for (int n = 0; n < 8; n++) begin
        checks += 2;
        if (yt[2 * n +: 2] != o[n]) begin failures++; $display("FAIL table n%0d x=%h", n, x); end
        if (yl[2 * n +: 2] != o[n]) begin failures++; $display("FAIL lut6 n%0d x=%h", n, x); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
