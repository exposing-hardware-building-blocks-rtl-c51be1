// tb_input_quantizer: QuantReLU (2 and 3 bits) and QuantHardTanh (1 bit) on random
// values and on every level boundary, against round-half-up division by the step.
module tb_input_quantizer;
  import logicnet_ref_pkg::*;
  int checks = 0, failures = 0;
  localparam int STEP = 256;
  logic [4*16-1:0] x;
  logic [7:0]  c2;
  logic [11:0] c3;
  logic [3:0]  c1;
  input_quantizer #(.N_FEATURES(4), .DATA_W(16), .BW(2), .STEP(STEP)) u2 (.x(x), .code(c2));
  input_quantizer #(.N_FEATURES(4), .DATA_W(16), .BW(3), .STEP(STEP)) u3 (.x(x), .code(c3));
  input_quantizer #(.N_FEATURES(4), .DATA_W(16), .BW(1), .STEP(STEP)) u1 (.x(x), .code(c1));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    int v;
    #1;
    for (int f = 0; f < 4; f++) begin
      v = int'($signed(x[16 * f +: 16]));
      checks += 3;
      if (c2[2 * f +: 2] != ref_quant(v, 2, STEP)) begin failures++; $display("FAIL bw2 x=%0d", v); end
      if (c3[3 * f +: 3] != ref_quant(v, 3, STEP)) begin failures++; $display("FAIL bw3 x=%0d", v); end
      if (c1[f] != ref_quant(v, 1, STEP))          begin failures++; $display("FAIL bw1 x=%0d", v); end
    end
  endtask

  initial begin
    // Boundaries (2k-1)*STEP/2 and their neighbours, zero, extremes.
    int pts[$] = '{0, -1, 1, 127, 128, 129, 383, 384, 385, 639, 640, 641, 1663, 1664,
                   1665, 1919, 1920, 32767, -32768, -128, -129};
    for (int i = 0; i < pts.size(); i += 4) begin
      for (int f = 0; f < 4; f++) x[16 * f +: 16] = 16'(pts[(i + f) % pts.size()]);
      check_all();
    end
    // Hand-worked values: 383 -> 1, 384 -> 2 (round half up), 2000 -> 3 (2 bits) / 7 (3 bits).
    x = {16'(2000), 16'(384), 16'(383), -16'sd5};
    #1;
    checks++;
    if (c2 != {2'd3, 2'd2, 2'd1, 2'd0} || c3[11:9] != 3'd7 || c1 != 4'b1110) begin
      failures++; $display("FAIL hand values");
    end
    for (int t = 0; t < 500; t++) begin
      x = {$urandom, $urandom};
      if (t % 2 == 0) for (int f = 0; f < 4; f++) x[16 * f +: 16] = 16'($urandom % 2500) - 16'd300;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
