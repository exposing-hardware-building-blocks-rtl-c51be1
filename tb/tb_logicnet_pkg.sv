// tb_logicnet_pkg: checks the package's constant functions.
// The LUT cost formula is compared with every row of the static 6:1 LUT mapping
// table (fan-in 6..11 bits) and with the per-layer costs of the jet-tagging models;
// the random connectivity is checked for range and distinctness; weights, offsets and
// the quantized activation are checked against their defined ranges and values.
module tb_logicnet_pkg;
  import logicnet_pkg::*;
  int checks = 0, failures = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned c[MAX_FANIN];
    int w;
    // Static mapping cost table: fan-in bits -> number of 6-LUTs.
    chk(lut_cost(6, 1) == 1,  "cost 6");
    chk(lut_cost(7, 1) == 3,  "cost 7");
    chk(lut_cost(8, 1) == 5,  "cost 8");
    chk(lut_cost(9, 1) == 11, "cost 9");
    chk(lut_cost(10, 1) == 21, "cost 10");
    chk(lut_cost(11, 1) == 43, "cost 11");
    // Per-layer costs of the jet models (64 neurons): A 2112, C 128, D 2688, E 640.
    chk(64 * lut_cost(9, 3) == 2112, "model A layer");
    chk(64 * lut_cost(6, 2) == 128,  "model C layer");
    chk(64 * lut_cost(10, 2) == 2688, "model D layer");
    chk(64 * lut_cost(8, 2) == 640,  "model E layer");
    chk(lut_cost(3, 2) == 2, "small tables take one LUT per output");
    // Connectivity: distinct and in range, including FANIN == N_IN.
    for (int unsigned n = 0; n < 50; n++) begin
      for (int unsigned k = 0; k < 4; k++) c[k] = conn_idx(7, 1, n, k, 5);
      for (int unsigned k = 0; k < 4; k++) begin
        chk(c[k] < 5, "conn in range");
        for (int unsigned j = 0; j < k; j++) chk(c[k] != c[j], "conn distinct");
      end
    end
    for (int unsigned k = 0; k < 6; k++) c[k] = conn_idx(3, 0, 9, k, 6);
    begin
      int unsigned sum;
      sum = 0;
      for (int unsigned k = 0; k < 6; k++) sum += c[k];
      chk(sum == 15, "full fan-in is a permutation");
    end
    // Weights and offsets in their ranges.
    for (int unsigned n = 0; n < 200; n++) begin
      w = weight(11, 2, n, n % 7);
      chk(w >= -3 && w <= 3 && w != 0, "weight range");
      w = bias(11, 2, n);
      chk(w >= -4 && w <= 7, "bias range");
    end
    // Activation: sign, and floor(v/4) clamped.
    chk(activate(-1, 1) == 0, "tanh neg");
    chk(activate(0, 1) == 1, "tanh zero");
    chk(activate(-5, 2) == 0, "relu clamp low");
    chk(activate(7, 2) == 1, "relu 7/4");
    chk(activate(12, 2) == 3, "relu 12/4");
    chk(activate(100, 2) == 3, "relu clamp high");
    chk(activate(63, 4) == 15, "4-bit 63/4");
    chk(activate(64, 4) == 15, "4-bit clamp");
    chk(act_value(0, 1) == -1 && act_value(1, 1) == 1 && act_value(3, 2) == 3, "values");
    // NEQ evaluation of one address, worked out by hand from the weights.
    begin
      int acc;
      acc = bias(5, 0, 0) + weight(5, 0, 0, 0) * 2 + weight(5, 0, 0, 1) * 1 +
            weight(5, 0, 0, 2) * 0 + weight(5, 0, 0, 3) * 3;
      chk(neq_eval(5, 0, 0, 4, 2, 2, 8'b10_01_00_11) ==
          ((acc < 0) ? 0 : ((acc / 4 > 3) ? 3 : acc / 4)), "neq_eval address decode");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
