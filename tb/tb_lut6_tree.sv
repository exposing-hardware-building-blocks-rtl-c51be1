// tb_lut6_tree: exhaustive check of the 6:1 LUT mapping for tables of 3, 6, 7, 8, 9,
// 10 and 11 inputs, and of its LUT count against the static mapping cost table
// (6:1, 7:3, 8:5, 9:11, 10:21, 11:43).
module tb_lut6_tree;
  int checks = 0, failures = 0;

  // Pseudo-random table of 2^n bits (hash of the address).
  function automatic logic [2047:0] tab(int unsigned n, int unsigned salt);
    logic [2047:0] t = '0;
    for (int unsigned a = 0; a < (1 << n); a++) t[a] = logicnet_pkg::mix(a * 7 + salt)[5];
    return t;
  endfunction

  localparam logic [2047:0] T3 = tab(3, 1), T6 = tab(6, 2), T7 = tab(7, 3), T8 = tab(8, 4),
                            T9 = tab(9, 5), T10 = tab(10, 6), T11 = tab(11, 7);

  logic [10:0] addr;
  logic o3, o6, o7, o8, o9, o10, o11;
  lut6_tree #(.N(3),  .INIT(T3[7:0]))     u3  (.addr(addr[2:0]),  .out(o3));
  lut6_tree #(.N(6),  .INIT(T6[63:0]))    u6  (.addr(addr[5:0]),  .out(o6));
  lut6_tree #(.N(7),  .INIT(T7[127:0]))   u7  (.addr(addr[6:0]),  .out(o7));
  lut6_tree #(.N(8),  .INIT(T8[255:0]))   u8  (.addr(addr[7:0]),  .out(o8));
  lut6_tree #(.N(9),  .INIT(T9[511:0]))   u9  (.addr(addr[8:0]),  .out(o9));
  lut6_tree #(.N(10), .INIT(T10[1023:0])) u10 (.addr(addr[9:0]),  .out(o10));
  lut6_tree #(.N(11), .INIT(T11[2047:0])) u11 (.addr(addr[10:0]), .out(o11));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bad3 = 0, bad6 = 0, bad7 = 0, bad8 = 0, bad9 = 0, bad10 = 0, bad11 = 0;
    chk(u6.N_LUT6 == 1,  "6 inputs: 1 LUT");
    chk(u7.N_LUT6 == 3,  "7 inputs: 3 LUTs");
    chk(u8.N_LUT6 == 5,  "8 inputs: 5 LUTs");
    chk(u9.N_LUT6 == 11, "9 inputs: 11 LUTs");
    chk(u10.N_LUT6 == 21, "10 inputs: 21 LUTs");
    chk(u11.N_LUT6 == 43, "11 inputs: 43 LUTs");
    for (int a = 0; a < 2048; a++) begin
      addr = 11'(a);
      #1;
      if (a < 8    && o3  != T3[a])  bad3++;
      if (a < 64   && o6  != T6[a])  bad6++;
      if (a < 128  && o7  != T7[a])  bad7++;
      if (a < 256  && o8  != T8[a])  bad8++;
      if (a < 512  && o9  != T9[a])  bad9++;
      if (a < 1024 && o10 != T10[a]) bad10++;
      if (o11 != T11[a]) bad11++;
    end
    chk(bad3 == 0, "3-input table");
    chk(bad6 == 0, "6-input table");
    chk(bad7 == 0, "7-input table");
    chk(bad8 == 0, "8-input table");
    chk(bad9 == 0, "9-input table");
    chk(bad10 == 0, "10-input table");
    chk(bad11 == 0, "11-input table");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
