// tb_lut_neuron: checks the truth-table neuron in both implementations.
//  * The three 3-input neurons of the published single-layer example, whose tables
//    are 1,1,1,0,1,0,0,0 and 1,0,1,0,1,0,1,0 for addresses 0..7.
//  * An 8-input, 2-output neuron (fan-in 4 at 2 bits, as in the jet model) whose table
//    is a hash of the address; both IMPL_TABLE and IMPL_LUT6 must return the table entry
//    for all 256 addresses.
module tb_lut_neuron;
  import logicnet_pkg::*;
  int checks = 0, failures = 0;

  function automatic logic [511:0] tab8x2();
    logic [511:0] t;
    for (int unsigned a = 0; a < 256; a++) t[2 * a +: 2] = mix(a + 77)[9:8];
    return t;
  endfunction
  localparam logic [511:0] T = tab8x2();
  // Table entry a is bit a: address 0 is the least significant bit.
  localparam logic [7:0] N0 = 8'b0001_0111;   // 1,1,1,0,1,0,0,0
  localparam logic [7:0] N1 = 8'b0101_0101;   // 1,0,1,0,1,0,1,0

  logic [2:0] a3;
  logic [7:0] a8;
  logic       y0, y1, y0l;
  logic [1:0] yt, yl;
  lut_neuron #(.IN_BITS(3), .OUT_BITS(1), .TABLE(N0))                   u_n0  (.in(a3), .out(y0));
  lut_neuron #(.IN_BITS(3), .OUT_BITS(1), .TABLE(N1))                   u_n1  (.in(a3), .out(y1));
  lut_neuron #(.IN_BITS(3), .OUT_BITS(1), .IMPL(IMPL_LUT6), .TABLE(N0)) u_n0l (.in(a3), .out(y0l));
  lut_neuron #(.IN_BITS(8), .OUT_BITS(2), .TABLE(T))                    u_t   (.in(a8), .out(yt));
  lut_neuron #(.IN_BITS(8), .OUT_BITS(2), .IMPL(IMPL_LUT6), .TABLE(T))  u_l   (.in(a8), .out(yl));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] exp2;
    bit e0, e1;
    for (int a = 0; a < 8; a++) begin
      a3 = 3'(a);
      #1;
      case (a)
        0, 1, 2, 4: e0 = 1'b1;
        default:    e0 = 1'b0;
      endcase
      e1 = (a % 2 == 0);
      checks += 3;
      if (y0 != e0)  begin failures++; $display("FAIL N0 addr %0d", a); end
      if (y1 != e1)  begin failures++; $display("FAIL N1 addr %0d", a); end
      if (y0l != e0) begin failures++; $display("FAIL N0 lut6 addr %0d", a); end
    end
    for (int a = 0; a < 256; a++) begin
      a8 = 8'(a);
      #1;
      exp2 = mix(32'(a) + 77)[9:8];
      checks += 2;
      if (yt != exp2) begin failures++; $display("FAIL table addr %0d", a); end
      if (yl != exp2) begin failures++; $display("FAIL lut6 addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
