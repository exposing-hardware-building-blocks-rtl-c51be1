// lut6: a 6-input, 1-output look-up table, the basic hardware building block of the
// FPGA fabric this design targets.
//
// The 64-bit configuration word INIT holds the output for every input combination:
// o = INIT[i]. It is purely combinational. The behaviour is the FPGA "K-LUT" with K=6
// that the cost model counts; the parameter name INIT and the port names are this
// design's own. On an FPGA a synthesis tool maps this module onto one LUT6 site.
module lut6 #(
  parameter logic [63:0] INIT = 64'h0
) (
  input  logic [5:0] i,   // LUT inputs, i[0] least significant address bit
  output logic       o    // table output
);
  assign o = INIT[i];
endmodule
