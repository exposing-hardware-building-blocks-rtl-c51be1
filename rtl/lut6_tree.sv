// lut6_tree: an N-input, 1-output truth table built only from 6:1 LUTs.
//
// This is the mapping that the analytical LUT cost model assumes. For N <= 6 the table
// fits one lut6 (unused upper inputs tied low). For N > 6 the table is split on its
// N-6 upper address bits (Shannon expansion):
//   * 2^(N-6) leaf LUTs each hold one 64-entry slice and read address bits [5:0];
//   * the leaf outputs are then reduced by a tree of lut6 configured as multiplexers.
//     Each tree level consumes the next two select bits with 4:1 multiplexers (4 data +
//     2 select = 6 LUT inputs); if a single select bit is left, the last level uses
//     2:1 multiplexers.
// The LUT count of this tree is 2^(N-6) + 2^(N-8) + ... and equals the paper's closed
// form M*(2^(N-4) - (-1)^N)/3 for M = 1 (N=7: 3, N=8: 5, N=9: 11, N=10: 21, N=11: 43);
// the localparam N_LUT6 reports it.
//
// Follows the paper: the 7:1 case (two leaf LUTs on bits 0..5, one LUT combining them
// with bit 6) and the 8:1 case (four leaf LUTs combined by one LUT with two remaining
// address bits). The paper's 8:1 drawing gives the leaves bits 1..6 and the final LUT
// bits 0 and 7; here the leaves always take the low six bits and the multiplexers the
// upper bits, an equivalent permutation of the address. Select-bit order within the
// tree (lowest select bits nearest the leaves) is this design's choice.
//
// Purely combinational; the path crosses 1 + ceil((N-6)/2) LUT levels.
//
// All LUT outputs share one vector, node[], with the leaves first and each multiplexer
// level after the one it reads. A lint tool that treats the vector as one signal reports
// a combinational loop through node; there is none, since every LUT only reads entries
// of an earlier level.
module lut6_tree #(
  parameter int unsigned         N    = 8,
  parameter logic [2**N-1:0]     INIT = '0   // INIT[a] is the output for address a
) (
  input  logic [N-1:0] addr,
  output logic         out
);
  localparam int unsigned NS    = (N > 6) ? N - 6 : 0;   // select bits above the leaves
  localparam int unsigned NLVL  = (NS + 1) / 2;          // multiplexer levels
  localparam int unsigned NLEAF = 1 << NS;

  // Select bits consumed by multiplexer level j (j >= 1).
  function automatic int unsigned sel_bits(int unsigned j);
    int unsigned used;
    used = 2 * (j - 1);
    return (NS - used >= 2) ? 2 : 1;
  endfunction

  // Nodes at level j (level 0 = leaves).
  function automatic int unsigned cnt(int unsigned j);
    int unsigned c;
    c = NLEAF;
    for (int unsigned l = 1; l <= j; l++) c = c >> sel_bits(l);
    return c;
  endfunction

  // Offset of level j in the flat node vector.
  function automatic int unsigned offs(int unsigned j);
    int unsigned o;
    o = 0;
    for (int unsigned l = 0; l < j; l++) o += cnt(l);
    return o;
  endfunction

  localparam int unsigned N_LUT6 = offs(NLVL + 1);

  // lut6 configurations used as multiplexers: inputs {s1,s0,d3,d2,d1,d0} and {s0,d1,d0}.
  function automatic logic [63:0] mux4_init();
    logic [63:0] t;
    for (int unsigned a = 0; a < 64; a++) t[a] = a[(a >> 4) & 3];
    return t;
  endfunction
  function automatic logic [63:0] mux2_init();
    logic [63:0] t;
    for (int unsigned a = 0; a < 64; a++) t[a] = a[(a >> 2) & 1];
    return t;
  endfunction

  // 64-bit slice i of the table (replicated when N < 6).
  function automatic logic [63:0] leaf_init(int unsigned i);
    logic [63:0] t;
    for (int unsigned a = 0; a < 64; a++)
      t[a] = (N >= 6) ? INIT[i * 64 + a] : INIT[a % (1 << N)];
    return t;
  endfunction

  logic [N_LUT6-1:0] node;
  logic [5:0]        leaf_addr;

  if (N >= 6) begin : g_leaf_addr
    assign leaf_addr = addr[5:0];
  end else begin : g_leaf_addr_pad
    assign leaf_addr = {{(6 - N){1'b0}}, addr};
  end

  for (genvar i = 0; i < NLEAF; i++) begin : g_leaf
    lut6 #(.INIT(leaf_init(i))) u_lut (.i(leaf_addr), .o(node[i]));
  end

  for (genvar j = 1; j <= NLVL; j++) begin : g_lvl
    localparam int unsigned S    = sel_bits(j);
    localparam int unsigned SBIT = 6 + 2 * (j - 1);   // first select bit of this level
    for (genvar g = 0; g < cnt(j); g++) begin : g_mux
      logic [5:0] mux_in;
      if (S == 2) begin : g_m4
        assign mux_in = {addr[SBIT + 1], addr[SBIT],
                         node[offs(j - 1) + 4 * g + 3], node[offs(j - 1) + 4 * g + 2],
                         node[offs(j - 1) + 4 * g + 1], node[offs(j - 1) + 4 * g]};
        lut6 #(.INIT(mux4_init())) u_lut (.i(mux_in), .o(node[offs(j) + g]));
      end else begin : g_m2
        assign mux_in = {3'b000, addr[SBIT],
                         node[offs(j - 1) + 2 * g + 1], node[offs(j - 1) + 2 * g]};
        lut6 #(.INIT(mux2_init())) u_lut (.i(mux_in), .o(node[offs(j) + g]));
      end
    end
  end

  assign out = node[N_LUT6 - 1];
endmodule
