// act_register: the pipeline register placed in front of every LUT layer.
//
// Holds WIDTH activation bits and a valid flag. On each rising clock edge it captures
// d and in_valid, so a new input vector can enter every cycle (initiation interval 1)
// and each register adds one cycle of latency. Synchronous, active-low reset clears
// both the valid flag and the data.
//
// Registers at the network input and between layers follow the paper's generated
// module; the valid flag and the reset are this design's own additions so that a user
// can tell which output cycles carry a result.
module act_register #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] d,
  output logic             out_valid,
  output logic [WIDTH-1:0] q
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      q         <= '0;
    end else begin
      out_valid <= in_valid;
      q         <= d;
    end
  end
endmodule
