// tb_act_register: the register must clear on reset, capture data and valid on each
// rising edge (one cycle of latency) and accept a new value every cycle.
module tb_act_register;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [11:0] d = '0, q;
  act_register #(.WIDTH(12)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [11:0] prev_d;
    logic        prev_v;
    in_valid = 1'b1;
    d = 12'hABC;
    @(posedge clk); #1;
    checks++;
    if (out_valid !== 1'b0 || q !== '0) begin failures++; $display("FAIL reset"); end
    rst_n = 1'b1;
    for (int i = 0; i < 200; i++) begin
      prev_d = $urandom;
      prev_v = $urandom;
      d = prev_d;
      in_valid = prev_v;
      @(posedge clk); #1;
      checks++;
      if (q !== prev_d || out_valid !== prev_v) begin
        failures++; $display("FAIL capture %0d", i);
      end
    end
    // Reset while a valid vector is being presented: valid must still clear.
    in_valid = 1'b1;
    d = 12'h5A5;
    @(posedge clk); #1;
    checks++;
    if (out_valid !== 1'b1 || q !== 12'h5A5) begin failures++; $display("FAIL capture before reset"); end
    rst_n = 1'b0;
    @(posedge clk); #1;
    checks++;
    if (out_valid !== 1'b0 || q !== '0) begin failures++; $display("FAIL reset 2"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
