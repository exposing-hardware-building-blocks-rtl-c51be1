// tb_lut6: exhaustive check of the 6:1 LUT against three configuration words.
module tb_lut6;
  int checks = 0, failures = 0;
  localparam logic [63:0] A = 64'hDEAD_BEEF_0123_4567;
  localparam logic [63:0] B = 64'h8000_0000_0000_0001;
  localparam logic [63:0] C = 64'h6996_9669_9669_6996;   // 6-input parity
  logic [5:0] i;
  logic oa, ob, oc;
  lut6 #(.INIT(A)) u_a (.i(i), .o(oa));
  lut6 #(.INIT(B)) u_b (.i(i), .o(ob));
  lut6 #(.INIT(C)) u_c (.i(i), .o(oc));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 64; a++) begin
      i = 6'(a);
      #1;
      checks += 3;
      if (oa != ((A >> a) & 64'd1)) begin failures++; $display("FAIL A %0d", a); end
      if (ob != (a == 0 || a == 63)) begin failures++; $display("FAIL B %0d", a); end
      if (oc != ^i) begin failures++; $display("FAIL C %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
