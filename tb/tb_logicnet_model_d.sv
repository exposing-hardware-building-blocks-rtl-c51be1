// tb_logicnet_model_d: the jet-tagging network resized to model D of the jet study:
// hidden layers of 64, 32 and 32 neurons, 2-bit activations, fan-in 5 (10-bit tables),
// and an output layer of fan-in 6 (12-bit tables) with 4-bit scores. Only parameters
// change; 200 jets are streamed with random bubbles and every result is checked
// against the reference model, with the four-cycle latency.
module tb_logicnet_model_d;
  import logicnet_pkg::*;
  import logicnet_ref_pkg::*;

  localparam int NF = 16, DW = 16, STEP = 256, NC = 5, BWFC = 4, SEED = 77;
  localparam int H1 = 64, H2 = 32, H3 = 32, XH = 5, XO = 6;
  int checks = 0, failures = 0, cycle = 0, results = 0;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [NF*DW-1:0]   features = '0;
  logic [NC*BWFC-1:0] scores;

  logicnet_module #(.HL1(H1), .HL2(H2), .HL3(H3), .X(XH), .X_FC(XO), .SEED(SEED)) dut (
    .clk, .rst_n, .in_valid, .features, .out_valid, .scores);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  function automatic logic [NC*BWFC-1:0] ref_net(logic [NF*DW-1:0] f);
    vec_t v;
    logic [NC*BWFC-1:0] s;
    for (int i = 0; i < MAXN; i++) v[i] = 0;
    for (int i = 0; i < NF; i++) v[i] = ref_quant(int'($signed(f[i * DW +: DW])), 2, STEP);
    v = ref_layer(v, NF, 2, H1, XH, 2, SEED, 0);
    v = ref_layer(v, H1, 2, H2, XH, 2, SEED, 1);
    v = ref_layer(v, H2, 2, H3, XH, 2, SEED, 2);
    v = ref_layer(v, H3, 2, NC, XO, BWFC, SEED, 3);
    for (int c = 0; c < NC; c++) s[c * BWFC +: BWFC] = BWFC'(v[c]);
    return s;
  endfunction

  logic [NC*BWFC-1:0] exp_q[$];
  int                 t_q[$];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #2;
    if (rst_n && out_valid) begin
      logic [NC*BWFC-1:0] e;
      int t;
      checks += 2;
      if (exp_q.size() == 0) begin
        failures += 2;
        $display("FAIL result with nothing in flight");
      end else begin
        e = exp_q.pop_front();
        t = t_q.pop_front();
        if (scores != e) begin failures++; $display("FAIL scores %h exp %h", scores, e); end
        if (cycle - t != 4) begin failures++; $display("FAIL latency %0d", cycle - t); end
        results++;
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      for (int f = 0; f < NF; f++) features[f * DW +: DW] = 16'($urandom % 1200) - 16'd200;
      if (in_valid) begin
        exp_q.push_back(ref_net(features));
        t_q.push_back(cycle);
      end
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (6) @(posedge clk);
    #3;
    checks += 2;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    if (results < 100) begin failures++; $display("FAIL only %0d results", results); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
