// tb_logicnet_full: the network exactly as delivered (every parameter at its default:
// model E sizes, registered, seed 2019) classifying 64 jets streamed one per cycle.
// Each result is compared with the arithmetic reference model and must arrive
// 4 cycles after its input; the predicted class (largest score, lowest index on ties)
// is printed per class as a summary.
module tb_logicnet_full;
  import logicnet_pkg::*;
  import logicnet_ref_pkg::*;

  localparam int NF = 16, DW = 16, STEP = 256, NC = 5, BWFC = 4, SEED = 2019;
  int checks = 0, failures = 0;
  int cycle = 0;
  int votes[NC];

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [NF*DW-1:0]   features = '0;
  logic [NC*BWFC-1:0] scores;

  logicnet_module dut (.clk, .rst_n, .in_valid, .features, .out_valid, .scores);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  function automatic logic [NC*BWFC-1:0] ref_net(logic [NF*DW-1:0] f);
    vec_t v;
    logic [NC*BWFC-1:0] s;
    for (int i = 0; i < MAXN; i++) v[i] = 0;
    for (int i = 0; i < NF; i++) v[i] = ref_quant(int'($signed(f[i * DW +: DW])), 2, STEP);
    v = ref_layer(v, NF, 2, 64, 4, 2, SEED, 0);
    v = ref_layer(v, 64, 2, 64, 4, 2, SEED, 1);
    v = ref_layer(v, 64, 2, 64, 4, 2, SEED, 2);
    v = ref_layer(v, 64, 2, NC, 4, BWFC, SEED, 3);
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
      int t, best;
      e = exp_q.pop_front();
      t = t_q.pop_front();
      checks += 2;
      if (scores != e) begin failures++; $display("FAIL scores %h exp %h", scores, e); end
      if (cycle - t != 4) begin failures++; $display("FAIL latency %0d", cycle - t); end
      best = 0;
      for (int c = 1; c < NC; c++) if (scores[c * BWFC +: BWFC] > scores[best * BWFC +: BWFC]) best = c;
      votes[best]++;
    end
  end

  initial begin
    for (int c = 0; c < NC; c++) votes[c] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      in_valid = 1'b1;
      for (int f = 0; f < NF; f++) features[f * DW +: DW] = 16'($urandom % 1200) - 16'd200;
      exp_q.push_back(ref_net(features));
      t_q.push_back(cycle);
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (6) @(posedge clk);
    #3;
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("predicted classes g,q,W,Z,t: %0d %0d %0d %0d %0d", votes[0], votes[1], votes[2], votes[3], votes[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
