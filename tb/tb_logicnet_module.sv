// tb_logicnet_module: end-to-end test of the jet-tagging network (model E sizes).
//
// Three copies of the network with the same seed are driven with the same stream:
//   u_pipe  default configuration: registered, truth tables left to synthesis;
//   u_lut6  registered, every neuron mapped explicitly onto 6:1 LUTs;
//   u_comb  unregistered (purely combinational) mode.
// Every result is compared with the arithmetic reference model (four layers of
// weighted sums, offsets and quantizers, no truth tables). The registered copies must
// deliver each result exactly LATENCY = 4 cycles after it was accepted, accept a new
// input every cycle, pass bubbles through, and drop everything in flight on reset.
// Each of these events is counted, and one that never happened counts as a failure.
module tb_logicnet_module;
  import logicnet_pkg::*;
  import logicnet_ref_pkg::*;

  localparam int NF = 16, DW = 16, STEP = 256, NC = 5, BWFC = 4, SEED = 2019;
  localparam int LAT = 4;

  int checks = 0, failures = 0;
  int n_b2b = 0, n_bubble = 0, n_clamp_hi = 0, n_clamp_lo = 0, n_flush = 0;
  int n_comb = 0, n_lut6 = 0, n_results = 0;
  int cycle = 0;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [NF*DW-1:0] features = '0;
  logic ov_p, ov_l, ov_c;
  logic [NC*BWFC-1:0] sc_p, sc_l, sc_c;

  logicnet_module u_pipe (.clk, .rst_n, .in_valid, .features, .out_valid(ov_p), .scores(sc_p));
  logicnet_module #(.IMPL(IMPL_LUT6)) u_lut6 (.clk, .rst_n, .in_valid, .features,
                                              .out_valid(ov_l), .scores(sc_l));
  logicnet_module #(.PIPELINED(1'b0)) u_comb (.clk, .rst_n, .in_valid, .features,
                                              .out_valid(ov_c), .scores(sc_c));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cycle, what); end
  endtask

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

  // Expected results in flight: value and the cycle it was accepted.
  logic [NC*BWFC-1:0] exp_q[$];
  int                 t_q[$];

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output side: compare on every rising edge, after the registers update.
  always @(posedge clk) begin
    #2;
    if (rst_n) begin
      chk(ov_p == ov_l, "both registered copies agree on valid");
      if (ov_p) begin
        if (exp_q.size() == 0) chk(1'b0, "result with nothing in flight");
        else begin
          logic [NC*BWFC-1:0] e;
          int t;
          e = exp_q.pop_front();
          t = t_q.pop_front();
          chk(sc_p == e, "registered result matches reference");
          chk(sc_l == e, "6:1 LUT mapped result matches reference");
          chk(cycle - t == LAT, $sformatf("latency of 4 cycles (saw %0d)", cycle - t));
          n_results++;
          if (sc_l == e) n_lut6++;
        end
      end
    end
  end

  initial begin
    logic [NC*BWFC-1:0] e;
    bit prev_v = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      // Mid-stream reset: whatever is in flight is discarded.
      if (i == 300) begin
        rst_n = 1'b0;
        in_valid = 1'b0;
        if (exp_q.size() > 0) n_flush++;
        exp_q.delete();
        t_q.delete();
        @(negedge clk);
        chk(ov_p == 1'b0 && ov_l == 1'b0, "reset clears valid");
        rst_n = 1'b1;
      end
      in_valid = ($urandom % 5) != 0;
      for (int f = 0; f < NF; f++) begin
        case ($urandom % 4)
          0: features[f * DW +: DW] = 16'($urandom);                    // full range
          1: features[f * DW +: DW] = 16'($urandom % 1100);             // within levels
          2: features[f * DW +: DW] = 16'($urandom % 900) - 16'd100;    // around zero
          default: features[f * DW +: DW] = 16'($urandom % 4000);
        endcase
        if ($signed(features[f * DW +: DW]) >= 16'sd640) n_clamp_hi++;
        if ($signed(features[f * DW +: DW]) < 16'sd0) n_clamp_lo++;
      end
      e = ref_net(features);
      #1;
      // Combinational mode: result within the same cycle.
      chk(sc_c == e, "combinational result matches reference");
      chk(ov_c == in_valid, "combinational valid follows input");
      n_comb++;
      if (in_valid) begin
        exp_q.push_back(e);
        t_q.push_back(cycle);   // edges seen before the one that accepts it
        if (prev_v) n_b2b++;
      end else n_bubble++;
      prev_v = in_valid;
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (LAT + 2) @(posedge clk);
    #3;
    chk(exp_q.size() == 0, "all accepted inputs produced a result");
    $display("events: back_to_back=%0d bubbles=%0d clamp_hi=%0d clamp_lo=%0d flush=%0d comb=%0d lut6=%0d results=%0d",
             n_b2b, n_bubble, n_clamp_hi, n_clamp_lo, n_flush, n_comb, n_lut6, n_results);
    chk(n_b2b > 0, "back-to-back inputs (II=1) happened");
    chk(n_bubble > 0, "bubble happened");
    chk(n_clamp_hi > 0, "input quantizer upper clamp happened");
    chk(n_clamp_lo > 0, "input quantizer lower clamp happened");
    chk(n_flush > 0, "reset flush happened");
    chk(n_comb > 0, "combinational mode exercised");
    chk(n_lut6 > 0, "6:1 LUT mapping exercised");
    chk(n_results > 100, "enough results");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
