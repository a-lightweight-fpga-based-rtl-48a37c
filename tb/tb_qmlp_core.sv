// tb_qmlp_core - self-checking test of one QMLP inference engine at its
// default size (8 lanes, full 40-256-128-64-32-1 network).
// Loads a random model, runs several random feature windows and compares
// logit, probability and attack flag with the integer reference model; checks
// the start-to-done latency (6812 cycles) and that a start while busy is
// ignored. A second model is loaded over the first to show reloading works.
module tb_qmlp_core;
  import qmlp_pkg::*;
  import qmlp_ref_pkg::*;

  localparam int WAW = $clog2(weight_words(DEF_LANES));
  localparam int BAW = $clog2(bias_words(DEF_LANES));

  logic           clk = 0, rst_n = 0;
  logic           w_we = 0, b_we = 0, cfg_we = 0, start = 0;
  logic [WAW-1:0] w_addr = '0;
  logic [BAW-1:0] b_addr = '0;
  logic [63:0]    w_data = '0, b_data = '0;
  logic [2:0]     cfg_layer = '0;
  layer_cfg_t     cfg_data = '0;
  int8_t          features [NUM_FEATURES];
  logic           busy, done;
  qmlp_result_t   result;
  int             checks = 0, failures = 0;
  int             attacks_seen = 0, normals_seen = 0;

  qmlp_core dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(qmlp_model m);
    logic [63:0] words[$];
    m.weight_words(words);
    foreach (words[k]) begin
      @(negedge clk); w_we = 1; w_addr = WAW'(k); w_data = words[k];
    end
    @(negedge clk); w_we = 0;
    m.bias_words(words);
    foreach (words[k]) begin
      @(negedge clk); b_we = 1; b_addr = BAW'(k); b_data = words[k];
    end
    @(negedge clk); b_we = 0;
    for (int l = 1; l <= 5; l++) begin
      @(negedge clk);
      cfg_we = 1; cfg_layer = 3'(l);
      cfg_data.bias_shift = 5'(m.bs[l]); cfg_data.out_shift = 5'(m.os[l]);
    end
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic run(qmlp_model m, int x[], bit poke_start);
    int logit, cyc;
    for (int i = 0; i < NUM_FEATURES; i++) features[i] = int8_t'(x[i]);
    logit = m.infer(x);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    if (poke_start) begin
      // change the inputs and pulse start mid-run: both must be ignored
      repeat (100) @(negedge clk);
      cyc += 100;
      for (int i = 0; i < NUM_FEATURES; i++) features[i] = int8_t'($urandom);
      start = 1;
      @(negedge clk); start = 0;
      cyc++;
    end
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (cyc > 20000) break;
    end
    checks++;
    if (cyc != ref_cycles(DEF_LANES) || cyc != 6812) begin
      failures++;
      $display("FAIL latency %0d cycles, expected %0d", cyc, ref_cycles(DEF_LANES));
    end
    checks++;
    if (int'(result.logit) != logit || int'(result.prob) != ref_prob(logit) ||
        result.attack != (logit >= 0)) begin
      failures++;
      $display("FAIL result logit %0d prob %0d attack %0d, expected logit %0d prob %0d",
               result.logit, result.prob, result.attack, logit, ref_prob(logit));
    end
    if (logit >= 0) attacks_seen++; else normals_seen++;
    @(negedge clk);
    checks++;
    if (busy || done) begin
      failures++;
      $display("FAIL busy/done not back to idle");
    end
  endtask

  initial begin
    qmlp_model m1, m2;
    int x[];
    x = new[NUM_FEATURES];
    repeat (3) @(negedge clk);
    rst_n = 1;
    m1 = new(16);
    load(m1);
    for (int r = 0; r < 6; r++) begin
      foreach (x[i]) x[i] = int'($urandom_range(0, 255)) - 128;
      run(m1, x, r == 2);
    end
    m2 = new(12);
    load(m2);
    for (int r = 0; r < 6; r++) begin
      foreach (x[i]) x[i] = int'($urandom_range(0, 255)) - 128;
      run(m2, x, 0);
    end
    $display("attack results %0d, normal results %0d, ReLU clips %0d, saturations %0d",
             attacks_seen, normals_seen, m1.relu_clips + m2.relu_clips,
             m1.saturations + m2.saturations);
    checks++;
    if (m1.relu_clips + m2.relu_clips == 0 || m1.saturations + m2.saturations == 0) begin
      failures++;
      $display("FAIL ReLU or saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
