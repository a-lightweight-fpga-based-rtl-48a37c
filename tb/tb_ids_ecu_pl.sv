// tb_ids_ecu_pl - end-to-end test of the IDS accelerator at its default size.
// Acts as the processor-side software: loads two different random models
// over AXI4-Lite, then for a stream of CAN messages (the first three taken
// from a real vehicle capture) pushes each message, starts both detectors,
// waits for the completion interrupt and reads both results, comparing them
// with the integer reference model applied to the reference 4-message window.
// It counts each mechanism of the design and fails if one never happened:
// concurrent completion of both cores, interrupt, partial window (fewer than
// 4 messages), full window sliding, window clear, start refused while busy,
// ReLU clipping, INT8 saturation, and both attack and normal verdicts.
module tb_ids_ecu_pl;
  import qmlp_pkg::*;
  import qmlp_ref_pkg::*;

  localparam int N_MSGS = 14;

  logic        clk = 0, rst_n = 0;
  logic [7:0]  s_awaddr, s_araddr;
  logic        s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic        s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0]  s_wstrb;
  logic [1:0]  s_bresp, s_rresp;
  logic        irq;

  int checks = 0, failures = 0;
  int n_concurrent = 0, n_irq = 0, n_partial = 0, n_slide = 0, n_clear = 0;
  int n_refused = 0, n_attack = 0, n_normal = 0;

  ids_ecu_pl dut (.*);
  axil_bfm bfm (.clk, .awaddr(s_awaddr), .awvalid(s_awvalid), .awready(s_awready),
                .wdata(s_wdata), .wstrb(s_wstrb), .wvalid(s_wvalid), .wready(s_wready),
                .bresp(s_bresp), .bvalid(s_bvalid), .bready(s_bready),
                .araddr(s_araddr), .arvalid(s_arvalid), .arready(s_arready),
                .rdata(s_rdata), .rresp(s_rresp), .rvalid(s_rvalid), .rready(s_rready));

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // both cores finishing on the same cycle
  always @(posedge clk) if (dut.done == 2'b11) n_concurrent++;

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic load(qmlp_model m, int core);
    logic [63:0] words[$];
    m.weight_words(words);
    bfm.write(8'h24, 32'(core) << 16);
    foreach (words[k]) begin
      bfm.write(8'h28, words[k][31:0]);
      bfm.write(8'h2C, words[k][63:32]);
    end
    m.bias_words(words);
    bfm.write(8'h24, (32'(core) << 16) | 32'h2_0000);
    foreach (words[k]) begin
      bfm.write(8'h28, words[k][31:0]);
      bfm.write(8'h2C, words[k][63:32]);
    end
    for (int l = 1; l <= 5; l++)
      bfm.write(8'h30, (32'(m.os[l]) << 24) | (32'(m.bs[l]) << 16) | (32'(core) << 8) | 32'(l));
  endtask

  // reference window, oldest first
  int win[$];

  task automatic push(logic [28:0] id, int dlc, logic [63:0] data);
    int n = (dlc > 8) ? 8 : dlc;
    bfm.write(8'h0C, 32'(id));
    bfm.write(8'h10, data[31:0]);
    bfm.write(8'h14, data[63:32]);
    bfm.write(8'h18, 32'(dlc));
    if (win.size() == NUM_FEATURES) begin
      n_slide++;
      repeat (MSG_BYTES) void'(win.pop_front());
    end
    win.push_back(int'($signed(id[15:8])));
    win.push_back(int'($signed(id[7:0])));
    for (int k = 0; k < 8; k++) win.push_back(k < n ? int'($signed(data[8*k +: 8])) : 0);
  endtask

  task automatic run_and_check(qmlp_model m1, qmlp_model m2, bit try_refuse);
    int x[] = new[NUM_FEATURES];
    int pad = NUM_FEATURES - win.size();
    int l1, l2;
    logic [31:0] d;
    if (pad > 0) n_partial++;
    foreach (x[i]) x[i] = (i < pad) ? 0 : win[i - pad];
    l1 = m1.infer(x);
    l2 = m2.infer(x);
    bfm.write(8'h00, 32'h3);                 // IRQ_EN + START
    if (try_refuse) begin
      bfm.write(8'h00, 32'h3);               // second START while busy
      bfm.read(8'h08, d);
      check("refused start flagged", d & 32'h4, 32'h4);
      if (d[2]) n_refused++;
      bfm.write(8'h08, 32'h4);
    end
    wait (irq);
    n_irq++;
    bfm.read(8'h08, d);
    check("both cores done", d, 32'h3);
    bfm.read(8'h1C, d);
    check("RESULT1", d, {15'b0, 1'(l1 >= 0), 8'(ref_prob(l1)), 8'(l1)});
    bfm.read(8'h20, d);
    check("RESULT2", d, {15'b0, 1'(l2 >= 0), 8'(ref_prob(l2)), 8'(l2)});
    bfm.read(8'h34, d);
    check("LATENCY1", d, 32'(ref_cycles(8)));
    bfm.read(8'h38, d);
    check("LATENCY2", d, 32'(ref_cycles(8)));
    if (l1 >= 0) n_attack++; else n_normal++;
    if (l2 >= 0) n_attack++; else n_normal++;
    bfm.write(8'h08, 32'h3);
    check("irq cleared", {31'b0, irq}, 32'b0);
  endtask

  task automatic need(string what, int n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    qmlp_model m1, m2;
    logic [31:0] d;
    repeat (3) @(negedge clk);
    rst_n = 1;
    m1 = new(16);
    m2 = new(12);
    bfm.backpressure = 0;
    load(m1, 0);
    load(m2, 1);
    bfm.backpressure = 1;

    // first messages from a vehicle capture (ID, DLC 8, payload bytes 0..7)
    push(29'h316, 8, 64'h6f_00_21_21_09_68_21_05);
    run_and_check(m1, m2, 0);
    push(29'h18f, 8, 64'h00_00_3c_00_00_00_5b_fe);
    run_and_check(m1, m2, 1);
    push(29'h260, 8, 64'h3a_6d_8e_08_30_22_21_19);
    run_and_check(m1, m2, 0);
    bfm.read(8'h04, d);
    check("STATUS three messages", d, 32'h30);
    for (int i = 0; i < N_MSGS; i++) begin
      push(29'($urandom), int'($urandom_range(0, 15)), {$urandom, $urandom});
      run_and_check(m1, m2, i == 5);
      if (i == 8) begin
        bfm.write(8'h00, 32'h5);             // clear the window
        win.delete();
        n_clear++;
        bfm.read(8'h04, d);
        check("STATUS after clear", d, 32'h0);
      end
    end
    bfm.read(8'h04, d);
    check("STATUS full", d, 32'hc0);
    check("bus responses", bfm.bad_responses, 0);

    $display("mechanisms:");
    need("concurrent core completion", n_concurrent);
    need("completion interrupt", n_irq);
    need("partial window", n_partial);
    need("window slide", n_slide);
    need("window clear", n_clear);
    need("start refused while busy", n_refused);
    need("ReLU clipping", m1.relu_clips + m2.relu_clips);
    need("INT8 saturation", m1.saturations + m2.saturations);
    need("attack verdict", n_attack);
    need("normal verdict", n_normal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
