// tb_can_workloads - the accelerator on four attack-shaped CAN traffic mixes.
//
// The detectors are evaluated on four kinds of intrusion: DoS, fuzzing, RPM
// spoofing and gear spoofing. The trained weights are not available, so this
// test uses random models and checks the hardware, not the detection quality:
// every result must match the integer reference model bit for bit, and each
// message, handled the way the IDS software would handle it (write the frame,
// push, start, wait for the interrupt, read both results, clear), must fit in
// the per-message budget. The budget is 0.24 ms per message at a 600 MHz
// clock, i.e. 144,000 cycles; the test also reports the worst case against a
// back-to-back 8-byte frame on a 1 Mbit/s bus (111 us = 66,600 cycles).
//
// Traffic shapes (one normal frame between injected ones):
//   DoS   : identifier 0x000, eight zero bytes
//   fuzz  : random identifier and payload
//   RPM   : identifier 0x316 with a fixed forged payload
//   gear  : identifier 0x43F with a fixed forged payload
// Normal frames cycle through identifiers seen in a vehicle capture.
module tb_can_workloads;
  import qmlp_pkg::*;
  import qmlp_ref_pkg::*;

  localparam int MSGS_PER_TRACE = 40;
  localparam int BUDGET_CYCLES  = 144000;   // 0.24 ms at 600 MHz
  localparam int LINE_CYCLES    = 66600;    // 111 us at 600 MHz

  logic        clk = 0, rst_n = 0;
  logic [7:0]  s_awaddr, s_araddr;
  logic        s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic        s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0]  s_wstrb;
  logic [1:0]  s_bresp, s_rresp;
  logic        irq;

  int checks = 0, failures = 0;
  int worst = 0;
  longint cyc = 0;

  ids_ecu_pl dut (.*);
  axil_bfm bfm (.clk, .awaddr(s_awaddr), .awvalid(s_awvalid), .awready(s_awready),
                .wdata(s_wdata), .wstrb(s_wstrb), .wvalid(s_wvalid), .wready(s_wready),
                .bresp(s_bresp), .bvalid(s_bvalid), .bready(s_bready),
                .araddr(s_araddr), .arvalid(s_arvalid), .arready(s_arready),
                .rdata(s_rdata), .rresp(s_rresp), .rvalid(s_rvalid), .rready(s_rready));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  int win[$];

  // One message as the IDS software handles it; returns the cycles it took.
  task automatic one_message(qmlp_model m1, qmlp_model m2, logic [28:0] id, logic [63:0] data);
    int x[] = new[NUM_FEATURES];
    int pad, l1, l2;
    longint t0 = cyc;
    logic [31:0] d;
    bfm.write(8'h0C, 32'(id));
    bfm.write(8'h10, data[31:0]);
    bfm.write(8'h14, data[63:32]);
    bfm.write(8'h18, 32'd8);
    if (win.size() == NUM_FEATURES) repeat (MSG_BYTES) void'(win.pop_front());
    win.push_back(int'($signed(id[15:8])));
    win.push_back(int'($signed(id[7:0])));
    for (int k = 0; k < 8; k++) win.push_back(int'($signed(data[8*k +: 8])));
    pad = NUM_FEATURES - win.size();
    foreach (x[i]) x[i] = (i < pad) ? 0 : win[i - pad];
    l1 = m1.infer(x);
    l2 = m2.infer(x);
    bfm.write(8'h00, 32'h3);
    wait (irq);
    bfm.read(8'h1C, d);
    check("RESULT1", d, {15'b0, 1'(l1 >= 0), 8'(ref_prob(l1)), 8'(l1)});
    bfm.read(8'h20, d);
    check("RESULT2", d, {15'b0, 1'(l2 >= 0), 8'(ref_prob(l2)), 8'(l2)});
    bfm.write(8'h08, 32'h3);
    if (int'(cyc - t0) > worst) worst = int'(cyc - t0);
  endtask

  localparam logic [28:0] NORMAL_IDS [4] = '{29'h316, 29'h18f, 29'h260, 29'h2a0};

  initial begin
    qmlp_model m1, m2;
    repeat (3) @(negedge clk);
    rst_n = 1;
    m1 = new(16);
    m2 = new(12);
    bfm.backpressure = 0;
    load(m1, 0);
    load(m2, 1);
    for (int t = 0; t < 4; t++) begin
      bfm.write(8'h00, 32'h4);   // new trace: clear the window
      win.delete();
      for (int i = 0; i < MSGS_PER_TRACE; i++) begin
        logic [28:0] id;
        logic [63:0] data;
        if (i % 2 == 0) begin
          id   = NORMAL_IDS[(i / 2) % 4];
          data = {$urandom, $urandom};
        end else begin
          case (t)
            0: begin id = 29'h000; data = 64'h0; end
            1: begin id = 29'($urandom_range(0, 12'h7ff)); data = {$urandom, $urandom}; end
            2: begin id = 29'h316; data = 64'h00_00_00_00_10_2b_00_05; end
            default: begin id = 29'h43f; data = 64'h00_00_00_00_60_45_00_01; end
          endcase
        end
        one_message(m1, m2, id, data);
      end
      $display("trace %0d done, worst cycles per message so far %0d", t, worst);
    end
    checks++;
    if (worst > BUDGET_CYCLES) begin
      failures++;
      $display("FAIL worst per-message cycles %0d exceed %0d", worst, BUDGET_CYCLES);
    end
    checks++;
    if (worst > LINE_CYCLES) begin
      failures++;
      $display("FAIL worst per-message cycles %0d exceed 1 Mbit/s frame time %0d", worst, LINE_CYCLES);
    end
    $display("worst per-message cycles %0d (budget %0d, 1 Mbit/s frame %0d)", worst, BUDGET_CYCLES, LINE_CYCLES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
