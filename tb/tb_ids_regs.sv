// tb_ids_regs - self-checking test of the AXI4-Lite register file.
// A behavioural stand-in for the two cores answers start with busy for a
// random time, then done and a result. The test checks register read-back,
// the message push and load pulses with their data and address increment,
// layer configuration, start and refused start, the completion interrupt
// with write-1-to-clear, the latency registers and every write-channel order.
module tb_ids_regs;
  import qmlp_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic [7:0]  s_awaddr, s_araddr;
  logic        s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic        s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0]  s_wstrb;
  logic [1:0]  s_bresp, s_rresp;
  logic        irq;
  logic        fb_clear, fb_push;
  logic [28:0] msg_id;
  logic [3:0]  msg_dlc;
  logic [63:0] msg_data;
  logic [2:0]  fb_count = 3'd2;
  logic        fb_full = 1'b0;
  logic [15:0] ld_addr;
  logic [63:0] ld_data;
  logic [1:0]  w_we, b_we, cfg_we;
  logic [2:0]  cfg_layer;
  layer_cfg_t  cfg_data;
  logic        start;
  logic [1:0]  busy = '0, done = '0;
  qmlp_result_t result [2];

  int checks = 0, failures = 0;

  ids_regs dut (.*);
  axil_bfm bfm (.clk, .awaddr(s_awaddr), .awvalid(s_awvalid), .awready(s_awready),
                .wdata(s_wdata), .wstrb(s_wstrb), .wvalid(s_wvalid), .wready(s_wready),
                .bresp(s_bresp), .bvalid(s_bvalid), .bready(s_bready),
                .araddr(s_araddr), .arvalid(s_arvalid), .arready(s_arready),
                .rdata(s_rdata), .rresp(s_rresp), .rvalid(s_rvalid), .rready(s_rready));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pulse monitors
  int n_push = 0, n_clear = 0, n_start = 0, n_w = 0, n_b = 0, n_cfg = 0;
  logic [63:0] last_ld_data;
  logic [15:0] last_ld_addr;
  logic [1:0]  last_we;
  always @(posedge clk) if (rst_n) begin
    if (fb_push) n_push++;
    if (fb_clear) n_clear++;
    if (start) n_start++;
    if (|w_we) begin n_w++; last_ld_data = ld_data; last_ld_addr = ld_addr; last_we = w_we; end
    if (|b_we) begin n_b++; last_ld_data = ld_data; last_ld_addr = ld_addr; last_we = b_we; end
    if (|cfg_we) n_cfg++;
  end

  // stand-in for the two cores
  int lat_model = 0;
  int run_cnt = 0;
  always @(posedge clk) begin
    done <= '0;
    if (!rst_n) begin
      busy    <= '0;
      run_cnt <= 0;
    end else if (start && !busy[0]) begin
      busy    <= 2'b11;
      run_cnt <= lat_model;
    end else if (busy[0]) begin
      if (run_cnt == 1) begin
        busy <= '0;
        done <= 2'b11;
      end
      run_cnt <= run_cnt - 1;
    end
  end

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic rd_check(logic [7:0] a, logic [31:0] exp, string what);
    logic [31:0] d;
    bfm.read(a, d);
    check(what, d, exp);
  endtask

  initial begin
    logic [31:0] d;
    result[0] = '{attack: 1'b1, prob: 8'd200, logit: 8'sd37};
    result[1] = '{attack: 1'b0, prob: 8'd20, logit: -8'sd50};
    repeat (3) @(negedge clk);
    rst_n = 1;

    // read-back registers, all three write orders
    bfm.write(8'h0C, 32'h1234_5678, 0);
    bfm.write(8'h10, 32'hdead_beef, 1);
    bfm.write(8'h14, 32'h0bad_f00d, 2);
    rd_check(8'h0C, 32'h1234_5678 & 32'h1fff_ffff, "MSG_ID");
    rd_check(8'h10, 32'hdead_beef, "MSG_DATA_LO");
    rd_check(8'h14, 32'h0bad_f00d, "MSG_DATA_HI");
    rd_check(8'h04, 32'h0000_0020, "STATUS count 2");
    fb_full = 1; fb_count = 3'd4;
    rd_check(8'h04, 32'h0000_00c0, "STATUS full");
    rd_check(8'h3C, 32'h0, "unmapped");

    // push
    bfm.write(8'h18, 32'h5, 1);
    check("push count", n_push, 1);
    check("push id", {3'b0, msg_id}, 32'h1234_5678 & 32'h1fff_ffff);
    check("push dlc", {28'b0, msg_dlc}, 32'h5);
    check("push data", msg_data[63:32], 32'h0bad_f00d);

    // weight and bias loading with auto-increment
    bfm.write(8'h24, 32'h0000_0064, 0);               // core 1, weights, addr 100
    bfm.write(8'h28, 32'h0102_0304, 0);
    bfm.write(8'h2C, 32'h0506_0708, 2);
    check("w load count", n_w, 1);
    check("w load addr", {16'b0, last_ld_addr}, 32'd100);
    check("w load we", {30'b0, last_we}, 32'b01);
    check("w load data hi", last_ld_data[63:32], 32'h0506_0708);
    check("w load data lo", last_ld_data[31:0], 32'h0102_0304);
    bfm.write(8'h28, 32'haaaa_aaaa, 0);
    bfm.write(8'h2C, 32'h5555_5555, 0);
    check("w load addr +1", {16'b0, last_ld_addr}, 32'd101);
    rd_check(8'h24, 32'd102, "LD_ADDR after two words");
    bfm.write(8'h24, 32'h0003_0007, 0);               // core 2, biases, addr 7
    bfm.write(8'h2C, 32'h1111_2222, 0);
    check("b load count", n_b, 1);
    check("b load we", {30'b0, last_we}, 32'b10);
    check("b load addr", {16'b0, last_ld_addr}, 32'd7);

    // layer configuration
    bfm.write(8'h30, {3'b0, 5'd9, 3'b0, 5'd3, 7'b0, 1'b1, 5'b0, 3'd4}, 0);
    check("cfg count", n_cfg, 1);
    check("cfg layer", {29'b0, cfg_layer}, 32'd4);
    check("cfg shifts", {22'b0, cfg_data.bias_shift, cfg_data.out_shift}, {22'b0, 5'd3, 5'd9});
    check("cfg core", {30'b0, dut.cfg_we}, 32'b0);   // pulse already over

    // start, interrupt, results, latency
    lat_model = 40;
    bfm.write(8'h00, 32'h3, 0);                       // IRQ_EN + START
    check("start count", n_start, 1);
    check("irq low while busy", {31'b0, irq}, 32'b0);
    rd_check(8'h04, 32'h0000_00c3, "STATUS busy");
    wait (irq);
    @(negedge clk);
    rd_check(8'h08, 32'h3, "IRQ_STATUS both done");
    rd_check(8'h1C, {15'b0, 1'b1, 8'd200, 8'd37}, "RESULT1");
    rd_check(8'h20, {15'b0, 1'b0, 8'd20, 8'hce}, "RESULT2");
    rd_check(8'h34, 32'd41, "LATENCY1");
    rd_check(8'h38, 32'd41, "LATENCY2");
    bfm.write(8'h08, 32'h1, 0);
    check("irq held by core 2", {31'b0, irq}, 32'b1);
    bfm.write(8'h08, 32'h2, 0);
    check("irq cleared", {31'b0, irq}, 32'b0);

    // start while busy is refused
    lat_model = 200;
    bfm.write(8'h00, 32'h3, 0);
    bfm.write(8'h00, 32'h3, 0);
    check("refused start", n_start, 2);
    rd_check(8'h08, 32'h4, "IRQ_STATUS refused");
    check("irq on refused start", {31'b0, irq}, 32'b1);
    wait (!busy[0]);
    @(negedge clk);
    rd_check(8'h08, 32'h7, "IRQ_STATUS all");
    bfm.write(8'h08, 32'h7, 0);
    rd_check(8'h00, 32'h1, "CTRL irq_en");
    bfm.write(8'h00, 32'h0, 0);
    check("irq disabled", {31'b0, irq}, 32'b0);

    // clear
    bfm.write(8'h00, 32'h4, 0);
    check("clear pulse", n_clear, 1);
    check("no stray start", n_start, 2);
    check("no stray push", n_push, 1);
    check("bus responses", bfm.bad_responses, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
