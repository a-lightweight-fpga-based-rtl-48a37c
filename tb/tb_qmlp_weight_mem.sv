// tb_qmlp_weight_mem - self-checking test of the parameter memory at its
// default size. Fills every word with random data, reads all back in a
// different order (one-cycle read latency), checks that data holds while
// rd_en is low and that a read of the address being written returns the old
// word.
module tb_qmlp_weight_mem;
  localparam int WIDTH = 64;
  localparam int DEPTH = 6688;
  localparam int AW    = $clog2(DEPTH);

  logic             clk = 0;
  logic             wr_en = 0, rd_en = 0;
  logic [AW-1:0]    wr_addr = '0, rd_addr = '0;
  logic [WIDTH-1:0] wr_data = '0, rd_data;
  logic [WIDTH-1:0] model [DEPTH];
  int               checks = 0, failures = 0;
  int               last_a;
  logic [WIDTH-1:0] last;

  qmlp_weight_mem dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_data(logic [WIDTH-1:0] e, string what);
    checks++;
    if (rd_data !== e) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, rd_data, e);
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = {$urandom, $urandom};
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_data = model[a];
    end
    @(negedge clk) wr_en = 0;
    // read back with a stride that visits every word (7 is coprime to DEPTH)
    for (int k = 0; k < DEPTH; k++) begin
      automatic int a = (k * 7) % DEPTH;
      @(negedge clk);
      rd_en = 1; rd_addr = AW'(a);
      @(negedge clk);
      rd_en = 0;
      expect_data(model[a], $sformatf("read %0d", a));
      last_a = a;
    end
    // hold while rd_en is low
    last = rd_data;
    rd_addr = AW'(5);
    repeat (3) @(negedge clk);
    checks++;
    if (rd_data !== last || last !== model[last_a]) begin
      failures++;
      $display("FAIL hold: %h %h %h", rd_data, last, model[last_a]);
    end
    // read-during-write returns the old word
    @(negedge clk);
    rd_en = 1; rd_addr = AW'(11); wr_en = 1; wr_addr = AW'(11); wr_data = ~model[11];
    @(negedge clk);
    rd_en = 0; wr_en = 0;
    expect_data(model[11], "read during write");
    model[11] = ~model[11];
    @(negedge clk);
    rd_en = 1; rd_addr = AW'(11);
    @(negedge clk);
    rd_en = 0;
    expect_data(model[11], "after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
