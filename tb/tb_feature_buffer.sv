// tb_feature_buffer - self-checking test of the 4-message feature window.
// Pushes random CAN messages (random DLC 0..15) and after each push compares
// all 40 feature values, count and full with a reference window kept in the
// testbench; also checks the zero state after reset, clear, and that clear
// wins over a simultaneous push.
module tb_feature_buffer;
  import qmlp_pkg::*;

  logic        clk = 0, rst_n = 0, clear = 0, push = 0;
  logic [28:0] msg_id = '0;
  logic [3:0]  msg_dlc = '0;
  logic [63:0] msg_data = '0;
  int8_t       features [NUM_FEATURES];
  logic [2:0]  count;
  logic        full;
  int          checks = 0, failures = 0;

  byte unsigned ref_win [FIFO_DEPTH][MSG_BYTES];
  int           ref_count;

  feature_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ref_clear();
    foreach (ref_win[m, b]) ref_win[m][b] = 0;
    ref_count = 0;
  endtask

  task automatic compare(string what);
    checks++;
    for (int m = 0; m < FIFO_DEPTH; m++)
      for (int b = 0; b < MSG_BYTES; b++)
        if (8'(features[m*MSG_BYTES+b]) !== ref_win[m][b]) begin
          failures++;
          $display("FAIL %s: slot %0d byte %0d = %h expected %h", what, m, b,
                   features[m*MSG_BYTES+b], ref_win[m][b]);
          return;
        end
    checks++;
    if (int'(count) != ref_count || full != (ref_count == FIFO_DEPTH)) begin
      failures++;
      $display("FAIL %s: count %0d full %0d expected %0d", what, count, full, ref_count);
    end
  endtask

  task automatic push_msg(logic [28:0] id, logic [3:0] dlc, logic [63:0] data, bit with_clear);
    @(negedge clk);
    msg_id = id; msg_dlc = dlc; msg_data = data; push = 1; clear = with_clear;
    @(negedge clk);
    push = 0; clear = 0;
    if (with_clear) ref_clear();
    else begin
      int n = (dlc > 8) ? 8 : int'(dlc);
      for (int m = 0; m < FIFO_DEPTH - 1; m++) ref_win[m] = ref_win[m+1];
      ref_win[FIFO_DEPTH-1][0] = id[15:8];
      ref_win[FIFO_DEPTH-1][1] = id[7:0];
      for (int k = 0; k < 8; k++) ref_win[FIFO_DEPTH-1][2+k] = (k < n) ? data[8*k +: 8] : 8'h00;
      if (ref_count < FIFO_DEPTH) ref_count++;
    end
  endtask

  initial begin
    ref_clear();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    compare("after reset");
    // a message from the dataset extract: ID 0316, DLC 8
    push_msg(29'h316, 4'd8, 64'h6f_00_21_21_09_68_21_05, 0);
    compare("first message");
    checks++;
    if (features[30] !== 8'sh03 || features[31] !== 8'sh16 || features[32] !== 8'sh05 ||
        features[39] !== 8'sh6f) begin
      failures++;
      $display("FAIL packing of ID 0316");
    end
    for (int i = 0; i < 300; i++) begin
      push_msg(29'($urandom), 4'($urandom), {$urandom, $urandom}, 0);
      compare($sformatf("push %0d", i));
      if (i == 150) begin
        @(negedge clk) clear = 1;
        @(negedge clk) clear = 0;
        ref_clear();
        compare("clear");
      end
    end
    push_msg(29'h18f, 4'd8, 64'h1, 1);
    compare("clear with push");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
