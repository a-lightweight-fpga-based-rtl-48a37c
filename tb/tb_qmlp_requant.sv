// tb_qmlp_requant - self-checking test of the bias / rescale / ReLU unit.
// Directed cases with hand-worked results (rounding both signs, saturation
// both ends, ReLU, bias shift), then random accumulators checked against a
// reference written with 64-bit integer division.
module tb_qmlp_requant;
  import qmlp_pkg::*;

  acc_t       acc;
  int8_t      bias;
  logic [4:0] bias_shift, out_shift;
  logic       relu_en;
  int8_t      q;
  int         checks = 0, failures = 0;

  qmlp_requant dut (.*);

  // reference: floor((s + half) / 2**os) with a true floor for negatives
  function automatic int ref_q(longint a, int b, int bs, int os, bit relu);
    longint s = a + longint'(b) * (longint'(1) << bs);
    longint d = longint'(1) << os;
    longint r;
    if (os > 0) s = s + d / 2;
    r = s / d;
    if ((s % d != 0) && (s < 0)) r = r - 1;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    if (relu && r < 0) r = 0;
    return int'(r);
  endfunction

  task automatic check(longint a, int b, int bs, int os, bit relu, int expected);
    acc = acc_t'(a); bias = int8_t'(b); bias_shift = 5'(bs); out_shift = 5'(os); relu_en = relu;
    #1;
    checks++;
    if (int'(q) !== expected) begin
      failures++;
      $display("FAIL acc=%0d bias=%0d bs=%0d os=%0d relu=%0d: q=%0d expected %0d",
               a, b, bs, os, relu, q, expected);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // hand-worked
    check(100, 0, 0, 3, 0, 13);     // (100+4)/8 = 13
    check(-100, 0, 0, 3, 0, -12);   // (-96)/8 = -12
    check(-100, 0, 0, 3, 1, 0);     // ReLU
    check(-101, 0, 0, 1, 0, -50);   // (-100)/2 = -50
    check(-103, 0, 0, 1, 0, -51);   // (-102)/2 = -51
    check(5000, 0, 0, 0, 0, 127);   // saturate high
    check(-5000, 0, 0, 0, 0, -128); // saturate low
    check(10, -3, 2, 0, 0, -2);     // 10 - 12
    check(0, 5, 4, 2, 0, 20);       // (80+2)/4 = 20
    check(1000, 0, 0, 4, 1, 63);    // (1000+8)/16 = 63
    check(-1000, 127, 3, 4, 0, 1);  // (-1000+1016+8)/16 = 1
    // random
    for (int i = 0; i < 20000; i++) begin
      // accumulators mostly within the output range, some beyond it
      automatic int os  = int'($urandom_range(0, 16));
      automatic int bs  = int'($urandom_range(0, os + 1));
      automatic longint span = longint'(1) << (os + 8);
      automatic longint a = longint'($urandom_range(0, 32'(2 * span))) - span;
      automatic int b   = int'($urandom_range(0, 255)) - 128;
      automatic bit r   = 1'($urandom);
      check(a, b, bs, os, r, ref_q(a, b, bs, os, r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
