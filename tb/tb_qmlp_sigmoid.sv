// tb_qmlp_sigmoid - self-checking test of the output sigmoid.
// Sweeps all 256 logits. Each result is checked three ways: exactly against
// the piecewise-linear segments evaluated in real arithmetic, within 6/256 of
// the true sigmoid 1/(1+exp(-x)), and the attack flag against logit >= 0.
module tb_qmlp_sigmoid;
  import qmlp_pkg::*;

  localparam int FRAC = 4;

  int8_t      logit;
  logic [7:0] prob;
  logic       attack;
  int         checks = 0, failures = 0;

  qmlp_sigmoid dut (.*);

  function automatic real plan(real ax);
    if (ax >= 5.0)   return 1.0;
    if (ax >= 2.375) return 0.03125 * ax + 0.84375;
    if (ax >= 1.0)   return 0.125 * ax + 0.625;
    return 0.25 * ax + 0.5;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -128; v < 128; v++) begin
      real x, ex, truth;
      int  e, p;
      logit = int8_t'(v);
      #1;
      x  = real'(v) / real'(1 << FRAC);
      ex = $floor(256.0 * plan(x < 0 ? -x : x));
      e  = int'(ex);
      p  = (v < 0) ? 256 - e : e;
      if (p > 255) p = 255;
      checks++;
      if (int'(prob) != p) begin
        failures++;
        $display("FAIL logit=%0d prob=%0d expected %0d", v, prob, p);
      end
      truth = 256.0 / (1.0 + $exp(-x));
      checks++;
      if ((real'(prob) - truth > 6.0) || (truth - real'(prob) > 6.0)) begin
        failures++;
        $display("FAIL logit=%0d prob=%0d true sigmoid %f", v, prob, truth);
      end
      checks++;
      if (attack != (v >= 0)) begin
        failures++;
        $display("FAIL logit=%0d attack=%0d", v, attack);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
