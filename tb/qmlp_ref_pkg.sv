// qmlp_ref_pkg - reference model of the quantised MLP for the testbenches.
//
// qmlp_model holds one random model (INT8 weights, biases and per-layer
// shifts), produces the words to load in the order the core reads them, and
// computes the expected logit / probability / attack flag of a feature
// window with plain integer arithmetic. It also counts how often ReLU
// clipped and how often an activation saturated, so tests can show that
// those paths were exercised.
package qmlp_ref_pkg;

  localparam int NL = 5;
  localparam int SIZES [0:NL] = '{40, 256, 128, 64, 32, 1};
  localparam int LN = 8;  // lanes of the load word

  class qmlp_model;
    int w [1:NL][][];      // w[l][n][i]
    int b [1:NL][];        // b[l][n]
    int bs [1:NL];
    int os [1:NL];
    int relu_clips;
    int saturations;

    // Weights in [-wmax, wmax-1]; shifts chosen to keep activations in range.
    function new(int wmax = 16);
      for (int l = 1; l <= NL; l++) begin
        w[l] = new[SIZES[l]];
        b[l] = new[SIZES[l]];
        for (int n = 0; n < SIZES[l]; n++) begin
          w[l][n] = new[SIZES[l-1]];
          for (int i = 0; i < SIZES[l-1]; i++)
            w[l][n][i] = int'($urandom_range(0, 2 * wmax - 1)) - wmax;
          b[l][n] = int'($urandom_range(0, 255)) - 128;
        end
        bs[l] = int'($urandom_range(2, 6));
        os[l] = int'($urandom_range(5, 7));
      end
      relu_clips  = 0;
      saturations = 0;
    endfunction

    // Weight words in load order: layer, group of LN neurons, input.
    function void weight_words(ref logic [63:0] words[$]);
      words.delete();
      for (int l = 1; l <= NL; l++)
        for (int g = 0; g < (SIZES[l] + LN - 1) / LN; g++)
          for (int i = 0; i < SIZES[l-1]; i++) begin
            logic [63:0] wd = '0;
            for (int p = 0; p < LN; p++)
              if (g * LN + p < SIZES[l]) wd[8*p +: 8] = 8'(w[l][g*LN+p][i]);
            words.push_back(wd);
          end
    endfunction

    function void bias_words(ref logic [63:0] words[$]);
      words.delete();
      for (int l = 1; l <= NL; l++)
        for (int g = 0; g < (SIZES[l] + LN - 1) / LN; g++) begin
          logic [63:0] wd = '0;
          for (int p = 0; p < LN; p++)
            if (g * LN + p < SIZES[l]) wd[8*p +: 8] = 8'(b[l][g*LN+p]);
          words.push_back(wd);
        end
    endfunction

    // Returns the INT8 logit of the last layer.
    function int infer(int x[]);
      int a[] = x;
      for (int l = 1; l <= NL; l++) begin
        int y[] = new[SIZES[l]];
        for (int n = 0; n < SIZES[l]; n++) begin
          longint s = longint'(b[l][n]) * (longint'(1) << bs[l]);
          longint d = longint'(1) << os[l];
          longint r;
          for (int i = 0; i < SIZES[l-1]; i++) s += longint'(w[l][n][i]) * longint'(a[i]);
          s = s + d / 2;
          r = s / d;
          if ((s % d != 0) && s < 0) r -= 1;
          if (r > 127)  begin r = 127;  saturations++; end
          if (r < -128) begin r = -128; saturations++; end
          if (l < NL && r < 0) begin r = 0; relu_clips++; end
          y[n] = int'(r);
        end
        a = y;
      end
      return a[0];
    endfunction
  endclass

  // Piecewise-linear sigmoid of logit / 16, in units of 1/256, saturated at 255.
  function automatic int ref_prob(int logit);
    real ax = (logit < 0 ? -real'(logit) : real'(logit)) / 16.0;
    real y;
    int  e;
    if (ax >= 5.0)        y = 1.0;
    else if (ax >= 2.375) y = 0.03125 * ax + 0.84375;
    else if (ax >= 1.0)   y = 0.125 * ax + 0.625;
    else                  y = 0.25 * ax + 0.5;
    e = int'($floor(256.0 * y));
    if (logit < 0) e = 256 - e;
    return (e > 255) ? 255 : e;
  endfunction

  // Cycles from the start cycle to done: a load cycle, per group one cycle
  // per input plus drain and write-back, and a result cycle.
  function automatic int ref_cycles(int lanes);
    int c = 2;
    for (int l = 1; l <= NL; l++) c += ((SIZES[l] + lanes - 1) / lanes) * (SIZES[l-1] + 2);
    return c;
  endfunction

endpackage
