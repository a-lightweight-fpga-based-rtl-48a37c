// qmlp_core - one quantised MLP inference engine (one detector).
//
// Runs the model 40 -> 256 -> 128 -> 64 -> 32 -> 1 on a 40-value INT8
// feature window and reports the output logit, the sigmoid attack
// probability and an attack flag. Two of these run side by side in the
// accelerator: one trained for DoS and fuzzing, one for RPM and gear spoofing;
// they differ only in the weights the host loads.
//
// How it works. The activations of a layer sit in one of two 256-entry INT8
// register banks; the layer reads one bank and writes the other (layer 1 reads
// bank 0, where start copies the features). A dense layer is computed LANES
// output neurons at a time (a "group"): for every input i the core reads one
// weight word holding the LANES weights W[n][i] of the group, multiplies them
// by activation i and adds into LANES 32-bit accumulators. After the last input
// the accumulators pass through LANES qmlp_requant units (bias, rescale,
// ReLU on hidden layers) and are written to the other bank. The weights are
// laid out exactly in that visiting order, so the weight address just counts
// up by one per MAC cycle through the whole inference; bias words (LANES
// INT8 biases, one per group) count up by one per group. Lanes past the last
// neuron of a layer (layer 5 has one unit) are not written back.
//
// Timing. start is taken only when idle; the cycle that takes it copies the
// features. Each group then takes UNITS[l-1] MAC cycles, one drain cycle (the
// weight read is registered) and one write-back cycle; a final cycle forms the
// result. done pulses for one cycle, with result valid, inference_cycles(LANES)
// cycles after the start cycle: 6812 cycles with LANES = 8. busy is high from
// the cycle after start until done.
//
// Loading. w_we/b_we write weight/bias words; cfg_we writes the shift
// settings of layer cfg_layer (1..5). Writes while busy corrupt the running
// inference and are the host's responsibility to avoid.
//
// The model shape, INT8 arithmetic, BN + ReLU on hidden layers and sigmoid on
// the output follow the paper. The paper runs the model on a vendor DPU whose
// insides it does not describe; this lane-parallel engine, its memory layout
// and its timing are this design's own.
module qmlp_core
  import qmlp_pkg::*;
#(
  parameter int LANES = DEF_LANES,
  parameter int FRAC  = 4,
  localparam int WW   = 8 * LANES,
  localparam int WAW  = $clog2(weight_words(LANES)),
  localparam int BAW  = $clog2(bias_words(LANES))
) (
  input  logic         clk,
  input  logic         rst_n,
  // parameter loading
  input  logic         w_we,
  input  logic [WAW-1:0] w_addr,
  input  logic [WW-1:0]  w_data,    // lane p in bits 8p+7..8p
  input  logic         b_we,
  input  logic [BAW-1:0] b_addr,
  input  logic [WW-1:0]  b_data,
  input  logic         cfg_we,
  input  logic [2:0]   cfg_layer,
  input  layer_cfg_t   cfg_data,
  // inference
  input  logic         start,
  input  int8_t        features [NUM_FEATURES],
  output logic         busy,
  output logic         done,
  output qmlp_result_t result
);

  typedef enum logic [2:0] {S_IDLE, S_MAC, S_DRAIN, S_WB, S_OUT} state_t;

  localparam int LW = $clog2(MAX_UNITS + 1);

  // per-layer constants, index 1..NUM_LAYERS
  localparam int IN_N  [1:NUM_LAYERS] = '{UNITS[0], UNITS[1], UNITS[2], UNITS[3], UNITS[4]};
  localparam int OUT_N [1:NUM_LAYERS] = '{UNITS[1], UNITS[2], UNITS[3], UNITS[4], UNITS[5]};
  localparam int GRP_N [1:NUM_LAYERS] = '{groups(1, LANES), groups(2, LANES), groups(3, LANES),
                                          groups(4, LANES), groups(5, LANES)};

  state_t      state;
  logic [2:0]  layer;        // 1..5
  logic [LW-1:0] grp;        // group within layer
  logic [LW-1:0] idx;        // input index within group
  logic [WAW-1:0] waddr;
  logic [BAW-1:0] baddr;

  int8_t       act [2][MAX_UNITS];
  int8_t       x_d;
  logic        mac_v;
  acc_t        acc [LANES];
  logic [WW-1:0] w_rd, b_rd;
  int8_t       q [LANES];
  int8_t       logit_r;
  layer_cfg_t  cfg [1:NUM_LAYERS];

  logic [LW-1:0] in_n, out_n, grp_n;
  logic          src, relu_en;
  layer_cfg_t    cur_cfg;
  logic [7:0]    prob;
  logic          attack;

  always_comb begin
    in_n  = '0;
    out_n = '0;
    grp_n = '0;
    cur_cfg = '0;
    for (int l = 1; l <= NUM_LAYERS; l++) begin
      if (32'(layer) == l) begin
        in_n    = LW'(IN_N[l]);
        out_n   = LW'(OUT_N[l]);
        grp_n   = LW'(GRP_N[l]);
        cur_cfg = cfg[l];
      end
    end
    src     = ~layer[0];                 // odd layers read bank 0
    relu_en = (32'(layer) != NUM_LAYERS);
  end

  // parameter memories
  qmlp_weight_mem #(.WIDTH(WW), .DEPTH(weight_words(LANES))) u_wmem (
    .clk, .wr_en(w_we), .wr_addr(w_addr), .wr_data(w_data),
    .rd_en(state == S_MAC), .rd_addr(waddr), .rd_data(w_rd)
  );

  qmlp_weight_mem #(.WIDTH(WW), .DEPTH(bias_words(LANES))) u_bmem (
    .clk, .wr_en(b_we), .wr_addr(b_addr), .wr_data(b_data),
    .rd_en(state == S_MAC && idx == '0), .rd_addr(baddr), .rd_data(b_rd)
  );

  // requantisation lanes
  for (genvar p = 0; p < LANES; p++) begin : g_lane
    qmlp_requant u_rq (
      .acc(acc[p]), .bias(int8_t'(b_rd[8*p +: 8])),
      .bias_shift(cur_cfg.bias_shift), .out_shift(cur_cfg.out_shift),
      .relu_en(relu_en), .q(q[p])
    );
  end

  qmlp_sigmoid #(.FRAC(FRAC)) u_sig (.logit(logit_r), .prob(prob), .attack(attack));

  // configuration registers
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int l = 1; l <= NUM_LAYERS; l++) cfg[l] <= '0;
    end else if (cfg_we) begin
      for (int l = 1; l <= NUM_LAYERS; l++)
        if (32'(cfg_layer) == l) cfg[l] <= cfg_data;
    end
  end

  // multiply-accumulate
  always_ff @(posedge clk) begin
    if (!rst_n || state == S_WB || state == S_IDLE) begin
      for (int p = 0; p < LANES; p++) acc[p] <= '0;
    end else if (mac_v) begin
      for (int p = 0; p < LANES; p++) begin
        logic signed [15:0] prod;
        prod   = int8_t'(w_rd[8*p +: 8]) * x_d;
        acc[p] <= acc[p] + ACC_W'(prod);
      end
    end
  end

  // sequencer
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      layer   <= 3'd1;
      grp     <= '0;
      idx     <= '0;
      waddr   <= '0;
      baddr   <= '0;
      mac_v   <= 1'b0;
      x_d     <= '0;
      logit_r <= '0;
      done    <= 1'b0;
      busy    <= 1'b0;
      result  <= '0;
      for (int b = 0; b < 2; b++)
        for (int n = 0; n < MAX_UNITS; n++) act[b][n] <= '0;
    end else begin
      done  <= 1'b0;
      mac_v <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            for (int n = 0; n < NUM_FEATURES; n++) act[0][n] <= features[n];
            layer <= 3'd1;
            grp   <= '0;
            idx   <= '0;
            waddr <= '0;
            baddr <= '0;
            busy  <= 1'b1;
            state <= S_MAC;
          end
        end
        S_MAC: begin
          x_d   <= act[src][idx[7:0]];
          mac_v <= 1'b1;
          waddr <= waddr + 1'b1;
          if (idx == in_n - 1'b1) begin
            idx   <= '0;
            state <= S_DRAIN;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_DRAIN: state <= S_WB;
        S_WB: begin
          for (int p = 0; p < LANES; p++) begin
            if (32'(grp) * LANES + p < 32'(out_n))
              act[~src][32'(grp) * LANES + p] <= q[p];
          end
          baddr <= baddr + 1'b1;
          if (grp == grp_n - 1'b1) begin
            grp <= '0;
            if (32'(layer) == NUM_LAYERS) begin
              logit_r <= q[0];
              state   <= S_OUT;
            end else begin
              layer <= layer + 1'b1;
              state <= S_MAC;
            end
          end else begin
            grp   <= grp + 1'b1;
            state <= S_MAC;
          end
        end
        S_OUT: begin
          result <= '{attack: attack, prob: prob, logit: logit_r};
          done   <= 1'b1;
          busy   <= 1'b0;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // done is a single-cycle pulse that ends a run: busy drops as done rises.
  a_done_pulse: assert property (@(posedge clk) disable iff (!rst_n) done |=> !done);
  a_done_ends_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                     done |-> !busy && $past(busy));

endmodule
