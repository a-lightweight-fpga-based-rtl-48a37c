// ids_ecu_pl - programmable-logic half of the IDS-ECU: a CAN intrusion
// detection accelerator with two concurrent quantised MLP detectors.
//
// In the ECU, the processor receives CAN frames through its own CAN
// controller and runs the normal ECU software. An isolated IDS task copies the
// identifier and payload of every frame into this accelerator and starts it;
// the accelerator judges the last four messages with two models at once and
// interrupts the processor when both are done:
//   core 1 (QMLP-1): DoS and fuzzing attacks
//   core 2 (QMLP-2): RPM and gear spoofing attacks
// Both cores share one feature window and run the same 40-256-128-64-32-1
// INT8 network; only their loaded weights differ.
//
// Structure:
//   ids_regs        AXI4-Lite slave: registers, loading, start, interrupt
//   feature_buffer  packs each message into 10 INT8 values, keeps the last 4
//   qmlp_core x2    inference engines with on-chip weights
//
// Interface: one AXI4-Lite slave port (8-bit address, 32-bit data; register
// map in ids_regs) and an active-high level interrupt. Single clock, reset
// synchronous and active low.
//
// Timing: a START write launches both cores on the same cycle; each reports
// done 6812 cycles later (LANES = 8), and the interrupt rises the cycle after.
//
// Following the paper: the division into processor side and logic side, the
// 4-message feature FIFO with 10 INT8 values per message, two detectors that
// run concurrently, the network shape and the completion interrupt. The
// paper runs the models on a vendor deep-learning processor (two instances of
// a 512-operation configuration) that fetches the compiled model from system
// memory over AXI master ports; here the model sits in on-chip memory and a
// small fixed-function engine replaces that processor. The register map is
// this design's own.
module ids_ecu_pl
  import qmlp_pkg::*;
#(
  parameter int FRAC = 4   // fractional bits of the output logit
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [7:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic        irq
);

  // The 64-bit load word of ids_regs carries exactly eight lanes.
  localparam int LANES = 8;
  localparam int WAW   = $clog2(weight_words(LANES));
  localparam int BAW   = $clog2(bias_words(LANES));

  logic         fb_clear, fb_push, fb_full;
  logic [28:0]  msg_id;
  logic [3:0]   msg_dlc;
  logic [63:0]  msg_data;
  logic [2:0]   fb_count;
  int8_t        features [NUM_FEATURES];

  logic [15:0]  ld_addr;
  logic [63:0]  ld_data;
  logic [1:0]   w_we, b_we, cfg_we;
  logic [2:0]   cfg_layer;
  layer_cfg_t   cfg_data;
  logic         start;
  logic [1:0]   busy, done;
  qmlp_result_t result [2];

  ids_regs u_regs (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready, .irq,
    .fb_clear, .fb_push, .msg_id, .msg_dlc, .msg_data, .fb_count, .fb_full,
    .ld_addr, .ld_data, .w_we, .b_we, .cfg_we, .cfg_layer, .cfg_data,
    .start, .busy, .done, .result
  );

  feature_buffer #(.DEPTH(FIFO_DEPTH)) u_fb (
    .clk, .rst_n, .clear(fb_clear), .push(fb_push),
    .msg_id, .msg_dlc, .msg_data,
    .features, .count(fb_count), .full(fb_full)
  );

  for (genvar c = 0; c < 2; c++) begin : g_core
    qmlp_core #(.LANES(LANES), .FRAC(FRAC)) u_core (
      .clk, .rst_n,
      .w_we(w_we[c]), .w_addr(ld_addr[WAW-1:0]), .w_data(ld_data),
      .b_we(b_we[c]), .b_addr(ld_addr[BAW-1:0]), .b_data(ld_data),
      .cfg_we(cfg_we[c]), .cfg_layer, .cfg_data,
      .start, .features,
      .busy(busy[c]), .done(done[c]), .result(result[c])
    );
  end

  // The two detectors start together and run the same schedule.
  a_cores_in_step: assert property (@(posedge clk) disable iff (!rst_n)
                                    done[0] == done[1] && busy[0] == busy[1]);

endmodule
