// ids_regs - AXI4-Lite slave register file of the intrusion detection
// accelerator, with its completion interrupt.
//
// The accelerator sits in programmable logic and the processor reaches it as
// a memory-mapped peripheral. Software uses this port to (1) load the two
// quantised models at start-up, (2) push each received CAN message into the
// feature window, (3) start both detectors together and (4) collect the two
// results when the completion interrupt fires.
//
// Register map (byte offsets, 32-bit registers; byte strobes are ignored and
// every write updates the whole register):
//   0x00 CTRL        RW  [0] IRQ_EN. Write-only pulses: [1] START both cores,
//                        [2] CLEAR the feature window.
//   0x04 STATUS      RO  [1:0] core busy, [6:4] messages in window, [7] full
//   0x08 IRQ_STATUS  RW1C [0] core 1 done, [1] core 2 done,
//                        [2] START refused because a core was busy.
//                        irq = IRQ_EN && any IRQ_STATUS bit set.
//   0x0C MSG_ID      RW  [28:0] CAN identifier of the next message
//   0x10 MSG_DATA_LO RW  payload bytes 0..3 (byte 0 in bits 7..0)
//   0x14 MSG_DATA_HI RW  payload bytes 4..7
//   0x18 MSG_PUSH    WO  [3:0] DLC; the write pushes MSG_ID/MSG_DATA/DLC
//   0x1C RESULT1     RO  core 1 (DoS + fuzzing): [7:0] logit, [15:8]
//                        probability/256, [16] attack
//   0x20 RESULT2     RO  core 2 (RPM + gear spoofing), same layout
//   0x24 LD_ADDR     RW  [15:0] word address, [16] core (0 = 1, 1 = 2),
//                        [17] target (0 = weights, 1 = biases)
//   0x28 LD_DATA_LO  RW  lanes 0..3 of the word to load
//   0x2C LD_DATA_HI  WO  lanes 4..7; the write stores {HI, LO} at LD_ADDR
//                        and increments LD_ADDR[15:0]
//   0x30 LAYER_CFG   WO  [2:0] layer 1..5, [8] core, [20:16] bias shift,
//                        [28:24] output shift
//   0x34 LATENCY1    RO  clock cycles from START to core 1 done, last run
//   0x38 LATENCY2    RO  same for core 2
// Unmapped reads return 0; every response is OKAY.
//
// Timing: a write takes effect on the cycle its AW and W have both been
// accepted (in any order), and B is raised the cycle after. A read returns
// data one cycle after AR is accepted. One write and one read may be in
// flight at a time. Reset is synchronous, active low (ARESETN).
//
// The paper says only that the accelerators have an AXI slave port, are
// memory mapped and interrupt the processor with a completion status; the
// register map, the loading scheme and the refused-start flag are this
// design's own.
module ids_regs
  import qmlp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
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
  output logic        irq,
  // feature window
  output logic        fb_clear,
  output logic        fb_push,
  output logic [28:0] msg_id,
  output logic [3:0]  msg_dlc,
  output logic [63:0] msg_data,
  input  logic [2:0]  fb_count,
  input  logic        fb_full,
  // model loading, shared by both cores
  output logic [15:0] ld_addr,
  output logic [63:0] ld_data,
  output logic [1:0]  w_we,
  output logic [1:0]  b_we,
  output logic [1:0]  cfg_we,
  output logic [2:0]  cfg_layer,
  output layer_cfg_t  cfg_data,
  // inference
  output logic        start,
  input  logic [1:0]  busy,
  input  logic [1:0]  done,
  input  qmlp_result_t result [2]
);

  localparam logic [7:0] A_CTRL = 8'h00, A_STATUS = 8'h04, A_IRQ = 8'h08,
                         A_MSG_ID = 8'h0C, A_MSG_LO = 8'h10, A_MSG_HI = 8'h14,
                         A_PUSH = 8'h18, A_RES1 = 8'h1C, A_RES2 = 8'h20,
                         A_LD_ADDR = 8'h24, A_LD_LO = 8'h28, A_LD_HI = 8'h2C,
                         A_LCFG = 8'h30, A_LAT1 = 8'h34, A_LAT2 = 8'h38;

  logic        aw_v, w_v;
  logic [7:0]  aw_addr;
  logic [31:0] w_data;
  logic        wr_fire;

  logic        irq_en;
  logic [2:0]  irq_status;
  logic [17:0] ld_ctl;      // {target, core, address}
  logic [31:0] ld_lo;
  logic [31:0] cyc, t_start;
  logic [31:0] latency [2];

  assign s_awready = ~aw_v & ~s_bvalid;
  assign s_wready  = ~w_v & ~s_bvalid;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = ~s_rvalid;
  assign wr_fire   = aw_v & w_v & ~s_bvalid;
  assign irq       = irq_en & (|irq_status);
  assign ld_addr   = ld_ctl[15:0];

  // write channel
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      aw_v     <= 1'b0;
      w_v      <= 1'b0;
      aw_addr  <= '0;
      w_data   <= '0;
      s_bvalid <= 1'b0;
    end else begin
      if (s_awvalid && s_awready) begin
        aw_v    <= 1'b1;
        aw_addr <= s_awaddr;
      end
      if (s_wvalid && s_wready) begin
        w_v    <= 1'b1;
        w_data <= s_wdata;
      end
      if (wr_fire) begin
        aw_v     <= 1'b0;
        w_v      <= 1'b0;
        s_bvalid <= 1'b1;
      end else if (s_bvalid && s_bready) begin
        s_bvalid <= 1'b0;
      end
    end
  end

  // register writes and the pulses they cause
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      irq_en     <= 1'b0;
      irq_status <= '0;
      msg_id     <= '0;
      msg_data   <= '0;
      msg_dlc    <= '0;
      ld_ctl     <= '0;
      ld_lo      <= '0;
      ld_data    <= '0;
      fb_push    <= 1'b0;
      fb_clear   <= 1'b0;
      start      <= 1'b0;
      w_we       <= '0;
      b_we       <= '0;
      cfg_we     <= '0;
      cfg_layer  <= '0;
      cfg_data   <= '0;
    end else begin
      fb_push  <= 1'b0;
      fb_clear <= 1'b0;
      start    <= 1'b0;
      w_we     <= '0;
      b_we     <= '0;
      cfg_we   <= '0;
      // completion events
      if (done[0]) irq_status[0] <= 1'b1;
      if (done[1]) irq_status[1] <= 1'b1;
      if (wr_fire) begin
        unique case (aw_addr)
          A_CTRL: begin
            irq_en <= w_data[0];
            if (w_data[1]) begin
              if (|busy || start) irq_status[2] <= 1'b1;
              else                start         <= 1'b1;
            end
            fb_clear <= w_data[2];
          end
          A_IRQ:    irq_status <= irq_status & ~w_data[2:0];
          A_MSG_ID: msg_id <= w_data[28:0];
          A_MSG_LO: msg_data[31:0]  <= w_data;
          A_MSG_HI: msg_data[63:32] <= w_data;
          A_PUSH: begin
            msg_dlc <= w_data[3:0];
            fb_push <= 1'b1;
          end
          A_LD_ADDR: ld_ctl <= w_data[17:0];
          A_LD_LO:   ld_lo  <= w_data;
          A_LD_HI: begin
            ld_data <= {w_data, ld_lo};
            if (ld_ctl[17]) b_we[ld_ctl[16]] <= 1'b1;
            else            w_we[ld_ctl[16]] <= 1'b1;
          end
          A_LCFG: begin
            cfg_layer            <= w_data[2:0];
            cfg_data.bias_shift  <= w_data[20:16];
            cfg_data.out_shift   <= w_data[28:24];
            cfg_we[w_data[8]]    <= 1'b1;
          end
          default: ;
        endcase
      end
      // the load address advances the cycle after the word is handed over
      if (|w_we || |b_we) ld_ctl[15:0] <= ld_ctl[15:0] + 16'd1;
    end
  end

  // latency measurement
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cyc        <= '0;
      t_start    <= '0;
      latency[0] <= '0;
      latency[1] <= '0;
    end else begin
      cyc <= cyc + 32'd1;
      if (start) t_start <= cyc;
      for (int c = 0; c < 2; c++)
        if (done[c]) latency[c] <= cyc - t_start;
    end
  end

  // read channel
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else if (s_arvalid && s_arready) begin
      s_rvalid <= 1'b1;
      unique case (s_araddr)
        A_CTRL:    s_rdata <= {31'd0, irq_en};
        A_STATUS:  s_rdata <= {24'd0, fb_full, fb_count, 2'b00, busy};
        A_IRQ:     s_rdata <= {29'd0, irq_status};
        A_MSG_ID:  s_rdata <= {3'd0, msg_id};
        A_MSG_LO:  s_rdata <= msg_data[31:0];
        A_MSG_HI:  s_rdata <= msg_data[63:32];
        A_RES1:    s_rdata <= {15'd0, result[0]};
        A_RES2:    s_rdata <= {15'd0, result[1]};
        A_LD_ADDR: s_rdata <= {14'd0, ld_ctl};
        A_LD_LO:   s_rdata <= ld_lo;
        A_LAT1:    s_rdata <= latency[0];
        A_LAT2:    s_rdata <= latency[1];
        default:   s_rdata <= '0;
      endcase
    end else if (s_rvalid && s_rready) begin
      s_rvalid <= 1'b0;
    end
  end

  // AXI4-Lite rules this slave must keep: a raised response stays up, with
  // stable data, until it is accepted.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_bvalid && !s_bready |=> s_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

  logic unused;
  assign unused = ^s_wstrb;

endmodule
