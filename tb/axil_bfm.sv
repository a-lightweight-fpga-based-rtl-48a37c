// axil_bfm - AXI4-Lite master for the testbenches.
// write(addr, data, order): order 0 sends AW and W together, 1 sends AW
// first, 2 sends W first. read(addr, data). Response ready is held low for a
// random 0..3 cycles to exercise back-pressure; wait_cycles counts the
// cycles spent. Checks the OKAY response of every access.
module axil_bfm (
  input  logic        clk,
  output logic [7:0]  awaddr,
  output logic        awvalid,
  input  logic        awready,
  output logic [31:0] wdata,
  output logic [3:0]  wstrb,
  output logic        wvalid,
  input  logic        wready,
  input  logic [1:0]  bresp,
  input  logic        bvalid,
  output logic        bready,
  output logic [7:0]  araddr,
  output logic        arvalid,
  input  logic        arready,
  input  logic [31:0] rdata,
  input  logic [1:0]  rresp,
  input  logic        rvalid,
  output logic        rready
);

  int bad_responses = 0;
  int backpressure  = 1;

  initial begin
    awaddr = '0; awvalid = 0; wdata = '0; wstrb = 4'hf; wvalid = 0; bready = 0;
    araddr = '0; arvalid = 0; rready = 0;
  end

  task automatic write(input logic [7:0] addr, input logic [31:0] data, input int order = 0);
    bit aw_done = 0, w_done = 0;
    @(negedge clk);
    if (order != 2) begin awaddr = addr; awvalid = 1; end
    if (order != 1) begin wdata = data; wvalid = 1; end
    while (!(aw_done && w_done)) begin
      @(posedge clk);
      if (awvalid && awready) aw_done = 1;
      if (wvalid && wready) w_done = 1;
      @(negedge clk);
      if (aw_done) awvalid = 0;
      if (w_done) wvalid = 0;
      if (aw_done && !w_done && !wvalid) begin wdata = data; wvalid = 1; end
      if (w_done && !aw_done && !awvalid) begin awaddr = addr; awvalid = 1; end
    end
    if (backpressure != 0) repeat ($urandom_range(0, 3)) @(negedge clk);
    bready = 1;
    do @(posedge clk); while (!bvalid);
    if (bresp != 2'b00) bad_responses++;
    @(negedge clk);
    bready = 0;
  endtask

  task automatic read(input logic [7:0] addr, output logic [31:0] data);
    @(negedge clk);
    araddr = addr; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0;
    if (backpressure != 0) repeat ($urandom_range(0, 3)) @(negedge clk);
    rready = 1;
    do @(posedge clk); while (!rvalid);
    data = rdata;
    if (rresp != 2'b00) bad_responses++;
    @(negedge clk);
    rready = 0;
  endtask

endmodule
