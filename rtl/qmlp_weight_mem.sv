// qmlp_weight_mem - on-chip parameter memory of one QMLP core.
//
// Holds the quantised weights (or the biases) of one model. The host writes
// it once at start-up, one WIDTH-bit word per write; the core then reads one
// word per cycle while it runs. It is a plain simple-dual-port RAM: one write
// port and one read port, both on clk, with a registered read (data appears
// the cycle after rd_en). Reading and writing the same address in one cycle
// returns the old word. The contents are not reset; the host must load the
// model before starting an inference.
//
// The paper keeps the compiled model in PS memory and lets the vendor DPU
// fetch it over its AXI master ports; holding it on chip is this design's
// choice (one model is 53.5 KB of INT8 weights).
module qmlp_weight_mem #(
  parameter int WIDTH = 64,
  parameter int DEPTH = 6688,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  // write port (host loading)
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  // read port (core)
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_addr) < DEPTH)) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= (32'(rd_addr) < DEPTH) ? mem[rd_addr] : '0;
  end

endmodule
