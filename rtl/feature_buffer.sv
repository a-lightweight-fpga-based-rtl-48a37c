// feature_buffer - input feature window of the intrusion detector.
//
// Each received CAN message is packed into MSG_BYTES = 10 INT8 values and the
// last DEPTH = 4 messages are kept, so the detector always sees the temporal
// context of adjacent messages on the bus (a 1 x 40 INT8 input).
//
// Packing of one message (byte order is this design's choice; the model only
// states that ID and payload are packed into INT8 values, 10 per message):
//   value 0     : ID bits 15..8
//   value 1     : ID bits  7..0
//   value 2..9  : payload bytes 0..7; bytes at or past the DLC are zero
//                 (a DLC above 8 counts as 8)
// Every byte is reinterpreted as a two's-complement INT8.
//
// The window is a shift register: push moves every message one slot towards
// the oldest end, drops the oldest and writes the new one at the newest end.
// features[m*10 + b] is value b of slot m, slot 0 being the oldest. Slots
// that no message has reached yet hold zeros (after reset or clear).
// count tells how many slots hold a message (saturates at DEPTH).
// Timing: push and clear act on the rising clock edge; features and count
// change in the following cycle. clear wins over push. Reset is synchronous,
// active low.
module feature_buffer
  import qmlp_pkg::*;
#(
  parameter int DEPTH = FIFO_DEPTH,
  localparam int NF   = MSG_BYTES * DEPTH,
  localparam int CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          push,
  input  logic [28:0]   msg_id,
  input  logic [3:0]    msg_dlc,
  input  logic [63:0]   msg_data,   // payload byte k in bits 8k+7..8k
  output int8_t         features [NF],
  output logic [CW-1:0] count,
  output logic          full
);

  typedef int8_t msg_t [MSG_BYTES];

  msg_t slots [DEPTH];
  msg_t packed_msg;

  always_comb begin
    packed_msg[0] = int8_t'(msg_id[15:8]);
    packed_msg[1] = int8_t'(msg_id[7:0]);
    for (int k = 0; k < 8; k++)
      packed_msg[2+k] = (4'(k) < msg_dlc) ? int8_t'(msg_data[8*k +: 8]) : 8'sd0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int m = 0; m < DEPTH; m++)
        for (int b = 0; b < MSG_BYTES; b++) slots[m][b] <= 8'sd0;
      count <= '0;
    end else if (push) begin
      for (int m = 0; m < DEPTH - 1; m++) slots[m] <= slots[m+1];
      slots[DEPTH-1] <= packed_msg;
      if (32'(count) < DEPTH) count <= count + 1'b1;
    end
  end

  always_comb begin
    for (int m = 0; m < DEPTH; m++)
      for (int b = 0; b < MSG_BYTES; b++) features[m*MSG_BYTES + b] = slots[m][b];
  end

  assign full = (32'(count) == DEPTH);

endmodule
