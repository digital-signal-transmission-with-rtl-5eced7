// serial_tx: parallel-to-serial converter of the transmitter.
//
// On `load` the byte `din` is framed as one start bit (0), eight data bits,
// least significant first, and FRAME_BITS-9 stop bits (1), and placed in a
// shift register whose bit 0 drives `tx_out`. Every following clock shifts one
// bit out, so one frame takes FRAME_BITS clocks; with FRAME_BITS = 11 and a
// load every 11 clk_tx cycles the line carries back-to-back frames at one bit
// per clk_tx. The line idles high after reset.
//
// The paper only names this converter and fixes its rate (one byte per 11
// clk_tx cycles); the framing, bit order and idle level are this design's.
module serial_tx
  import chaos_pkg::*;
#(
  parameter int unsigned FRAME = FRAME_BITS
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  load,
  input  byte_t din,
  output logic  tx_out
);

  localparam int unsigned STOP = FRAME - KEY_W - 1;

  logic [FRAME-1:0] sr;

  always_ff @(posedge clk) begin
    if (rst)
      sr <= '1;
    else if (load)
      sr <= {{STOP{1'b1}}, din, 1'b0};
    else
      sr <= {1'b1, sr[FRAME-1:1]};
  end

  assign tx_out = sr[0];

endmodule
