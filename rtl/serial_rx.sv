// serial_rx: serial-to-parallel converter of the receiver.
//
// Receives the frames sent by serial_tx (start bit 0, eight data bits least
// significant first, stop bits 1) with OVS samples per bit. The line is first
// passed through two flip-flops, since it comes from another clock domain.
// While idle, the first low sample is taken as the start of a frame: `start`
// pulses on that cycle and a sample counter restarts at 0. Bit i is sampled
// at count OVS*i + OVS/2, near its middle. A start bit that is high again at
// its middle is treated as a glitch and dropped. The first stop bit is checked:
// high gives `valid` with the byte on `data`, low gives `frame_err`; both are
// one-cycle pulses one clock after that stop-bit sample, and `data` holds its
// value until the next good frame. The converter is idle again after the stop
// sample, so back-to-back frames are received without a gap.
//
// The paper names this converter and fixes the receive clock at four times the
// bit rate (25 MHz against 6.25 MHz); the framing, sampling points and error
// handling are this design's.
module serial_rx
  import chaos_pkg::*;
#(
  parameter int unsigned OVS   = RX_OVS,
  parameter int unsigned FRAME = FRAME_BITS
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  rx_in,
  output logic  start,
  output byte_t data,
  output logic  valid,
  output logic  frame_err
);

  localparam int unsigned CW = $clog2(OVS * FRAME);

  logic          rx_meta, rx_s;
  logic          busy;
  logic [CW-1:0] cnt;
  byte_t         sr;
  logic          at_sample;
  int unsigned   bit_idx;

  always_ff @(posedge clk) begin
    if (rst) begin
      rx_meta <= 1'b1;
      rx_s    <= 1'b1;
    end else begin
      rx_meta <= rx_in;
      rx_s    <= rx_meta;
    end
  end

  assign start     = !busy && !rx_s;
  assign at_sample = busy && ((int'(cnt) % OVS) == OVS / 2);
  assign bit_idx   = int'(cnt) / OVS;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy      <= 1'b0;
      cnt       <= '0;
      sr        <= '0;
      data      <= '0;
      valid     <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      valid     <= 1'b0;
      frame_err <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        cnt  <= CW'(1);
      end else if (busy) begin
        cnt <= cnt + CW'(1);
        if (at_sample) begin
          if (bit_idx == 0) begin
            if (rx_s) busy <= 1'b0;              // glitch, not a start bit
          end else if (bit_idx <= KEY_W) begin
            sr <= {rx_s, sr[KEY_W-1:1]};         // LSB first
          end else begin
            busy <= 1'b0;                        // first stop bit
            if (rx_s) begin
              data  <= sr;
              valid <= 1'b1;
            end else begin
              frame_err <= 1'b1;
            end
          end
        end
      end
    end
  end

endmodule
