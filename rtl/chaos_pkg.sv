// chaos_pkg: widths, constants and shared types of the Lorenz-map cipher link.
//
// The state of the pseudo-chaotic generator is three 17-bit natural numbers
// X, Y, Z (biased and scaled Lorenz variables, k=1/64, delta=8, Gamma=24, b=2,
// B=40, S=512). The key is the low byte of X. The perturbation period N is a
// 14-bit number. The serial frame (start bit, 8 data bits, 2 stop bits = 11
// bit times) and the 4x receive oversampling are choices of this design that
// make one byte take exactly 11 transmit clocks and 44 receive clocks, the two
// division ratios of the link.
package chaos_pkg;

  localparam int unsigned STATE_W = 17;     // X, Y, Z width
  localparam int unsigned KEY_W   = 8;      // key / text byte width
  localparam int unsigned N_W     = 14;     // perturbation period width

  // Additive constants of the integer map: kBS - kGammaBS - kB^2 S and kB^2 S + kbBS.
  localparam int unsigned Y_CONST = 20160;  // subtracted in the Y update
  localparam int unsigned Z_CONST = 13440;  // added in the Z update

  // Perturbation period used for the period figures of the map.
  localparam logic [N_W-1:0] N_DEFAULT = 14'd10000;

  // Serial link framing.
  localparam int unsigned FRAME_BITS = 11;  // 1 start + 8 data + 2 stop
  localparam int unsigned RX_OVS     = 4;   // receive samples per bit
  localparam int unsigned TX_DIV     = FRAME_BITS;           // clk_tx cycles per byte
  localparam int unsigned RX_DIV     = FRAME_BITS * RX_OVS;  // clk_rx cycles per byte

  typedef logic [STATE_W-1:0] state_t;
  typedef logic [KEY_W-1:0]   byte_t;

  // Initial conditions and perturbation period: everything that must match
  // between a transmitter and its receiver.
  typedef struct packed {
    state_t         xin;
    state_t         yin;
    state_t         zin;
    logic [N_W-1:0] n;
  } lorenz_cfg_t;

endpackage
