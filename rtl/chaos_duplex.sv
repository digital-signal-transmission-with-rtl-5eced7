// chaos_duplex: full-duplex chaotic-encryption link between stations A and B.
//
// Two independent one-way links: transmitter A -> receiver B and transmitter
// B -> receiver A. Transmitters run on clk_tx (6.25 MHz in the reference
// set-up), receivers on clk_rx (25 MHz, four times clk_tx). Each transmitter and
// each receiver has its own configuration (initial conditions and perturbation
// period), so a receiver can be given a mismatched key on purpose; a link only
// decrypts when both ends hold the same configuration. The serial lines are
// ports: out_tx_a must be wired to in_rx_b and out_tx_b to in_rx_a through the
// channel outside the chips. rst_tx and rst_rx are synchronous to their clocks
// and load the configurations.
module chaos_duplex
  import chaos_pkg::*;
(
  input  logic        clk_tx,
  input  logic        rst_tx,
  input  logic        clk_rx,
  input  logic        rst_rx,
  // station A
  input  lorenz_cfg_t cfg_a_tx,
  input  lorenz_cfg_t cfg_a_rx,
  input  byte_t       plain_a,
  output logic        pt_load_a,
  output logic        out_tx_a,
  input  logic        in_rx_a,
  output byte_t       rec_text_a,
  output logic        rec_valid_a,
  output logic        frame_err_a,
  // station B
  input  lorenz_cfg_t cfg_b_tx,
  input  lorenz_cfg_t cfg_b_rx,
  input  byte_t       plain_b,
  output logic        pt_load_b,
  output logic        out_tx_b,
  input  logic        in_rx_b,
  output byte_t       rec_text_b,
  output logic        rec_valid_b,
  output logic        frame_err_b,
  // observation: perturbation events of each generator
  output logic [3:0]  perturb
);

  // Per-unit observation signals, left unused at this level.
  byte_t  ct_a, ct_b, key_ta, key_tb, key_ra, key_rb, data_a, data_b;
  state_t x_ta, x_tb, x_ra, x_rb;

  chaos_tx u_tx_a (
    .clk_tx(clk_tx), .rst(rst_tx), .cfg(cfg_a_tx), .plain_text(plain_a),
    .pt_load(pt_load_a), .cipher_text(ct_a), .key(key_ta), .xn(x_ta),
    .perturb(perturb[0]), .out_tx(out_tx_a)
  );

  chaos_rx u_rx_b (
    .clk_rx(clk_rx), .rst(rst_rx), .cfg(cfg_b_rx), .in_rx(in_rx_b),
    .data(data_b), .rec_text(rec_text_b), .rec_valid(rec_valid_b),
    .frame_err(frame_err_b), .key(key_rb), .xn(x_rb), .perturb(perturb[1])
  );

  chaos_tx u_tx_b (
    .clk_tx(clk_tx), .rst(rst_tx), .cfg(cfg_b_tx), .plain_text(plain_b),
    .pt_load(pt_load_b), .cipher_text(ct_b), .key(key_tb), .xn(x_tb),
    .perturb(perturb[2]), .out_tx(out_tx_b)
  );

  chaos_rx u_rx_a (
    .clk_rx(clk_rx), .rst(rst_rx), .cfg(cfg_a_rx), .in_rx(in_rx_a),
    .data(data_a), .rec_text(rec_text_a), .rec_valid(rec_valid_a),
    .frame_err(frame_err_a), .key(key_ra), .xn(x_ra), .perturb(perturb[3])
  );

endmodule
