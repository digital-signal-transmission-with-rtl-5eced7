// chaos_tx: chaotic-encryption transmitter.
//
// A 1/11 divider of clk_tx gives the Lorenz step enable. On each step the
// current key Xn[7:0] is xor-ed with plain_text into cipher_text, the cipher
// byte is loaded into the serial converter, and the generator advances to the
// next state. So byte n is always encrypted with key n, and one byte leaves on
// out_tx every 11 clk_tx cycles: 568.2 kbyte/s at 6.25 MHz.
//
// Interface: plain_text is sampled on the cycle `pt_load` is high (once per
// byte); cipher_text and key are the combinational xor and the key register
// for observation. cfg holds the initial conditions and the perturbation
// period and is read at reset. The structure (divider, Lorenz system, xor,
// serial converter) is that of the paper's transmitter; using the divided
// clock as an enable is this design's choice.
module chaos_tx
  import chaos_pkg::*;
#(
  parameter int unsigned CY = Y_CONST,   // map constants; must match the other end
  parameter int unsigned CZ = Z_CONST
) (
  input  logic        clk_tx,
  input  logic        rst,
  input  lorenz_cfg_t cfg,
  input  byte_t       plain_text,
  output logic        pt_load,
  output byte_t       cipher_text,
  output byte_t       key,
  output state_t      xn,
  output logic        perturb,
  output logic        out_tx
);

  logic   step;
  state_t yn, zn;      // not needed by the transmitter

  clk_div #(.DIV(TX_DIV)) u_div (
    .clk (clk_tx),
    .rst (rst),
    .en  (1'b1),
    .clr (1'b0),
    .tick(step)
  );

  lorenz_system #(.CY(CY), .CZ(CZ)) u_lorenz (
    .clk    (clk_tx),
    .rst    (rst),
    .step   (step),
    .xin    (cfg.xin),
    .yin    (cfg.yin),
    .zin    (cfg.zin),
    .n      (cfg.n),
    .xn     (xn),
    .yn     (yn),
    .zn     (zn),
    .key    (key),
    .perturb(perturb)
  );

  assign cipher_text = plain_text ^ key;
  assign pt_load     = step;

  serial_tx u_ser (
    .clk   (clk_tx),
    .rst   (rst),
    .load  (step),
    .din   (cipher_text),
    .tx_out(out_tx)
  );

endmodule
