// chaos_rx: chaotic-encryption receiver.
//
// The parallel converter turns in_rx into cipher bytes (`data`). A Lorenz
// system identical to the transmitter's, started from the same initial
// conditions, supplies the key; rec_text = data xor key is registered when a
// byte arrives and flagged by rec_valid. The generator is stepped by a 1/44
// divider of clk_rx, i.e. once per 44-sample frame, so it advances at the same
// rate as the transmitter's.
//
// Alignment (this design's choice; the paper does not say how the receive
// divider is phased): the divider is held until the first start bit is seen,
// and restarted on every start bit. Its tick then falls 43 cycles after the
// start of each frame, after the byte has been decrypted (cycle 40) and before
// the next frame can begin (cycle 44). So the key changes only between bytes,
// and the receiver stays in step as long as clk_rx is four times clk_tx to
// within about one sample per frame. A frame with a bad stop bit still
// advances the key (its start bit restarted the divider) so that key and
// stream stay aligned; it raises frame_err instead of rec_valid. An assertion
// checks that the key never advances on the cycle a byte is decrypted.
module chaos_rx
  import chaos_pkg::*;
#(
  parameter int unsigned CY = Y_CONST,   // map constants; must match the other end
  parameter int unsigned CZ = Z_CONST
) (
  input  logic        clk_rx,
  input  logic        rst,
  input  lorenz_cfg_t cfg,
  input  logic        in_rx,
  output byte_t       data,
  output byte_t       rec_text,
  output logic        rec_valid,
  output logic        frame_err,
  output byte_t       key,
  output state_t      xn,
  output logic        perturb
);

  logic   start, valid, locked, step;
  state_t yn, zn;      // not needed by the receiver

  serial_rx u_ser (
    .clk      (clk_rx),
    .rst      (rst),
    .rx_in    (in_rx),
    .start    (start),
    .data     (data),
    .valid    (valid),
    .frame_err(frame_err)
  );

  always_ff @(posedge clk_rx) begin
    if (rst)        locked <= 1'b0;
    else if (start) locked <= 1'b1;
  end

  clk_div #(.DIV(RX_DIV)) u_div (
    .clk (clk_rx),
    .rst (rst),
    .en  (locked),
    .clr (start),
    .tick(step)
  );

  lorenz_system #(.CY(CY), .CZ(CZ)) u_lorenz (
    .clk    (clk_rx),
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

  // The key must never advance on the cycle a received byte is decrypted.
  a_key_stable: assert property (@(posedge clk_rx) disable iff (rst) !(step && valid));

  always_ff @(posedge clk_rx) begin
    if (rst) begin
      rec_text  <= '0;
      rec_valid <= 1'b0;
    end else begin
      rec_valid <= valid;
      if (valid) rec_text <= data ^ key;
    end
  end

endmodule
