// lorenz_system: pseudo-chaotic key generator (state registers, map, perturbation).
//
// Three 17-bit registers hold Xn, Yn, Zn. Reset loads them with the initial
// conditions xin, yin, zin. On every cycle with `step` high (the Lorenz clock
// used as a clock enable) the registers take the next state computed by
// lorenz_eq. The key is Xn[7:0]. Once every N steps (mod_n_counter) the low
// byte fed to the map is replaced by Xn[7:0] xor Yn[7:0]; the upper bits
// X'n[16:8] are always Xn[16:8]. The key itself is taken from Xn before the
// perturbation, as drawn in the generator's block diagram.
//
// Timing: key, xn, yn, zn are register outputs; they change the cycle after a
// `step`. `perturb` is high from the step before a perturbed one until that
// perturbed step, i.e. while the map is being fed X'n instead of Xn.
// Following the paper: the map, the 17-bit width, the key byte, the xor with
// Yn[7:0] and the 2:1 mux. Own choices: synchronous active-high reset loads the
// initial conditions, the step is a clock enable rather than a derived clock,
// and N = 0 disables the perturbation.
module lorenz_system
  import chaos_pkg::*;
#(
  parameter int unsigned CY = Y_CONST,   // additive constant of the Y update
  parameter int unsigned CZ = Z_CONST    // additive constant of the Z update (parameter p)
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           step,
  input  state_t         xin,
  input  state_t         yin,
  input  state_t         zin,
  input  logic [N_W-1:0] n,
  output state_t         xn,
  output state_t         yn,
  output state_t         zn,
  output byte_t          key,
  output logic           perturb
);

  state_t xp;                      // X'n, the X value reinjected into the map
  state_t x_next, y_next, z_next;

  mod_n_counter #(.NW(N_W)) u_modn (
    .clk (clk),
    .rst (rst),
    .step(step),
    .n   (n),
    .hit (perturb)
  );

  // Mux: input 0 is Xn[7:0], input 1 is Xn[7:0] xor Yn[7:0].
  always_comb begin
    xp       = xn;
    xp[7:0]  = perturb ? (xn[7:0] ^ yn[7:0]) : xn[7:0];
  end

  lorenz_eq #(.CY(CY), .CZ(CZ)) u_eq (
    .x     (xp),
    .y     (yn),
    .z     (zn),
    .x_next(x_next),
    .y_next(y_next),
    .z_next(z_next)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      xn <= xin;
      yn <= yin;
      zn <= zin;
    end else if (step) begin
      xn <= x_next;
      yn <= y_next;
      zn <= z_next;
    end
  end

  assign key = xn[KEY_W-1:0];

endmodule
