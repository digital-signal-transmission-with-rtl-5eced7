// lorenz_eq: combinational next-state function of the integer Lorenz 3D map.
//
// Computes, on 17-bit natural numbers with truncating divisions by powers of two:
//   X' = X + Y/8 - X/8
//   Y' = Y - Y/64 + X + Z/2 + Z/8 - (X/256)(Z/128) - 20160
//   Z' = Z - Z/32 - (X+Y)/2 - (X+Y)/8 + (X/256)(Y/128) + 13440
// Every division is a right shift (a wire selection) and the two products are
// 9 x 10 bit multiplies of the upper bits of the operands, so the block is
// adders and two small multipliers. Sums are formed 2 bits wider than the
// state and the result is taken modulo 2^17; on the attractor no update leaves
// the 17-bit range, so the wrap never happens in normal operation.
//
// The equations follow the scaled map of the paper. The Z update uses
// -(X+Y)/2 - (X+Y)/8, which is -kB(x+y) of the unscaled form; this form
// reproduces the published X sequence bit for bit. The X input is X'n, i.e. X
// after the optional perturbation of its low byte.
//
// Interface: x, y, z in; x_next, y_next, z_next out. Purely combinational.
module lorenz_eq
  import chaos_pkg::*;
#(
  parameter int unsigned CY = Y_CONST,
  parameter int unsigned CZ = Z_CONST
) (
  input  state_t x,
  input  state_t y,
  input  state_t z,
  output state_t x_next,
  output state_t y_next,
  output state_t z_next
);

  localparam int unsigned AW = STATE_W + 2;   // working width of the sums
  typedef logic [AW-1:0] acc_t;

  acc_t xw, yw, zw, sxy;
  acc_t pxz, pxy;
  acc_t xa, ya, za;

  always_comb begin
    xw  = acc_t'(x);
    yw  = acc_t'(y);
    zw  = acc_t'(z);
    sxy = xw + yw;

    // (X/256)*(Z/128) and (X/256)*(Y/128): 9-bit times 10-bit products.
    pxz = acc_t'(x[STATE_W-1:8]) * acc_t'(z[STATE_W-1:7]);
    pxy = acc_t'(x[STATE_W-1:8]) * acc_t'(y[STATE_W-1:7]);

    xa = xw + (yw >> 3) - (xw >> 3);
    ya = yw - (yw >> 6) + xw + (zw >> 1) + (zw >> 3) - pxz - acc_t'(CY);
    za = zw - (zw >> 5) - (sxy >> 1) - (sxy >> 3) + pxy + acc_t'(CZ);

    x_next = xa[STATE_W-1:0];
    y_next = ya[STATE_W-1:0];
    z_next = za[STATE_W-1:0];
  end

endmodule
