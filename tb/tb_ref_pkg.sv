// tb_ref_pkg: reference model and published values used by the testbenches.
//
// ref_step() evaluates the integer Lorenz map with plain 32-bit signed
// arithmetic (floor divisions of non-negative values, result taken modulo
// 2^17), written independently of the RTL's bit-slicing. FIG_X holds the
// Xn sequence of the published timing diagram, which starts from
// X = 18505, Y = 21315, Z = 32032; FIG_CT is the cipher text of that diagram
// for a plain text of six zeros followed by 1, 2, 3, ...
package tb_ref_pkg;

  localparam int FIG_LEN = 23;
  localparam int FIG_X [FIG_LEN] = '{18505, 18856, 19167, 19454, 19721, 19978,
      20196, 20385, 20577, 20758, 20936, 21101, 21277, 21455, 21636, 21836,
      22053, 22287, 22539, 22800, 23083, 23384, 23714};
  localparam int FIG_CT_LEN = 18;
  localparam int FIG_CT [FIG_CT_LEN] = '{73, 168, 223, 254, 9, 10, 229, 163, 98,
      18, 205, 107, 26, 199, 141, 70, 46, 3};
  localparam int FIG_X0 = 18505;
  localparam int FIG_Y0 = 21315;
  localparam int FIG_Z0 = 32032;

  // Plain text of the published timing diagram: byte index -> value.
  function automatic int fig_plain(int i);
    return (i < 6) ? 0 : (i - 5) % 256;
  endfunction

  function automatic int wrap17(longint v);
    longint m;
    m = v % 131072;
    if (m < 0) m += 131072;
    return int'(m);
  endfunction

  // One step of the map; x must already include any perturbation.
  function automatic void ref_step(input int x, input int y, input int z,
                                   output int xo, output int yo, output int zo);
    longint lx, ly, lz, s;
    lx = longint'(x); ly = longint'(y); lz = longint'(z);
    s  = lx + ly;
    xo = wrap17(lx + ly / 8 - lx / 8);
    yo = wrap17(ly - ly / 64 + lx + lz / 2 + lz / 8 - (lx / 256) * (lz / 128) - 20160);
    zo = wrap17(lz - lz / 32 - s / 2 - s / 8 + (lx / 256) * (ly / 128) + 13440);
  endfunction

  // Reference key generator: state plus a step counter for the perturbation.
  typedef struct {
    int x, y, z;
    int cnt;
    int n;
  } gen_t;

  function automatic void gen_init(ref gen_t g, input int x0, input int y0, input int z0, input int n);
    g.x = x0; g.y = y0; g.z = z0; g.cnt = 0; g.n = n;
  endfunction

  // Advances g by one step; returns 1 if that step was perturbed.
  function automatic bit gen_step(ref gen_t g);
    int xp, xo, yo, zo;
    bit p;
    p  = (g.n != 0) && ((g.cnt % g.n) == g.n - 1);
    xp = p ? ((g.x & 'h1FF00) | ((g.x ^ g.y) & 'hFF)) : g.x;
    ref_step(xp, g.y, g.z, xo, yo, zo);
    g.x = xo; g.y = yo; g.z = zo;
    g.cnt++;
    return p;
  endfunction

endpackage
