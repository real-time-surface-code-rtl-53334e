// nn_ref_pkg: integer reference model of the quantized LSTM decoder, written
// independently of the RTL for the testbenches. Values are plain ints:
// weights are 6-bit integers with 4 fractional bits, activations are
// 0..128 (1.0 = 128), pre-activations carry 11 fractional bits.
package nn_ref_pkg;

  localparam int NX = 4, NH = 32, NG = 128;

  typedef struct {
    int wx [NX][NG];
    int wh [NH][NG];
    int b  [NG];
    int wd [NH];
    int bd;
  } weights_t;

  typedef struct {
    int h [NH];
    int c [NH];
  } state_t;

  function automatic int floor_div(input int a, input int d);
    int q;
    q = a / d;
    if ((a % d != 0) && ((a < 0) != (d < 0))) q = q - 1;
    return q;
  endfunction

  function automatic int ref_sigmoid(input int z);
    int t;
    t = floor_div(z, 2) + 1024;
    if (t < 0) t = 0;
    if (t > 2048) t = 2048;
    return t / 16;
  endfunction

  function automatic int ref_relu(input int z);
    if (z < 0) z = 0;
    if (z > 2048) z = 2048;
    return z / 16;
  endfunction

  // one LSTM step
  function automatic state_t ref_step(input weights_t w, input logic [NX-1:0] x,
                                      input bit first, input state_t s);
    int z, g [NG], cn, cc;
    int h [NH], c [NH];
    h = s.h; c = s.c;
    if (first) for (int u = 0; u < NH; u++) begin h[u] = 0; c[u] = 0; end
    for (int col = 0; col < NG; col++) begin
      z = w.b[col] * 128;
      for (int k = 0; k < NX; k++) if (x[k]) z += w.wx[k][col] * 128;
      for (int k = 0; k < NH; k++) z += w.wh[k][col] * h[k];
      g[col] = (col / NH == 2) ? ref_relu(z) : ref_sigmoid(z);
    end
    for (int u = 0; u < NH; u++) begin
      // gates: i = g[u], f = g[32+u], c~ = g[64+u], o = g[96+u]
      cn = (g[NH+u] * c[u] + g[u] * g[2*NH+u]) / 128;
      if (cn > 4095) cn = 4095;
      c[u] = cn;
      cc = (cn > 128) ? 128 : cn;
      h[u] = (g[3*NH+u] * cc) / 128;
    end
    s.h = h; s.c = c;
    return s;
  endfunction

  function automatic int ref_dense(input weights_t w, input state_t s);
    int z;
    z = w.bd * 128;
    for (int k = 0; k < NH; k++) z += w.wd[k] * s.h[k];
    return ref_sigmoid(z);
  endfunction

  // random weights in [-lim, lim-1]
  function automatic void ref_random(ref weights_t w, input int lim);
    for (int k = 0; k < NX; k++) for (int g = 0; g < NG; g++)
      w.wx[k][g] = int'($urandom_range(2*lim-1)) - lim;
    for (int k = 0; k < NH; k++) for (int g = 0; g < NG; g++)
      w.wh[k][g] = int'($urandom_range(2*lim-1)) - lim;
    for (int g = 0; g < NG; g++) w.b[g] = int'($urandom_range(2*lim-1)) - lim;
    for (int k = 0; k < NH; k++) w.wd[k] = int'($urandom_range(2*lim-1)) - lim;
    w.bd = int'($urandom_range(2*lim-1)) - lim;
  endfunction

  // weight at a store address (map: W_x, W_h, b, W_d, b_d, gate column innermost)
  function automatic int ref_weight_at(input weights_t w, input int a);
    if (a < 512)  return w.wx[a / NG][a % NG];
    if (a < 4608) return w.wh[(a - 512) / NG][(a - 512) % NG];
    if (a < 4736) return w.b[a - 4608];
    if (a < 4768) return w.wd[a - 4736];
    return w.bd;
  endfunction

endpackage
