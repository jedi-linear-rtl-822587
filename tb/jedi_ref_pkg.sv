// jedi_ref_pkg -- integer reference model of the JEDI-linear tagger for the testbenches.
//
// Written independently of the RTL datapath: weights are applied with ordinary
// multiplications (not shift-add digits), requantization is a floor division by 64 written
// with / and %, and pooling divides by the particle count. Only the weight and bias tables are
// shared with the design. Vectors and matrices are flat int arrays; element (p, f) of a
// matrix with F columns is at index p*F + f. The counters n_sat and n_relu record how often
// saturation and the ReLU clamp changed a value, so a test can prove it exercised them.
package jedi_ref_pkg;

  typedef int ivec_t[];

  int n_sat  = 0;
  int n_relu = 0;

  function automatic int floor_div(int a, int b);
    int q;
    q = a / b;
    if ((a % b) != 0 && a < 0) q = q - 1;
    return q;
  endfunction

  function automatic int sat8(int v);
    if (v > 127)  begin n_sat++; return 127;  end
    if (v < -128) begin n_sat++; return -128; end
    return v;
  endfunction

  function automatic int relu(int v);
    if (v < 0) begin n_relu++; return 0; end
    return v;
  endfunction

  // y = requant(W x + b) for one vector.
  function automatic ivec_t dense(int layer, ivec_t x, int n_out, bit do_relu);
    ivec_t y;
    longint acc;
    y = new[n_out];
    for (int o = 0; o < n_out; o++) begin
      acc = jedi_pkg::bias(layer, o);
      foreach (x[i]) acc += longint'(jedi_pkg::weight(layer, o, i)) * x[i];
      y[o] = sat8(floor_div(int'(acc), 64));
      if (do_relu) y[o] = relu(y[o]);
    end
    return y;
  endfunction

  // The same dense layer on every row of an n_part x n_in matrix.
  function automatic ivec_t einsum(int layer, ivec_t x, int n_part, int n_in, int n_out, bit do_relu);
    ivec_t y, xi, yi;
    y  = new[n_part*n_out];
    xi = new[n_in];
    for (int p = 0; p < n_part; p++) begin
      for (int i = 0; i < n_in; i++) xi[i] = x[p*n_in + i];
      yi = dense(layer, xi, n_out, do_relu);
      for (int o = 0; o < n_out; o++) y[p*n_out + o] = yi[o];
    end
    return y;
  endfunction

  // Column means (floor) of an n_part x n_f matrix.
  function automatic ivec_t mean(ivec_t x, int n_part, int n_f);
    ivec_t g;
    int s;
    g = new[n_f];
    for (int f = 0; f < n_f; f++) begin
      s = 0;
      for (int p = 0; p < n_part; p++) s += x[p*n_f + f];
      g[f] = floor_div(s, n_part);
    end
    return g;
  endfunction

  // relu(sat8(s[p][f] + d[f])).
  function automatic ivec_t bcast_add(ivec_t s, ivec_t d, int n_part, int n_f);
    ivec_t e;
    e = new[n_part*n_f];
    for (int p = 0; p < n_part; p++)
      for (int f = 0; f < n_f; f++) e[p*n_f + f] = relu(sat8(s[p*n_f + f] + d[f]));
    return e;
  endfunction

  function automatic ivec_t gather(ivec_t x, int n_part, int d_e);
    ivec_t s, d;
    s = einsum(jedi_pkg::L_DENSE2, x, n_part, d_e, d_e, 1'b0);
    d = dense(jedi_pkg::L_DENSE3, mean(x, n_part, d_e), d_e, 1'b0);
    return bcast_add(s, d, n_part, d_e);
  endfunction

  function automatic ivec_t mlp(ivec_t x, int n_hid, int n_class);
    ivec_t h;
    h = dense(jedi_pkg::L_MLP0,     x, n_hid, 1'b1);
    h = dense(jedi_pkg::L_MLP0 + 1, h, n_hid, 1'b1);
    h = dense(jedi_pkg::L_MLP0 + 2, h, n_hid, 1'b1);
    return dense(jedi_pkg::L_MLP0 + 3, h, n_class, 1'b0);
  endfunction

  function automatic ivec_t model(ivec_t particles, int n_part, int n_feat, int d_e, int d_e2,
                                  int n_hid, int n_class);
    ivec_t x, e, y;
    x = einsum(jedi_pkg::L_IN_PROJ, particles, n_part, n_feat, d_e, 1'b1);
    e = gather(x, n_part, d_e);
    y = einsum(jedi_pkg::L_EINSUM4, e, n_part, d_e, d_e2, 1'b1);
    return mlp(mean(y, n_part, d_e2), n_hid, n_class);
  endfunction

  // Random 8-bit value; with probability 1/8 an extreme (-128 or 127).
  function automatic int rnd8();
    int unsigned r;
    r = $urandom;
    if (r[2:0] == 3'd0) return r[3] ? 127 : -128;
    return int'(r[15:8]) - 128;
  endfunction

endpackage
