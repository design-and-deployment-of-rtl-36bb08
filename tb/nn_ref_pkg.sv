// nn_ref_pkg: bit-accurate reference arithmetic for the testbenches.
//
// Each function recomputes, with plain 64-bit integer arithmetic, what one
// stage of the network should produce: input conversion, batch
// normalisation, a dense layer, output conversion and the whole model.
// Number formats follow the design: data 16 bits with 8 fractional bits,
// weights 16 bits with 10 fractional bits, 32-bit wrapping accumulators.
package nn_ref_pkg;
  import dnn_pkg::*;

  localparam int DW = 16;
  localparam int DF = 8;
  localparam int WF = 10;

  function automatic longint sat(longint v, int w);
    longint mx = (64'sd1 <<< (w - 1)) - 1;
    longint mn = -(64'sd1 <<< (w - 1));
    return (v > mx) ? mx : (v < mn) ? mn : v;
  endfunction

  // raw integer -> data format
  function automatic longint ref_in(longint raw, int raw_frac, output bit s);
    longint v = (DF >= raw_frac) ? raw * (64'sd1 <<< (DF - raw_frac)) : raw >>> (raw_frac - DF);
    longint r = sat(v, DW);
    s = (r != v);
    return r;
  endfunction

  function automatic longint ref_bn(longint x, longint scale, longint bias);
    return sat(((x * scale) >>> WF) + bias, DW);
  endfunction

  // one node of a dense layer; x and w hold n entries
  function automatic longint ref_node(longint x[], longint w[], longint b, int n, bit relu);
    int acc = int'(b * 1024);          // bias in product format, 32-bit wrap
    longint r;
    for (int i = 0; i < n; i++) acc = acc + int'(x[i] * w[i]);
    r = sat(longint'(acc) >>> WF, DW);
    if (relu && r < 0) r = 0;
    return r;
  endfunction

  // data format -> unsigned word with out_frac fractional bits
  function automatic longint ref_out(longint y, int out_frac, int out_w, output bit lo, output bit hi);
    longint sh = DF - out_frac;
    longint r  = (sh > 0) ? ((y + (64'sd1 <<< (sh - 1))) >>> sh) : y * (64'sd1 <<< (-sh));
    longint mx = (64'sd1 <<< out_w) - 1;
    lo = (r < 0);
    hi = (r > mx);
    return lo ? 0 : hi ? mx : r;
  endfunction

  // sign-extend a w-bit field
  function automatic longint sx(longint v, int w);
    return (v <<< (64 - w)) >>> (64 - w);
  endfunction

  // one sub-network (three layers) on normalised features
  function automatic longint ref_branch(longint xn[], branch_coef_t c);
    longint h1[] = new[N_H1];
    longint h2[] = new[N_H2];
    longint w[];
    for (int j = 0; j < N_H1; j++) begin
      w = new[N_IN];
      for (int i = 0; i < N_IN; i++) w[i] = sx(c.w1[j][i], 16);
      h1[j] = ref_node(xn, w, sx(c.b1[j], 16), N_IN, 1'b1);
    end
    for (int j = 0; j < N_H2; j++) begin
      w = new[N_H1];
      for (int i = 0; i < N_H1; i++) w[i] = sx(c.w2[j][i], 16);
      h2[j] = ref_node(h1, w, sx(c.b2[j], 16), N_H1, 1'b1);
    end
    w = new[N_H2];
    for (int i = 0; i < N_H2; i++) w[i] = sx(c.w3[0][i], 16);
    return ref_node(h2, w, sx(c.b3[0], 16), N_H2, 1'b0);
  endfunction

  // batch norm of all features
  function automatic void ref_bn_all(longint x[], nn_coef_t c, ref longint xn[]);
    xn = new[N_IN];
    for (int i = 0; i < N_IN; i++) xn[i] = ref_bn(x[i], sx(c.bn_scale[i], 16), sx(c.bn_bias[i], 16));
  endfunction

  // random coefficients: BN scale around 1/16, small weights, biases of
  // either sign, and a wide output bias so that both clips can occur
  function automatic longint rr(int lo, int hi);
    return longint'($urandom_range(0, hi - lo)) + lo;
  endfunction

  function automatic branch_coef_t rand_branch(int out_bias);
    branch_coef_t c;
    for (int j = 0; j < N_H1; j++) begin
      for (int i = 0; i < N_IN; i++) c.w1[j][i] = 16'(rr(-300, 300));
      c.b1[j] = 16'(rr(-512, 512));
    end
    for (int j = 0; j < N_H2; j++) begin
      for (int i = 0; i < N_H1; i++) c.w2[j][i] = 16'(rr(-600, 600));
      c.b2[j] = 16'(rr(-512, 512));
    end
    for (int i = 0; i < N_H2; i++) c.w3[0][i] = 16'(rr(-2048, 2048));
    c.b3[0] = 16'(rr(-out_bias, out_bias));
    return c;
  endfunction

  function automatic nn_coef_t rand_coef(int out_bias);
    nn_coef_t c;
    for (int i = 0; i < N_IN; i++) begin
      c.bn_scale[i] = 16'(rr(20, 100));
      c.bn_bias[i]  = 16'(rr(-256, 256));
    end
    c.pt = rand_branch(out_bias);
    c.d0 = rand_branch(out_bias);
    return c;
  endfunction

endpackage
