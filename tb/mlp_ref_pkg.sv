// mlp_ref_pkg: arithmetic reference for the testbenches.
//
// A plain behavioural description of the network, written independently of
// the RTL: it works on int values and reals rather than sized vectors, does
// the requantisation with $floor and evaluates tanh with $tanh directly. It
// also counts how often the saturating corners of each activation are hit, so
// that a testbench can show that its stimulus reached them.
package mlp_ref_pkg;

  localparam int NX = 16, NY = 16, NF = 2, LAT = 16, HID = 16;

  typedef int ivec_t [];

  // Corner-case counters, updated by act()
  int n_relu_neg, n_relu_sat, n_tanh_sat, n_lin_sat;

  function automatic void clear_counters();
    n_relu_neg = 0; n_relu_sat = 0; n_tanh_sat = 0; n_lin_sat = 0;
  endfunction

  // kind: 0 linear, 1 relu, 2 tanh. acc has 'frac' fraction bits.
  function automatic int act(longint acc, int frac, int kind);
    real v;
    int  q;
    v = $floor(real'(acc) / real'(longint'(1) << (frac - 7)));  // units of 1/128
    if (kind == 1) begin
      if (v < 0.0)        begin n_relu_neg++; return 0; end
      if (v > 127.0)      begin n_relu_sat++; return 127; end
      return int'(v);
    end
    if (kind == 2) begin
      if (v < -512.0) begin v = -512.0; n_tanh_sat++; end
      if (v > 511.0)  begin v = 511.0;  n_tanh_sat++; end
      q = int'($tanh(v / 128.0) * 128.0);
      return (q > 127) ? 127 : q;
    end
    if (v < -128.0) begin n_lin_sat++; return -128; end
    if (v > 127.0)  begin n_lin_sat++; return 127; end
    return int'(v);
  endfunction

  // Dense layer on int inputs with 'in_frac' fraction bits. Parameters p[] are
  // read from offset 'off' in [out][in] order followed by the biases.
  function automatic ivec_t dense(ivec_t p, int off, int n_in, int n_out, ivec_t x,
                                  int in_frac, int kind);
    ivec_t y;
    y = new[n_out];
    for (int o = 0; o < n_out; o++) begin
      longint s;
      s = longint'(p[off + n_out*n_in + o]) * (longint'(1) << in_frac);
      for (int i = 0; i < n_in; i++) s += longint'(p[off + o*n_in + i]) * longint'(x[i]);
      y[o] = act(s, in_frac + 7, kind);
    end
    return y;
  endfunction

  function automatic int n_params(int n_out);
    return 2*(LAT*NX*NF + LAT) + (HID*2*LAT + HID) + 2*(HID*HID + HID) + (n_out*HID + n_out);
  endfunction

  // Whole network. codes[f][x][y] flattened as (f*NX + x)*NY + y.
  function automatic ivec_t net(ivec_t p, ivec_t codes, int n_out);
    ivec_t xp, yp, hx, hy, cat, e, h1, h2;
    int off;
    xp = new[NX*NF]; yp = new[NY*NF];
    foreach (xp[i]) xp[i] = 0;
    foreach (yp[i]) yp[i] = 0;
    for (int f = 0; f < NF; f++)
      for (int x = 0; x < NX; x++)
        for (int y = 0; y < NY; y++) begin
          xp[x*NF + f] += codes[(f*NX + x)*NY + y];
          yp[y*NF + f] += codes[(f*NX + x)*NY + y];
        end
    off = 0;
    hx = dense(p, off, NX*NF, LAT, xp, 4, 1);  off += LAT*NX*NF + LAT;
    hy = dense(p, off, NY*NF, LAT, yp, 4, 1);  off += LAT*NY*NF + LAT;
    cat = new[2*LAT];
    for (int i = 0; i < LAT; i++) begin cat[i] = hx[i]; cat[LAT+i] = hy[i]; end
    e  = dense(p, off, 2*LAT, HID, cat, 7, 2); off += HID*2*LAT + HID;
    h1 = dense(p, off, HID, HID, e, 7, 2);     off += HID*HID + HID;
    h2 = dense(p, off, HID, HID, h1, 7, 2);    off += HID*HID + HID;
    return dense(p, off, HID, n_out, h2, 7, 0);
  endfunction

endpackage
