// smartpix_pkg: sizes, number formats and parameter-memory layout shared by the
// sensor-edge regression network.
//
// Pixel array: 16 x 16 pixels, two time frames, two-bit ADC code per pixel and
// frame. Network weights, biases and activations use an 8-bit signed
// fixed-point format with one integer bit (fixed<8,1>, value = integer/128).
//
// The parameter memory holds every weight and bias of the MLP, layer after
// layer (x branch, y branch, embedding, hidden 1, hidden 2, output); inside a
// layer first the weights in [output][input] order, then the biases. The
// functions below give the offsets for any output count, so the Full (8
// outputs) and Slim (3 outputs) networks share the layout.
package smartpix_pkg;

  // Pixel matrix and front end
  localparam int NX     = 16;   // pixels along x
  localparam int NY     = 16;   // pixels along y
  localparam int NF     = 2;    // time frames per cluster
  localparam int CODE_W = 2;    // ADC bits per pixel and frame
  localparam int Q_W    = 16;   // charge / threshold width in electrons (signed)

  // Number formats
  localparam int W_W      = 8;  // weight and bias width, fixed<8,1>
  localparam int W_FRAC   = 7;
  localparam int ACT_W    = 8;  // activation width, fixed<8,1>
  localparam int ACT_FRAC = 7;

  // Pooled projections: exact sum of NY (or NX) codes, value = sum / 16
  localparam int POOL_W    = 6;  // max 16*3 = 48
  localparam int POOL_FRAC = 4;  // divide by 16

  // Network widths
  localparam int LATENT = 16;   // width of each projection branch
  localparam int HIDDEN = 16;   // embedding and hidden layer width

  typedef logic [CODE_W-1:0]     code_t;
  typedef logic signed [W_W-1:0] wgt_t;
  typedef logic signed [ACT_W-1:0] act_t;

  typedef enum logic [1:0] {ACT_LINEAR = 2'd0, ACT_RELU = 2'd1, ACT_TANH = 2'd2} act_kind_e;

  // Width of an exact dense-layer sum: product, growth over n_in terms, bias
  function automatic int acc_w(int in_w, int n_in);
    return in_w + W_W + $clog2(n_in) + 1;
  endfunction

  // Number of parameters of a dense layer
  function automatic int dense_size(int n_in, int n_out);
    return n_out * n_in + n_out;
  endfunction

  // Offsets of each layer in the parameter memory
  function automatic int off_xb();  return 0; endfunction
  function automatic int off_yb();  return off_xb() + dense_size(NX*NF, LATENT); endfunction
  function automatic int off_emb(); return off_yb() + dense_size(NY*NF, LATENT); endfunction
  function automatic int off_h1();  return off_emb() + dense_size(2*LATENT, HIDDEN); endfunction
  function automatic int off_h2();  return off_h1() + dense_size(HIDDEN, HIDDEN); endfunction
  function automatic int off_out(); return off_h2() + dense_size(HIDDEN, HIDDEN); endfunction
  function automatic int n_params(int n_out);
    return off_out() + dense_size(HIDDEN, n_out);
  endfunction

endpackage
