// dense_layer: one fully connected layer, fully unrolled.
//
// Computes acc[o] = b[o] + sum_i w[o][i] * x[i] for all N_OUT outputs in
// parallel, with one multiplier per weight, so a new input vector can enter
// every clock cycle. Weights and biases are fixed<8,1> (value = integer/128);
// the inputs carry IN_FRAC fraction bits. The sum is exact: the accumulator
// has IN_FRAC + 7 fraction bits and is wide enough never to overflow, and the
// bias is shifted left by IN_FRAC to line it up with the products. Rounding
// to the activation format happens afterwards, in act_q8.
//
// Purely combinational; the enclosing network decides where the pipeline
// registers go.
module dense_layer
  import smartpix_pkg::*;
#(
  parameter int N_IN    = 16,
  parameter int N_OUT   = 16,
  parameter int IN_W    = 8,
  parameter int IN_FRAC = 7,
  localparam int ACC_W  = acc_w(IN_W, N_IN)
) (
  input  logic signed [IN_W-1:0]  x   [N_IN],
  input  wgt_t                    w   [N_OUT][N_IN],
  input  wgt_t                    b   [N_OUT],
  output logic signed [ACC_W-1:0] acc [N_OUT]
);

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      acc[o] = ACC_W'(b[o]) <<< IN_FRAC;
      for (int i = 0; i < N_IN; i++) acc[o] += ACC_W'(w[o][i]) * ACC_W'(x[i]);
    end
  end

endmodule
