// mlp_net: the MLP regression network that turns one pixel cluster into track
// parameters, as a two-stage pipeline accepting a new cluster every clock.
//
// Data flow (all arithmetic in fixed point, weights and activations fixed<8,1>):
//   codes[2][16][16] --proj_pool--> x-projection (32) and y-projection (32)
//   x-projection --dense 32->16--> ReLU     y-projection --dense 32->16--> ReLU
//   concatenate (x branch first, 32) --dense 32->16--> tanh   = embedding
//   ---------------------------- pipeline register 1 ----------------------------
//   embedding --dense 16->16--> tanh --dense 16->16--> tanh
//   --dense 16->N_OUT--> linear, saturated to fixed<8,1>
//   ---------------------------- pipeline register 2 ----------------------------
// N_OUT = 8 is the Full network (four values and their uncertainties),
// N_OUT = 3 the Slim one. With the default sizes the network has 2264
// parameters (2179 for Slim).
//
// The layer sequence, widths, activations and number formats, the two-cycle
// latency and the one-cycle initiation interval follow the architecture. The
// width 16 of the two projection branches is inferred from the parameter
// count; the pipeline split, the requantisation by truncation with saturation,
// the tanh table and the order of parameters in prm (see smartpix_pkg) are
// this design's choices.
//
// Timing: when in_valid is high at a rising clock edge, codes are taken at
// that edge and out_valid is high, with the result on out, at the second
// rising edge after it. prm must be stable while clusters are in flight.
module mlp_net
  import smartpix_pkg::*;
#(
  parameter int  N_OUT = 8,
  localparam int N_PRM = n_params(N_OUT)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  code_t codes [NF][NX][NY],
  input  wgt_t  prm   [N_PRM],
  output logic  out_valid,
  output act_t  out   [N_OUT]
);

  localparam int NXI = NX * NF;      // x-projection length
  localparam int NYI = NY * NF;      // y-projection length
  localparam int NCAT = 2 * LATENT;  // concatenated branches
  localparam int PIN_W = POOL_W + 1; // pooled value as a signed number

  localparam int XB_W  = acc_w(PIN_W, NXI);
  localparam int YB_W  = acc_w(PIN_W, NYI);
  localparam int EMB_W = acc_w(ACT_W, NCAT);
  localparam int HID_W = acc_w(ACT_W, HIDDEN);

  localparam int OFF_XB  = off_xb();
  localparam int OFF_YB  = off_yb();
  localparam int OFF_EMB = off_emb();
  localparam int OFF_H1  = off_h1();
  localparam int OFF_H2  = off_h2();
  localparam int OFF_OUT = off_out();

  // ---------------------------------------------------------------- parameters
  wgt_t w_xb [LATENT][NXI];   wgt_t b_xb [LATENT];
  wgt_t w_yb [LATENT][NYI];   wgt_t b_yb [LATENT];
  wgt_t w_emb[HIDDEN][NCAT];  wgt_t b_emb[HIDDEN];
  wgt_t w_h1 [HIDDEN][HIDDEN]; wgt_t b_h1[HIDDEN];
  wgt_t w_h2 [HIDDEN][HIDDEN]; wgt_t b_h2[HIDDEN];
  wgt_t w_out[N_OUT][HIDDEN];  wgt_t b_out[N_OUT];

  always_comb begin
    for (int o = 0; o < LATENT; o++) begin
      for (int i = 0; i < NXI; i++) w_xb[o][i] = prm[OFF_XB + o*NXI + i];
      b_xb[o] = prm[OFF_XB + LATENT*NXI + o];
      for (int i = 0; i < NYI; i++) w_yb[o][i] = prm[OFF_YB + o*NYI + i];
      b_yb[o] = prm[OFF_YB + LATENT*NYI + o];
    end
    for (int o = 0; o < HIDDEN; o++) begin
      for (int i = 0; i < NCAT; i++) w_emb[o][i] = prm[OFF_EMB + o*NCAT + i];
      b_emb[o] = prm[OFF_EMB + HIDDEN*NCAT + o];
      for (int i = 0; i < HIDDEN; i++) begin
        w_h1[o][i] = prm[OFF_H1 + o*HIDDEN + i];
        w_h2[o][i] = prm[OFF_H2 + o*HIDDEN + i];
      end
      b_h1[o] = prm[OFF_H1 + HIDDEN*HIDDEN + o];
      b_h2[o] = prm[OFF_H2 + HIDDEN*HIDDEN + o];
    end
    for (int o = 0; o < N_OUT; o++) begin
      for (int i = 0; i < HIDDEN; i++) w_out[o][i] = prm[OFF_OUT + o*HIDDEN + i];
      b_out[o] = prm[OFF_OUT + N_OUT*HIDDEN + o];
    end
  end

  // ------------------------------------------------------------ stage 1
  logic [POOL_W-1:0] xsum [NXI];
  logic [POOL_W-1:0] ysum [NYI];
  logic signed [PIN_W-1:0] xin [NXI];
  logic signed [PIN_W-1:0] yin [NYI];

  proj_pool u_pool (.codes(codes), .xsum(xsum), .ysum(ysum));

  always_comb begin
    for (int i = 0; i < NXI; i++) xin[i] = signed'({1'b0, xsum[i]});
    for (int i = 0; i < NYI; i++) yin[i] = signed'({1'b0, ysum[i]});
  end

  logic signed [XB_W-1:0] acc_xb [LATENT];
  logic signed [YB_W-1:0] acc_yb [LATENT];
  act_t hx [LATENT];
  act_t hy [LATENT];
  act_t cat [NCAT];

  dense_layer #(.N_IN(NXI), .N_OUT(LATENT), .IN_W(PIN_W), .IN_FRAC(POOL_FRAC))
    u_xb (.x(xin), .w(w_xb), .b(b_xb), .acc(acc_xb));
  dense_layer #(.N_IN(NYI), .N_OUT(LATENT), .IN_W(PIN_W), .IN_FRAC(POOL_FRAC))
    u_yb (.x(yin), .w(w_yb), .b(b_yb), .acc(acc_yb));

  for (genvar o = 0; o < LATENT; o++) begin : g_branch_act
    act_q8 #(.ACC_W(XB_W), .ACC_FRAC(POOL_FRAC + W_FRAC), .KIND(ACT_RELU))
      u_rx (.acc(acc_xb[o]), .y(hx[o]));
    act_q8 #(.ACC_W(YB_W), .ACC_FRAC(POOL_FRAC + W_FRAC), .KIND(ACT_RELU))
      u_ry (.acc(acc_yb[o]), .y(hy[o]));
  end

  always_comb begin
    for (int i = 0; i < LATENT; i++) begin
      cat[i]          = hx[i];
      cat[LATENT + i] = hy[i];
    end
  end

  logic signed [EMB_W-1:0] acc_emb [HIDDEN];
  act_t emb [HIDDEN];

  dense_layer #(.N_IN(NCAT), .N_OUT(HIDDEN), .IN_W(ACT_W), .IN_FRAC(ACT_FRAC))
    u_emb (.x(cat), .w(w_emb), .b(b_emb), .acc(acc_emb));

  for (genvar o = 0; o < HIDDEN; o++) begin : g_emb_act
    act_q8 #(.ACC_W(EMB_W), .ACC_FRAC(ACT_FRAC + W_FRAC), .KIND(ACT_TANH))
      u_t (.acc(acc_emb[o]), .y(emb[o]));
  end

  logic s1_valid;
  act_t s1_emb [HIDDEN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      for (int i = 0; i < HIDDEN; i++) s1_emb[i] <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) s1_emb <= emb;
    end
  end

  // ------------------------------------------------------------ stage 2
  logic signed [HID_W-1:0] acc_h1 [HIDDEN];
  logic signed [HID_W-1:0] acc_h2 [HIDDEN];
  logic signed [HID_W-1:0] acc_o  [N_OUT];
  act_t h1 [HIDDEN];
  act_t h2 [HIDDEN];
  act_t yo [N_OUT];

  dense_layer #(.N_IN(HIDDEN), .N_OUT(HIDDEN), .IN_W(ACT_W), .IN_FRAC(ACT_FRAC))
    u_h1 (.x(s1_emb), .w(w_h1), .b(b_h1), .acc(acc_h1));

  for (genvar o = 0; o < HIDDEN; o++) begin : g_h1_act
    act_q8 #(.ACC_W(HID_W), .ACC_FRAC(ACT_FRAC + W_FRAC), .KIND(ACT_TANH))
      u_t (.acc(acc_h1[o]), .y(h1[o]));
  end

  dense_layer #(.N_IN(HIDDEN), .N_OUT(HIDDEN), .IN_W(ACT_W), .IN_FRAC(ACT_FRAC))
    u_h2 (.x(h1), .w(w_h2), .b(b_h2), .acc(acc_h2));

  for (genvar o = 0; o < HIDDEN; o++) begin : g_h2_act
    act_q8 #(.ACC_W(HID_W), .ACC_FRAC(ACT_FRAC + W_FRAC), .KIND(ACT_TANH))
      u_t (.acc(acc_h2[o]), .y(h2[o]));
  end

  dense_layer #(.N_IN(HIDDEN), .N_OUT(N_OUT), .IN_W(ACT_W), .IN_FRAC(ACT_FRAC))
    u_out (.x(h2), .w(w_out), .b(b_out), .acc(acc_o));

  for (genvar o = 0; o < N_OUT; o++) begin : g_out_act
    act_q8 #(.ACC_W(HID_W), .ACC_FRAC(ACT_FRAC + W_FRAC), .KIND(ACT_LINEAR))
      u_l (.acc(acc_o[o]), .y(yo[o]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N_OUT; i++) out[i] <= '0;
    end else begin
      out_valid <= s1_valid;
      if (s1_valid) out <= yo;
    end
  end

endmodule
