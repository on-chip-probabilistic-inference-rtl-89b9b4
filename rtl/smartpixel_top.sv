// smartpixel_top: sensor-edge inference for one 16 x 16 pixel region.
//
// Each pixel's collected charge is digitised to two bits twice per bunch
// crossing, once per time frame, by flash ADCs whose three thresholds are
// shared by the whole array. The resulting 16 x 16 x 2 code image feeds the
// MLP network, which returns N_OUT regressed track parameters (hit position,
// incidence angles and, for the Full network, their uncertainties) two clock
// cycles later, with a new cluster accepted every clock.
//
// Blocks: 2 x 256 pixel_adc models (one per pixel and frame; analog on the
// chip), weight_store (network parameters, written through the cfg port) and
// mlp_net (the network). The charge-sensitive amplifiers and the bias network
// that sets the thresholds are analog; their outputs enter as the charge and
// thr ports.
//
// Timing: strobe[f] samples frame f of the charge; both strobes must come
// before the clock edge at which in_valid is high, and the codes then stay
// stable until the next strobe (the strobes are assumed to be generated in
// step with the clock). out_valid and out follow two rising edges after that
// edge. Parameter writes (cfg_we) take one clock and must not overlap
// clusters whose result is still wanted; an assertion flags a write in the
// same cycle as in_valid. The frame sampling scheme, the
// strobe interface and the parameter port are this design's choices.
module smartpixel_top
  import smartpix_pkg::*;
#(
  parameter int  N_OUT  = 8,
  localparam int N_PRM  = n_params(N_OUT),
  localparam int ADDR_W = $clog2(N_PRM)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // analog front end
  input  logic signed [Q_W-1:0] charge [NX][NY],
  input  logic [NF-1:0]         strobe,
  input  logic signed [Q_W-1:0] thr    [3],
  // inference
  input  logic                  in_valid,
  output logic                  out_valid,
  output act_t                  out    [N_OUT],
  // parameter load
  input  logic                  cfg_we,
  input  logic [ADDR_W-1:0]     cfg_addr,
  input  wgt_t                  cfg_wdata
);

  code_t codes [NF][NX][NY];
  wgt_t  prm   [N_PRM];

  for (genvar f = 0; f < NF; f++) begin : g_frame
    for (genvar x = 0; x < NX; x++) begin : g_x
      for (genvar y = 0; y < NY; y++) begin : g_y
        pixel_adc #(.Q_W(Q_W)) u_adc (
          .rst_n (rst_n),
          .strobe(strobe[f]),
          .charge(charge[x][y]),
          .thr   (thr),
          .code  (codes[f][x][y])
        );
      end
    end
  end

  weight_store #(.N_WORDS(N_PRM), .ADDR_W(ADDR_W)) u_wts (
    .clk  (clk),
    .rst_n(rst_n),
    .we   (cfg_we),
    .waddr(cfg_addr),
    .wdata(cfg_wdata),
    .prm  (prm)
  );

  mlp_net #(.N_OUT(N_OUT)) u_net (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .codes    (codes),
    .prm      (prm),
    .out_valid(out_valid),
    .out      (out)
  );

  // Usage rule of the configuration port: a parameter write and a new
  // cluster never share a clock cycle.
  property p_no_write_with_cluster;
    @(posedge clk) cfg_we |-> !in_valid;
  endproperty
  a_no_write_with_cluster: assert property (p_no_write_with_cluster)
    else $error("smartpixel_top: parameter write in the same cycle as a cluster");

endmodule
