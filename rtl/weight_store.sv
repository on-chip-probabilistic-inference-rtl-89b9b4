// weight_store: register file for every weight and bias of the network.
//
// All N_WORDS fixed<8,1> parameters are visible in parallel on prm, as a fully
// unrolled datapath needs them. They are written one word per clock through a
// simple synchronous write port (we, waddr, wdata); a write takes effect at
// the next rising edge, and an address at or above N_WORDS is ignored. Reset
// clears every word to zero.
//
// The network needs its trained parameters from somewhere; loading them into
// registers is this design's choice, made so that the same hardware serves
// any training. A production version could instead fold fixed values into the
// multipliers as constants.
module weight_store
  import smartpix_pkg::*;
#(
  parameter int N_WORDS = 2264,
  parameter int ADDR_W  = $clog2(N_WORDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  wgt_t              wdata,
  output wgt_t              prm [N_WORDS]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_WORDS; i++) prm[i] <= '0;
    end else if (we && int'(waddr) < N_WORDS) begin
      prm[waddr] <= wdata;
    end
  end

endmodule
