// proj_pool: x and y projections of the two-frame, two-bit charge image.
//
// The network does not look at the 16 x 16 image directly: for every time
// frame it averages the image along y (giving one value per x column, the
// x-projection) and along x (one value per y row, the y-projection). An
// average of 16 codes is kept exactly as the plain sum (0..48); the division
// by 16 is implied by giving the result four fraction bits, so no rounding
// happens here.
//
// Output order follows the flattening of a (position, frame) tensor: element
// p*NF + f holds position p of frame f. Purely combinational.
module proj_pool
  import smartpix_pkg::*;
(
  input  code_t             codes [NF][NX][NY],
  output logic [POOL_W-1:0] xsum  [NX*NF],
  output logic [POOL_W-1:0] ysum  [NY*NF]
);

  always_comb begin
    for (int f = 0; f < NF; f++) begin
      for (int x = 0; x < NX; x++) begin
        xsum[x*NF+f] = '0;
        for (int y = 0; y < NY; y++) xsum[x*NF+f] += POOL_W'(codes[f][x][y]);
      end
      for (int y = 0; y < NY; y++) begin
        ysum[y*NF+f] = '0;
        for (int x = 0; x < NX; x++) ysum[y*NF+f] += POOL_W'(codes[f][x][y]);
      end
    end
  end

endmodule
