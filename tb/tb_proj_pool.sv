// tb_proj_pool: checks the x and y projections of the code image.
//
// Images: all zero, all three (largest sums, 48), single pixels, and random
// images with varying density. Each of the 32 + 32 sums is compared with a
// sum taken in the opposite loop order in the testbench.
module tb_proj_pool;
  import smartpix_pkg::*;
  code_t codes [NF][NX][NY];
  logic [POOL_W-1:0] xsum [NX*NF];
  logic [POOL_W-1:0] ysum [NY*NF];
  int checks = 0, failures = 0;

  proj_pool dut (.codes(codes), .xsum(xsum), .ysum(ysum));

  task automatic check_all();
    int ex [NX*NF];
    int ey [NY*NF];
    foreach (ex[i]) ex[i] = 0;
    foreach (ey[i]) ey[i] = 0;
    for (int y = 0; y < NY; y++)
      for (int x = 0; x < NX; x++)
        for (int f = 0; f < NF; f++) begin
          ex[x*NF+f] += int'(codes[f][x][y]);
          ey[y*NF+f] += int'(codes[f][x][y]);
        end
    #1;
    for (int i = 0; i < NX*NF; i++) begin
      checks++;
      if (int'(xsum[i]) != ex[i]) begin failures++; $display("FAIL xsum[%0d]=%0d exp %0d", i, xsum[i], ex[i]); end
    end
    for (int i = 0; i < NY*NF; i++) begin
      checks++;
      if (int'(ysum[i]) != ey[i]) begin failures++; $display("FAIL ysum[%0d]=%0d exp %0d", i, ysum[i], ey[i]); end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (codes[f, x, y]) codes[f][x][y] = 2'd0;
    check_all();
    foreach (codes[f, x, y]) codes[f][x][y] = 2'd3;
    check_all();
    for (int k = 0; k < 20; k++) begin
      foreach (codes[f, x, y]) codes[f][x][y] = 2'd0;
      codes[$urandom_range(NF-1)][$urandom_range(NX-1)][$urandom_range(NY-1)] = 2'($urandom_range(1, 3));
      check_all();
    end
    for (int k = 0; k < 100; k++) begin
      int dens;
      dens = $urandom_range(100);
      foreach (codes[f, x, y]) codes[f][x][y] = ($urandom_range(99) < dens) ? 2'($urandom) : 2'd0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
