// tb_mlp_net: checks the network end to end against the reference model in
// mlp_ref_pkg, at full size (Full network, 8 outputs, 2264 parameters).
//
// Four parameter sets are used: small random weights (activations mostly in
// the linear region), full-range random weights (heavy saturation) and two in
// between. For each, 150 random cluster images are streamed with in_valid
// high in bursts, including long back-to-back runs. The testbench checks that
// out_valid rises exactly two clock edges after each accepted cluster and
// never otherwise (latency 2, one cluster per clock), and that every output
// equals the reference.
module tb_mlp_net;
  import smartpix_pkg::*;
  import mlp_ref_pkg::*;
  localparam int NO = 8;
  localparam int NP = smartpix_pkg::n_params(NO);

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  code_t codes [smartpix_pkg::NF][smartpix_pkg::NX][smartpix_pkg::NY];
  wgt_t prm [NP];
  logic out_valid;
  act_t out [NO];

  int checks = 0, failures = 0;
  int p [];
  int exp_q [$];   // expected outputs, NO entries per cluster
  int vpipe [3];
  int n_b2b = 0, n_out = 0;

  mlp_net #(.N_OUT(NO)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .codes(codes),
                             .prm(prm), .out_valid(out_valid), .out(out));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output monitor: compare at each rising edge
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (out_valid !== (vpipe[1] == 1)) begin
      failures++;
      $display("FAIL out_valid=%0b expected %0d at %0t", out_valid, vpipe[1], $time);
    end
    if (out_valid && exp_q.size() > 0) begin
      n_out++;
      for (int o = 0; o < NO; o++) begin
        int e;
        e = exp_q.pop_front();
        checks++;
        if (int'(out[o]) != e) begin
          failures++;
          if (failures < 20) $display("FAIL out[%0d]=%0d exp %0d n_out=%0d t=%0t", o, out[o], e, n_out, $time);
        end
      end
    end
    vpipe[1] = vpipe[0];
    vpipe[0] = in_valid;
  end

  initial begin
    int prev;
    p = new[NP];
    vpipe[0] = 0; vpipe[1] = 0;
    checks++;
    if (NP != 2264 || mlp_ref_pkg::n_params(NO) != 2264 || mlp_ref_pkg::n_params(3) != 2179) failures++;
    foreach (codes[f, x, y]) codes[f][x][y] = '0;
    foreach (prm[i]) prm[i] = '0;
    clear_counters();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int set = 0; set < 4; set++) begin
      int range;
      range = (set == 0) ? 8 : (set == 1) ? 128 : (set == 2) ? 32 : 64;
      // idle while the parameters change
      in_valid = 1'b0;
      repeat (3) @(negedge clk);
      for (int i = 0; i < NP; i++) begin
        p[i] = $urandom_range(2*range - 1) - range;
        prm[i] = 8'(p[i]);
      end
      prev = 0;
      for (int k = 0; k < 150; k++) begin
        @(negedge clk);
        if ($urandom_range(9) < 7) begin
          int c [];
          int e [];
          int dens;
          c = new[smartpix_pkg::NF * smartpix_pkg::NX * smartpix_pkg::NY];
          dens = $urandom_range(40);
          foreach (codes[f, x, y]) begin
            codes[f][x][y] = ($urandom_range(99) < dens) ? 2'($urandom) : 2'd0;
            c[(f*smartpix_pkg::NX + x)*smartpix_pkg::NY + y] = int'(codes[f][x][y]);
          end
          e = net(p, c, NO);
          foreach (e[o]) exp_q.push_back(e[o]);
          in_valid = 1'b1;
          if (prev) n_b2b++;
          prev = 1;
        end else begin
          in_valid = 1'b0;
          foreach (codes[f, x, y]) codes[f][x][y] = 2'($urandom);
          prev = 0;
        end
      end
      @(negedge clk) in_valid = 1'b0;
      repeat (4) @(negedge clk);
    end
    checks += 4;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size() / NO); end
    if (n_b2b == 0) failures++;
    if (n_relu_neg == 0 || n_relu_sat == 0) begin failures++; $display("FAIL relu corners not reached"); end
    if (n_tanh_sat == 0 || n_lin_sat == 0) begin failures++; $display("FAIL tanh/linear saturation not reached"); end
    $display("results=%0d back_to_back=%0d relu_neg=%0d relu_sat=%0d tanh_sat=%0d lin_sat=%0d",
             n_out, n_b2b, n_relu_neg, n_relu_sat, n_tanh_sat, n_lin_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
