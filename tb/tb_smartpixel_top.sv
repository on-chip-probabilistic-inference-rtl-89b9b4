// tb_smartpixel_top: end-to-end test of the whole chip at its default size
// (16 x 16 pixels, two frames, Full network with 8 outputs).
//
// For each of three parameter sets the testbench writes all 2264 network
// parameters through the configuration port, then sends clusters: a random
// track footprint of deposited charge with Gaussian-like noise, sampled by
// the two frame strobes (the first frame sees part of the final charge), with
// in_valid raised once both frames are sampled. Clusters come in bursts on
// consecutive clocks. The thresholds change between parameter sets. Every
// result is compared with mlp_ref_pkg applied to codes binned independently
// in the testbench, and out_valid must follow in_valid by exactly two clock
// edges.
//
// Mechanisms that must each occur at least once (counted and reported): all
// four ADC codes, a negative and a saturated ReLU input, a saturated tanh
// input, a saturated linear output, back-to-back clusters, a parameter
// reload and a threshold change.
module tb_smartpixel_top;
  timeunit 1ns;
  timeprecision 100ps;
  import smartpix_pkg::*;
  import mlp_ref_pkg::*;
  localparam int NO = 8;
  localparam int NP = 2264;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [15:0] charge [smartpix_pkg::NX][smartpix_pkg::NY];
  logic [1:0] strobe = '0;
  logic signed [15:0] thr [3];
  logic out_valid;
  act_t out [NO];
  logic cfg_we = 1'b0;
  logic [11:0] cfg_addr = '0;
  wgt_t cfg_wdata = '0;

  int checks = 0, failures = 0;
  int p [];
  int exp_q [$];
  int vpipe [2];
  int code_seen [4];
  int n_b2b = 0, n_out = 0, n_reload = 0, n_thr_change = 0;

  smartpixel_top dut (
    .clk(clk), .rst_n(rst_n), .charge(charge), .strobe(strobe), .thr(thr),
    .in_valid(in_valid), .out_valid(out_valid), .out(out),
    .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_wdata(cfg_wdata));

  always #12.5 clk = ~clk;   // 25 ns bunch-crossing clock

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (out_valid != (vpipe[1] == 1)) begin
      failures++;
      $display("FAIL out_valid=%0b expected %0d at %0t", out_valid, vpipe[1], $time);
    end
    if (out_valid && exp_q.size() >= NO) begin
      n_out++;
      for (int o = 0; o < NO; o++) begin
        int e;
        e = exp_q.pop_front();
        checks++;
        if (int'(out[o]) != e) begin
          failures++;
          if (failures < 20) $display("FAIL out[%0d]=%0d exp %0d (cluster %0d)", o, out[o], e, n_out);
        end
      end
    end
    vpipe[1] = vpipe[0];
    vpipe[0] = in_valid;
  end

  function automatic int bin(int q);
    int c;
    c = 0;
    for (int j = 0; j < 3; j++) if (q >= int'(thr[j])) c++;
    return c;
  endfunction

  // Roughly Gaussian noise with sigma near 80 electrons (sum of 4 uniforms)
  function automatic int noise();
    int s;
    s = 0;
    for (int k = 0; k < 4; k++) s += $urandom_range(277) - 138;
    return s;
  endfunction

  // One cluster, sampled in two frames during the low phase of the clock:
  // strobe[0] rises 1.0 ns after the falling clock edge, strobe[1] 3.8 ns later.
  task automatic send_cluster(ref int n_codes [4]);
    int q1 [smartpix_pkg::NX][smartpix_pkg::NY];
    ivec_t c, e;
    int x0, y0, len, wid, amp;
    c = new[smartpix_pkg::NF * smartpix_pkg::NX * smartpix_pkg::NY];
    x0 = $urandom_range(2, 12); y0 = $urandom_range(2, 12);
    len = $urandom_range(1, 3); wid = $urandom_range(1, 4);
    amp = $urandom_range(400, 6000);
    foreach (q1[x, y]) begin
      q1[x][y] = noise();
      if (x >= x0 && x < x0 + len && y >= y0 && y < y0 + wid)
        q1[x][y] += $urandom_range(amp / 4, amp);
      if (q1[x][y] > 32767) q1[x][y] = 32767;
    end
    for (int f = 0; f < 2; f++) begin
      // frame 0 sees about 60% of the final charge
      foreach (q1[x, y]) begin
        int q;
        q = (f == 0) ? (q1[x][y] * 3) / 5 : q1[x][y];
        charge[x][y] = 16'(q);
        c[(f*smartpix_pkg::NX + x)*smartpix_pkg::NY + y] = bin(q);
        n_codes[bin(q)]++;
      end
      // rising strobe edges 3.8 ns apart, both well before the next clock edge
      if (f == 0) begin #1.0 strobe[0] = 1'b1; #1.9 strobe[0] = 1'b0; end
      else        begin #1.9 strobe[1] = 1'b1; #1.0 strobe[1] = 1'b0; end
    end
    e = net(p, c, NO);
    foreach (e[o]) exp_q.push_back(e[o]);
    in_valid = 1'b1;
  endtask

  task automatic load_params(int range);
    @(negedge clk);
    in_valid = 1'b0;
    repeat (3) @(negedge clk);
    for (int i = 0; i < NP; i++) begin
      p[i] = $urandom_range(2*range - 1) - range;
      cfg_we = 1'b1; cfg_addr = 12'(i); cfg_wdata = 8'(p[i]);
      @(negedge clk);
    end
    cfg_we = 1'b0;
    n_reload++;
  endtask

  initial begin
    int prev;
    p = new[NP];
    vpipe[0] = 0; vpipe[1] = 0;
    foreach (code_seen[k]) code_seen[k] = 0;
    foreach (charge[x, y]) charge[x][y] = '0;
    thr[0] = 248; thr[1] = 668; thr[2] = 1663;
    clear_counters();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int set = 0; set < 3; set++) begin
      int range;
      range = (set == 0) ? 24 : (set == 1) ? 128 : 48;
      load_params(range);
      if (set == 2) begin
        thr[0] = 300; thr[1] = 900; thr[2] = 2000;
        n_thr_change++;
      end
      prev = 0;
      for (int k = 0; k < 60; k++) begin
        @(negedge clk);
        if ($urandom_range(9) < 7) begin
          send_cluster(code_seen);
          if (prev) n_b2b++;
          prev = 1;
        end else begin
          in_valid = 1'b0;
          prev = 0;
        end
      end
      @(negedge clk) in_valid = 1'b0;
      repeat (4) @(negedge clk);
    end
    $display("clusters=%0d codes=%0d/%0d/%0d/%0d back_to_back=%0d reloads=%0d thr_changes=%0d",
             n_out, code_seen[0], code_seen[1], code_seen[2], code_seen[3], n_b2b, n_reload, n_thr_change);
    $display("relu_neg=%0d relu_sat=%0d tanh_sat=%0d lin_sat=%0d", n_relu_neg, n_relu_sat, n_tanh_sat, n_lin_sat);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size() / NO); end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (code_seen[k] == 0) begin failures++; $display("FAIL ADC code %0d never seen", k); end
    end
    checks += 7;
    if (n_relu_neg == 0) begin failures++; $display("FAIL no negative ReLU input"); end
    if (n_relu_sat == 0) begin failures++; $display("FAIL no saturated ReLU"); end
    if (n_tanh_sat == 0) begin failures++; $display("FAIL no saturated tanh"); end
    if (n_lin_sat == 0)  begin failures++; $display("FAIL no saturated output"); end
    if (n_b2b == 0)      begin failures++; $display("FAIL no back-to-back clusters"); end
    if (n_reload < 2)    begin failures++; $display("FAIL no parameter reload"); end
    if (n_thr_change == 0) begin failures++; $display("FAIL no threshold change"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
