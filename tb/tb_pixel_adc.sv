// tb_pixel_adc: checks the two-bit flash ADC model.
//
// Thresholds start at 248 / 668 / 1663 electrons and are later drawn at
// random (sorted). Charges are placed on, just below and just above each
// threshold and at random; after each strobe the latched code must equal the
// number of thresholds at or below the charge. The code must hold while the
// charge moves without a strobe, and reset must clear it.
module tb_pixel_adc;
  logic rst_n = 1'b0, strobe = 1'b0;
  logic signed [15:0] charge, thr [3];
  logic [1:0] code;
  int checks = 0, failures = 0;
  int seen [4];

  pixel_adc #(.Q_W(16)) dut (.rst_n(rst_n), .strobe(strobe), .charge(charge), .thr(thr), .code(code));

  function automatic int expect_code(int q, int t0, int t1, int t2);
    if (q >= t2) return 3;
    if (q >= t1) return 2;
    if (q >= t0) return 1;
    return 0;
  endfunction

  task automatic sample_and_check(int q);
    charge = 16'(q);
    #1 strobe = 1'b1;
    #1 strobe = 1'b0;
    checks++;
    if (int'(code) != expect_code(q, thr[0], thr[1], thr[2])) begin
      failures++;
      $display("FAIL q=%0d thr=%0d/%0d/%0d code=%0d", q, thr[0], thr[1], thr[2], code);
    end
    seen[code]++;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int q, last;
    thr[0] = 248; thr[1] = 668; thr[2] = 1663;
    charge = 16'sd5000;
    #1 rst_n = 1'b0;
    #1 checks++;
    if (code != 0) failures++;
    rst_n = 1'b1;
    for (int r = 0; r < 200; r++) begin
      if (r > 0) begin
        int a, b, c, t;
        a = $urandom_range(3000); b = $urandom_range(3000); c = $urandom_range(3000);
        if (a > b) begin t = a; a = b; b = t; end
        if (b > c) begin t = b; b = c; c = t; end
        if (a > b) begin t = a; a = b; b = t; end
        thr[0] = 16'(a); thr[1] = 16'(b); thr[2] = 16'(c);
      end
      for (int j = 0; j < 3; j++) begin
        sample_and_check(thr[j] - 1);
        sample_and_check(thr[j]);
        sample_and_check(thr[j] + 1);
      end
      q = $urandom_range(4000) - 500;
      sample_and_check(q);
    end
    // Hold without a strobe
    sample_and_check(2000);
    last = code;
    charge = -16'sd100;
    #5 checks++;
    if (int'(code) != last) failures++;
    // Reset clears
    rst_n = 1'b0;
    #1 checks++;
    if (code != 0) failures++;
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (seen[k] == 0) begin failures++; $display("FAIL code %0d never produced", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
