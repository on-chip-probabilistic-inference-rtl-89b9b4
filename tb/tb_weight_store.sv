// tb_weight_store: checks the parameter register file at its full size of
// 2264 words: reset clears every word, each write lands at its address and
// only there, writes take effect at the next clock edge, writes with we low or
// an address beyond the last word change nothing, and a second full load
// replaces the first.
module tb_weight_store;
  import smartpix_pkg::*;
  localparam int N = 2264, AW = 12;
  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  logic [AW-1:0] waddr = '0;
  wgt_t wdata = '0;
  wgt_t prm [N];
  int model [N];
  int checks = 0, failures = 0;

  weight_store #(.N_WORDS(N), .ADDR_W(AW)) dut (.clk(clk), .rst_n(rst_n), .we(we), .waddr(waddr), .wdata(wdata), .prm(prm));

  always #5 clk = ~clk;

  task automatic compare_all(string what);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (int'(prm[i]) != model[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s word %0d = %0d exp %0d", what, i, prm[i], model[i]);
      end
    end
  endtask

  task automatic write(int a, int d, bit en);
    @(negedge clk);
    we = en; waddr = AW'(a); wdata = 8'(d);
    @(negedge clk);
    we = 1'b0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (model[i]) model[i] = 0;
    repeat (2) @(negedge clk);
    compare_all("reset");
    rst_n = 1'b1;
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        we = 1'b1; waddr = AW'(i); wdata = 8'($urandom);
        // the write must not be visible before the clock edge
        checks++;
        if (int'(prm[i]) != model[i]) failures++;
        model[i] = int'(wdata);
      end
      @(negedge clk) we = 1'b0;
      compare_all("load");
    end
    // disabled and out-of-range writes
    write(5, 99, 1'b0);
    write(N, 77, 1'b1);
    write(4095, 66, 1'b1);
    compare_all("ignored");
    // reset clears
    rst_n = 1'b0;
    @(negedge clk);
    foreach (model[i]) model[i] = 0;
    compare_all("reset2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
