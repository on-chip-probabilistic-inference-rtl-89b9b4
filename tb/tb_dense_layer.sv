// tb_dense_layer: checks the fully connected layer in the two shapes the
// network uses: 32 unsigned pooled inputs (7-bit, four fraction bits) into 16
// outputs, and 16 fixed<8,1> inputs into 16 outputs. Weights, biases and
// inputs are random, with extra vectors at the format extremes (all -1.0,
// all 127/128) to exercise the accumulator's full range.
module tb_dense_layer;
  import smartpix_pkg::*;
  localparam int NA = 32, OA = 16, WA = 7, FA = 4;
  localparam int NB = 16, OB = 16, WB = 8, FB = 7;
  localparam int AW_A = acc_w(WA, NA), AW_B = acc_w(WB, NB);

  logic signed [WA-1:0] xa [NA];
  wgt_t wa [OA][NA];
  wgt_t ba [OA];
  logic signed [AW_A-1:0] acca [OA];
  logic signed [WB-1:0] xb [NB];
  wgt_t wb [OB][NB];
  wgt_t bb [OB];
  logic signed [AW_B-1:0] accb [OB];
  int checks = 0, failures = 0;

  dense_layer #(.N_IN(NA), .N_OUT(OA), .IN_W(WA), .IN_FRAC(FA)) dut_a (.x(xa), .w(wa), .b(ba), .acc(acca));
  dense_layer #(.N_IN(NB), .N_OUT(OB), .IN_W(WB), .IN_FRAC(FB)) dut_b (.x(xb), .w(wb), .b(bb), .acc(accb));

  task automatic check();
    #1;
    for (int o = 0; o < OA; o++) begin
      longint s;
      s = longint'(ba[o]) * 16;
      for (int i = 0; i < NA; i++) s += longint'(wa[o][i]) * longint'(xa[i]);
      checks++;
      if (longint'(acca[o]) != s) begin failures++; $display("FAIL A[%0d] %0d exp %0d", o, acca[o], s); end
    end
    for (int o = 0; o < OB; o++) begin
      longint s;
      s = longint'(bb[o]) * 128;
      for (int i = 0; i < NB; i++) s += longint'(wb[o][i]) * longint'(xb[i]);
      checks++;
      if (longint'(accb[o]) != s) begin failures++; $display("FAIL B[%0d] %0d exp %0d", o, accb[o], s); end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 300; k++) begin
      int mode;
      mode = k % 10;
      foreach (xa[i]) xa[i] = (mode == 0) ? 7'sd48 : 7'($urandom_range(48));
      foreach (wa[o, i]) wa[o][i] = (mode == 0) ? -8'sd128 : (mode == 1) ? 8'sd127 : 8'($urandom);
      foreach (ba[o]) ba[o] = (mode == 0) ? -8'sd128 : 8'($urandom);
      foreach (xb[i]) xb[i] = (mode == 0) ? -8'sd128 : (mode == 1) ? 8'sd127 : 8'($urandom);
      foreach (wb[o, i]) wb[o][i] = (mode == 0) ? -8'sd128 : (mode == 1) ? 8'sd127 : 8'($urandom);
      foreach (bb[o]) bb[o] = (mode == 1) ? 8'sd127 : 8'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
