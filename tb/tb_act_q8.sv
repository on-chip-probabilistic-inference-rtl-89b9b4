// tb_act_q8: checks the three activation kinds on a 24-bit accumulator with
// 14 fraction bits (the hidden-layer format). Inputs sweep the whole tanh
// table range in steps of 1/256, cover values just around every cut point,
// and include random values far outside the range. The expected value is
// worked out with real arithmetic ($floor, $tanh).
module tb_act_q8;
  import smartpix_pkg::*;
  localparam int AW = 24, AF = 14;
  logic signed [AW-1:0] acc;
  act_t y_relu, y_tanh, y_lin;
  int checks = 0, failures = 0;
  int n_tanh_mid = 0, n_tanh_sat = 0;

  act_q8 #(.ACC_W(AW), .ACC_FRAC(AF), .KIND(ACT_RELU))   u_relu (.acc(acc), .y(y_relu));
  act_q8 #(.ACC_W(AW), .ACC_FRAC(AF), .KIND(ACT_TANH))   u_tanh (.acc(acc), .y(y_tanh));
  act_q8 #(.ACC_W(AW), .ACC_FRAC(AF), .KIND(ACT_LINEAR)) u_lin  (.acc(acc), .y(y_lin));

  task automatic check(int a);
    real v;
    int er, et, el;
    acc = AW'(a);
    #1;
    v = $floor(real'(a) / 128.0);
    er = (v < 0.0) ? 0 : (v > 127.0) ? 127 : int'(v);
    el = (v < -128.0) ? -128 : (v > 127.0) ? 127 : int'(v);
    if (v < -512.0 || v > 511.0) n_tanh_sat++; else n_tanh_mid++;
    if (v < -512.0) v = -512.0;
    if (v > 511.0) v = 511.0;
    et = int'($tanh(v / 128.0) * 128.0);
    if (et > 127) et = 127;
    checks += 3;
    if (int'(y_relu) != er) begin failures++; $display("FAIL relu acc=%0d y=%0d exp %0d", a, y_relu, er); end
    if (int'(y_tanh) != et) begin failures++; $display("FAIL tanh acc=%0d y=%0d exp %0d", a, y_tanh, et); end
    if (int'(y_lin)  != el) begin failures++; $display("FAIL lin  acc=%0d y=%0d exp %0d", a, y_lin, el); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = -(600 << 7); a < (600 << 7); a += 64) check(a);
    for (int c = -513; c <= 513; c++) begin
      check(c * 128 - 1);
      check(c * 128);
      check(c * 128 + 1);
    end
    for (int k = 0; k < 2000; k++) check(int'($urandom) >>> 8);
    check(-(1 << 23));
    check((1 << 23) - 1);
    checks++;
    if (n_tanh_mid == 0 || n_tanh_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
