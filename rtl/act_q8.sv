// act_q8: activation function and requantisation to fixed<8,1>.
//
// Takes one exact dense-layer sum (ACC_FRAC fraction bits) and produces an
// 8-bit activation with seven fraction bits, range [-1, 127/128]. The sum is
// first cut to seven fraction bits by an arithmetic right shift (truncation
// toward minus infinity), then:
//   ACT_RELU   : max(0, v), saturated at 127/128
//   ACT_TANH   : table lookup; the table has one entry per 1/128 step over
//                [-4, 4) holding round(128 * tanh(v)) clipped to 127, and
//                inputs outside that range use the end entries
//   ACT_LINEAR : v saturated to [-1, 127/128] (the network's output layer)
// The table is computed when the design is elaborated. The activation kinds
// and the 8-bit format come from the network definition; the truncating
// rounding, the saturation and the table size are this design's choices.
// Purely combinational.
module act_q8
  import smartpix_pkg::*;
#(
  parameter int        ACC_W    = 24,
  parameter int        ACC_FRAC = 14,
  parameter act_kind_e KIND     = ACT_TANH,
  parameter int        TANH_N   = 1024   // table entries, covering [-TANH_N/256, TANH_N/256)
) (
  input  logic signed [ACC_W-1:0] acc,
  output act_t                    y
);

  localparam int SHIFT = ACC_FRAC - ACT_FRAC;
  localparam int HALF  = TANH_N / 2;

  typedef act_t lut_t [TANH_N];

  function automatic lut_t tanh_table();
    lut_t t;
    for (int i = 0; i < TANH_N; i++) begin
      int r;
      r = int'($tanh(real'(i - HALF) / 128.0) * 128.0);
      if (r > 127)  r = 127;
      if (r < -128) r = -128;
      t[i] = ACT_W'(r);
    end
    return t;
  endfunction

  localparam lut_t TANH_LUT = tanh_table();

  localparam int IDX_W = $clog2(TANH_N);
  localparam logic signed [ACC_W-1:0] TLO  = ACC_W'(-HALF);
  localparam logic signed [ACC_W-1:0] THI  = ACC_W'(HALF - 1);
  localparam logic signed [ACC_W-1:0] AMAX = ACC_W'(127);
  localparam logic signed [ACC_W-1:0] AMIN = ACC_W'(-128);

  logic signed [ACC_W-1:0] v;   // value with ACT_FRAC fraction bits
  logic [IDX_W-1:0]        idx;

  always_comb begin
    v   = acc >>> SHIFT;
    idx = '0;
    unique case (KIND)
      ACT_RELU: begin
        if (v < 0)         y = '0;
        else if (v > AMAX) y = 8'sd127;
        else              y = ACT_W'(v);
      end
      ACT_TANH: begin
        if (v < TLO)      idx = '0;
        else if (v > THI) idx = '1;
        else              idx = IDX_W'(v + ACC_W'(HALF));
        y = TANH_LUT[idx];
      end
      default: begin
        if (v < AMIN)      y = -8'sd128;
        else if (v > AMAX) y = 8'sd127;
        else              y = ACT_W'(v);
      end
    endcase
  end

  initial begin
    assert (SHIFT >= 0) else $fatal(1, "act_q8: ACC_FRAC must be at least %0d", ACT_FRAC);
  end

endmodule
