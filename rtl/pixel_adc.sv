// pixel_adc: behavioural model of one pixel's two-bit flash ADC (with the
// charge-sensitive amplifier in front of it folded into its input).
//
// This is a behavioural model of an analog block, not logic meant for
// synthesis. The collected charge, expressed in electrons, is compared with
// three programmable thresholds T0 < T1 < T2 and the bin index is latched at
// the rising edge of the sampling strobe:
//   code = 0 for Q < T0, 1 for T0 <= Q < T1, 2 for T1 <= Q < T2, 3 for Q >= T2.
// The binning rule is the digitisation law of the architecture. Expressing the
// charge and the thresholds as signed integers of electrons, the strobe
// interface and the reset to code 0 are choices of this model; on silicon the
// thresholds are bias voltages and the strobe timing comes from the pixel's
// analog timing circuitry.
//
// Interface: charge and thr are sampled on the rising edge of strobe; code is
// valid from that edge until the next one. rst_n clears code asynchronously.
module pixel_adc #(
  parameter int Q_W = 16
) (
  input  logic                  rst_n,
  input  logic                  strobe,
  input  logic signed [Q_W-1:0] charge,
  input  logic signed [Q_W-1:0] thr [3],
  output logic [1:0]            code
);

  // Thermometer code of the three comparators, then its population count
  logic [2:0] therm;
  logic [1:0] bin;

  always_comb begin
    for (int j = 0; j < 3; j++) therm[j] = (charge >= thr[j]);
    bin = 2'(therm[0]) + 2'(therm[1]) + 2'(therm[2]);
  end

  always_ff @(posedge strobe or negedge rst_n) begin
    if (!rst_n) code <= '0;
    else        code <= bin;
  end

endmodule
