// decay_multiplier: exact-coefficient decay unit.
//
// y = (u * coef) >>> BETA_FRAC, where u is the signed membrane potential and
// coef an unsigned factor with BETA_FRAC fraction bits (coef <= 1.0). The
// product is formed at full width and the fraction bits are dropped by an
// arithmetic shift, i.e. the result is rounded toward minus infinity (this
// rounding is this design's choice; the paper does not state one). Because
// coef <= 1.0 the result always fits in U_BITS. Combinational; written as
// plain arithmetic and marked use_dsp = "no" so an FPGA flow maps it to LUT
// logic, as in the paper, which kept DSP blocks out of the comparison.
module decay_multiplier #(
  parameter int unsigned U_BITS    = lif_pkg::U_BITS_D,
  parameter int unsigned BETA_FRAC = lif_pkg::BETA_FRAC_D
) (
  input  logic signed [U_BITS-1:0] u,
  input  logic [BETA_FRAC:0]       coef,
  output logic signed [U_BITS-1:0] y
);

  (* use_dsp = "no" *) logic signed [U_BITS+BETA_FRAC+1:0] prod;

  always_comb begin
    prod = (U_BITS+BETA_FRAC+2)'(u) * signed'({1'b0, coef});
    y    = U_BITS'(prod >>> BETA_FRAC);
  end

endmodule
