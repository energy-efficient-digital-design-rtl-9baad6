// decay_lut: look-up table of the decay factor beta^dt.
//
// The event-driven neuron decays its potential only when an input arrives, so
// it needs beta raised to the number of elapsed steps dt. This table holds that
// factor for every dt the T_BITS time field can express (2^T_BITS entries;
// entry 0 means "no decay"). The DECAY parameter selects which table is built:
//   DECAY_MULT : coef = round(beta^dt * 2^BETA_FRAC), beta = BETA_Q / 2^BETA_FRAC,
//                unsigned with BETA_FRAC fraction bits (coef = 2^BETA_FRAC is 1.0)
//   DECAY_SHIFT: code = the closest of {2^-k, 1-2^-k, k = 1..15} to beta^dt,
//                beta = 1 - 2^-SHIFT_N
// The entries are computed at elaboration by the lif_pkg functions. The output
// of the table that is not built is driven to "no decay". Purely combinational.
// The paper gives the LUT's role and the beta = 1 - 2^-n form; the table depth,
// coefficient precision and the shift candidate set are this design's choices.
module decay_lut
  import lif_pkg::*;
#(
  parameter int unsigned T_BITS    = T_BITS_D,
  parameter int unsigned BETA_FRAC = BETA_FRAC_D,
  parameter int unsigned BETA_Q    = 240,   // 0.9375 with 8 fraction bits
  parameter int unsigned SHIFT_N   = 4,     // beta = 1 - 2^-4 for the shifter
  parameter decay_e      DECAY     = DECAY_SHIFT
) (
  input  logic [T_BITS-1:0]    dt,
  output logic [BETA_FRAC:0]   coef,
  output shift_code_t          code
);

  localparam int unsigned DEPTH = 1 << T_BITS;
  // beta of the shifter variant, expressed with BETA_FRAC fraction bits
  localparam int unsigned BETA_SH_Q = (1 << BETA_FRAC) - (1 << (BETA_FRAC - SHIFT_N));

  if (DECAY == DECAY_MULT) begin : g_mult
    logic [BETA_FRAC:0] lut [DEPTH];
    for (genvar i = 0; i < int'(DEPTH); i++) begin : g_e
      localparam int unsigned V = beta_pow_q(BETA_Q, BETA_FRAC, i);
      assign lut[i] = (BETA_FRAC+1)'(V);
    end
    assign coef = lut[dt];
    assign code = '{keep: 1'b1, sub: 1'b0, k: 4'd0};
  end else begin : g_shift
    shift_code_t lut [DEPTH];
    for (genvar i = 0; i < int'(DEPTH); i++) begin : g_e
      localparam shift_code_t C = shift_code(BETA_SH_Q, BETA_FRAC, i);
      assign lut[i] = C;
    end
    assign code = lut[dt];
    assign coef = (BETA_FRAC+1)'(1) << BETA_FRAC;
  end

endmodule
