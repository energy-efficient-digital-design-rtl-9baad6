// exp_decay: the exponential-decay stage of the LIF datapath.
//
// y = u * beta^dt. The elapsed time dt indexes decay_lut; the DECAY parameter
// (the "configuration bits" of the paper's schematic) selects whether the
// factor is applied by decay_multiplier (exact LUT values) or by decay_shifter
// (power-of-two approximation). The choice is fixed before synthesis, so only
// the selected unit is generated. In the clock-driven neuron dt is always 1
// and the stage is a plain multiply by beta or the u - (u >>> SHIFT_N) step.
// Combinational: y follows u and dt in the same cycle.
module exp_decay
  import lif_pkg::*;
#(
  parameter int unsigned U_BITS    = U_BITS_D,
  parameter int unsigned T_BITS    = T_BITS_D,
  parameter int unsigned BETA_FRAC = BETA_FRAC_D,
  parameter int unsigned BETA_Q    = 240,
  parameter int unsigned SHIFT_N   = 4,
  parameter decay_e      DECAY     = DECAY_SHIFT
) (
  input  logic signed [U_BITS-1:0] u,
  input  logic [T_BITS-1:0]        dt,
  output logic signed [U_BITS-1:0] y
);

  logic [BETA_FRAC:0] coef;
  shift_code_t        code;

  decay_lut #(
    .T_BITS(T_BITS), .BETA_FRAC(BETA_FRAC), .BETA_Q(BETA_Q),
    .SHIFT_N(SHIFT_N), .DECAY(DECAY)
  ) u_lut (
    .dt(dt), .coef(coef), .code(code)
  );

  if (DECAY == DECAY_MULT) begin : g_mult
    decay_multiplier #(.U_BITS(U_BITS), .BETA_FRAC(BETA_FRAC)) u_mul (
      .u(u), .coef(coef), .y(y)
    );
  end else begin : g_shift
    decay_shifter #(.U_BITS(U_BITS)) u_shf (
      .u(u), .code(code), .y(y)
    );
  end

endmodule
