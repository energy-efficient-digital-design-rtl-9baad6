// decay_shifter: power-of-two decay unit.
//
// Applies the factor named by a shift code from decay_lut to the signed
// membrane potential:
//   keep        : y = u
//   sub, k      : y = u - (u >>> k)   factor 1 - 2^-k
//   not sub, k  : y = u >>> k         factor 2^-k
// The subtract form is the paper's way of keeping beta close to 1 with only a
// shifter and a subtractor (beta = 1 - beta', beta' a power of two); the pure
// shift form covers the small factors reached after long silences.
// Combinational.
module decay_shifter
  import lif_pkg::*;
#(
  parameter int unsigned U_BITS = U_BITS_D
) (
  input  logic signed [U_BITS-1:0] u,
  input  shift_code_t              code,
  output logic signed [U_BITS-1:0] y
);

  logic signed [U_BITS-1:0] sh;

  always_comb begin
    sh = u >>> code.k;
    if (code.keep)     y = u;
    else if (code.sub) y = u - sh;
    else               y = sh;
  end

endmodule
