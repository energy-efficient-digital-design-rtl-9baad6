// firing_reset: threshold comparison and reset of the LIF neuron.
//
// spike = (u > VTH): the neuron fires when its potential exceeds the
// threshold. On a spike the potential is reset by the rule the RESET parameter
// selects (the paper's schematic shows a zero-reset and a subtract-reset block
// behind a configuration selector):
//   RESET_ZERO : y = 0
//   RESET_SUB  : y = u - VTH
// Without a spike y = u. The threshold value is not given by the paper; the
// default of 64 and the strict comparison are this design's choices.
// Combinational.
module firing_reset
  import lif_pkg::*;
#(
  parameter int unsigned           U_BITS = U_BITS_D,
  parameter logic signed [U_BITS-1:0] VTH = 64,
  parameter reset_e                RESET  = RESET_SUB
) (
  input  logic signed [U_BITS-1:0] u,
  output logic                     spike,
  output logic signed [U_BITS-1:0] y
);

  always_comb begin
    spike = (u > VTH);
    if (!spike)                 y = u;
    else if (RESET == RESET_SUB) y = u - VTH;
    else                        y = '0;
  end

endmodule
