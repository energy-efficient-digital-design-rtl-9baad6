// membrane_reg: the membrane-potential register of the LIF neuron.
//
// Holds the signed U_BITS potential between updates. On a rising clock edge:
// rst or clr set it to 0 (rst is the power-on reset, clr starts a new input
// sample), otherwise load writes d. Reset and clear are synchronous and active
// high, which is this design's choice.
module membrane_reg #(
  parameter int unsigned U_BITS = lif_pkg::U_BITS_D
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     clr,
  input  logic                     load,
  input  logic signed [U_BITS-1:0] d,
  output logic signed [U_BITS-1:0] q
);

  always_ff @(posedge clk) begin
    if (rst || clr) q <= '0;
    else if (load)  q <= d;
  end

endmodule
