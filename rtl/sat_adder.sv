// sat_adder: the accumulation adder of the LIF datapath.
//
// y = a + w, where a is the (decayed) signed membrane potential and w a signed
// weight, sign-extended. The sum is clamped to the signed U_BITS range instead
// of wrapping, so a long burst of excitatory inputs cannot flip the potential
// negative. The paper does not say how overflow is handled; saturation is
// this design's choice. Combinational.
module sat_adder #(
  parameter int unsigned U_BITS = lif_pkg::U_BITS_D,
  parameter int unsigned W_BITS = lif_pkg::W_BITS_D
) (
  input  logic signed [U_BITS-1:0] a,
  input  logic signed [W_BITS-1:0] w,
  output logic signed [U_BITS-1:0] y
);

  localparam logic signed [U_BITS:0] MAXV = (U_BITS+1)'((1 << (U_BITS-1)) - 1);
  localparam logic signed [U_BITS:0] MINV = -(U_BITS+1)'(1 << (U_BITS-1));

  logic signed [U_BITS:0] s;

  always_comb begin
    s = (U_BITS+1)'(a) + (U_BITS+1)'(w);
    if (s > MAXV)      y = U_BITS'(MAXV);
    else if (s < MINV) y = U_BITS'(MINV);
    else               y = U_BITS'(s);
  end

endmodule
