// weights_rom: the neuron's synaptic weight memory.
//
// One signed W_BITS weight per input channel, addressed by the channel number
// (the scan index in the serial variants, the packet address in the AER
// variant). The paper builds the neuron without block RAM, so the ROM is a
// small constant table read combinationally: weight follows addr in the same
// cycle. The contents come from the WEIGHTS parameter, channel i in bits
// [i*W_BITS +: W_BITS]. The paper gives the 6-bit weight width and the 8
// channels; the default weight values are this design's own example set
// (12, -5, 20, 7, -9, 31, 3, 15 for channels 0..7).
module weights_rom #(
  parameter int unsigned             N_IN    = lif_pkg::N_IN_D,
  parameter int unsigned             W_BITS  = lif_pkg::W_BITS_D,
  parameter int unsigned             A_BITS  = lif_pkg::A_BITS_D,
  parameter logic [N_IN*W_BITS-1:0]  WEIGHTS = {6'h0F, 6'h03, 6'h1F, 6'h37,
                                                6'h07, 6'h14, 6'h3B, 6'h0C}
) (
  input  logic [A_BITS-1:0]        addr,
  output logic signed [W_BITS-1:0] weight
);

  logic [W_BITS-1:0] rom [N_IN];

  for (genvar i = 0; i < int'(N_IN); i++) begin : g_rom
    assign rom[i] = WEIGHTS[i*W_BITS +: W_BITS];
  end

  always_comb begin
    if (32'(addr) < N_IN) weight = signed'(rom[addr]);
    else                  weight = '0;
  end

endmodule
