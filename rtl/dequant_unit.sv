// dequant_unit -- the Dequantization Unit of a PE line.
//
// Turns the 4-bit weight indices of one input channel (NMAC output channels at a
// time, one per error-compensation MAC) into FP16 weights by looking them up in
// the weight centroid codebook held in the LUT block. Combinational.
module dequant_unit
  import fp16_pkg::*;
#(
  parameter int unsigned NW   = oasis_pkg::NW_DEF,
  parameter int unsigned NMAC = oasis_pkg::N_MAC_DEF
) (
  input  logic [NW-1:0] idx [NMAC],
  input  fp16_t         cb  [1<<NW],
  output fp16_t         w   [NMAC]
);
  always_comb begin
    for (int j = 0; j < int'(NMAC); j++) w[j] = cb[idx[j]];
  end
endmodule
