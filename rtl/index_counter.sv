// index_counter -- one 16-input Index Counter.
//
// Follows Fig. 9(a) of the paper: every concatenated index is decoded into a
// one-hot column of 2^(NW+NA) bits, and a bit counter adds each row of the
// one-hot matrix, giving for every possible concatenated value the number of
// inputs that carry it. Purely combinational; the PE line registers and
// accumulates the counts across the chunks of a reduction.
//
// Interface: `cat_idx[IN]` are the concatenated indices, `count[b]` is the number
// of inputs equal to b (0..IN).
module index_counter #(
  parameter int unsigned IN = oasis_pkg::IC_IN_DEF,
  parameter int unsigned CW = oasis_pkg::NW_DEF + oasis_pkg::NA_DEF,
  localparam int unsigned NBINS = 1 << CW,
  localparam int unsigned CNTW  = $clog2(IN + 1)
) (
  input  logic [CW-1:0]   cat_idx [IN],
  output logic [CNTW-1:0] count   [NBINS]
);
  logic [NBINS-1:0] onehot [IN];

  always_comb begin
    for (int i = 0; i < int'(IN); i++) onehot[i] = NBINS'(1) << cat_idx[i];
  end

  always_comb begin
    for (int b = 0; b < int'(NBINS); b++) begin
      count[b] = '0;
      for (int i = 0; i < int'(IN); i++) count[b] = count[b] + CNTW'(onehot[i][b]);
    end
  end
endmodule
