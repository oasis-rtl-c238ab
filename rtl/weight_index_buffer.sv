// weight_index_buffer -- Weight Index Buffer of one PE line.
//
// Holds the 4-bit weight indices idx_W[k][n] of the NOUT output channels served
// by the line, one memory row per output channel (K indices packed in a row).
// Two read ports serve the two branches: the main branch reads a whole row (the
// K weight indices of one output channel, fed to the Concat Units), and the
// outlier branch reads one input channel k for NRD consecutive output channels
// (fed to the Dequantization Unit and the error-compensation MACs). The write
// port, driven by the memory controller from HBM, writes WR_W indices of a row
// per cycle. Reads are combinational.
//
// The paper gives 2 KB per line (one row of 4096 4-bit indices); this buffer
// holds the whole slice of the layer so that the outlier branch can fetch an
// input channel from it as the paper describes. See the design notes.
module weight_index_buffer #(
  parameter int unsigned K    = oasis_pkg::K_DEF,
  parameter int unsigned NOUT = oasis_pkg::N_OUT_DEF / oasis_pkg::N_LINES_DEF,
  parameter int unsigned NW   = oasis_pkg::NW_DEF,
  parameter int unsigned WR_W = 16,
  parameter int unsigned NRD  = oasis_pkg::N_MAC_DEF,
  localparam int unsigned NOW = (NOUT > 1) ? $clog2(NOUT) : 1,
  localparam int unsigned KW  = $clog2(K),
  localparam int unsigned WDW = (K / WR_W > 1) ? $clog2(K / WR_W) : 1
) (
  input  logic           clk,
  input  logic           wr_en,
  input  logic [NOW-1:0] wr_row,
  input  logic [WDW-1:0] wr_word,
  input  logic [NW-1:0]  wr_data [WR_W],
  input  logic [NOW-1:0] row_sel,
  output logic [NW-1:0]  row_idx [K],
  input  logic [KW-1:0]  col_ch,
  input  logic [NOW-1:0] col_base,
  output logic [NW-1:0]  col_idx [NRD]
);
  logic [K*NW-1:0] mem [NOUT];
  logic [WR_W*NW-1:0] wr_word_bits;

  always_comb begin
    for (int i = 0; i < int'(WR_W); i++) wr_word_bits[i*NW +: NW] = wr_data[i];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row][int'(wr_word)*WR_W*NW +: WR_W*NW] <= wr_word_bits;
  end

  logic [K*NW-1:0] row_bits;
  assign row_bits = mem[row_sel];
  always_comb begin
    for (int k = 0; k < int'(K); k++) row_idx[k] = row_bits[k*NW +: NW];
  end

  always_comb begin
    for (int j = 0; j < int'(NRD); j++)
      col_idx[j] = mem[NOW'(int'(col_base) + j)][int'(col_ch)*NW +: NW];
  end
endmodule
