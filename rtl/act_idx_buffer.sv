// act_idx_buffer -- Activation Index Buffer.
//
// Stores the 4-bit activation indices produced by the Clustering Units and
// broadcasts a whole row (the K indices of one token) to all PE lines. 16 KB =
// ROWS=8 rows of 4096 4-bit indices. NWR write ports, one per Clustering Unit,
// each write one index per cycle into the selected row; the row read is
// combinational. The row organisation and port counts are this design's choice.
module act_idx_buffer #(
  parameter int unsigned K    = oasis_pkg::K_DEF,
  parameter int unsigned NA   = oasis_pkg::NA_DEF,
  parameter int unsigned ROWS = oasis_pkg::AIB_ROWS_DEF,
  parameter int unsigned NWR  = oasis_pkg::N_CLUST_DEF,
  localparam int unsigned KW  = $clog2(K),
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic          clk,
  input  logic [RW-1:0] wr_row,
  input  logic          wr_en   [NWR],
  input  logic [KW-1:0] wr_addr [NWR],
  input  logic [NA-1:0] wr_data [NWR],
  input  logic [RW-1:0] rd_row,
  output logic [NA-1:0] rd_idx  [K]
);
  logic [K*NA-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    for (int p = 0; p < int'(NWR); p++)
      if (wr_en[p]) mem[wr_row][int'(wr_addr[p])*NA +: NA] <= wr_data[p];
  end

  logic [K*NA-1:0] row_bits;
  assign row_bits = mem[rd_row];
  always_comb begin
    for (int k = 0; k < int'(K); k++) rd_idx[k] = row_bits[k*NA +: NA];
  end
endmodule
