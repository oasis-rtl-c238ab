// output_buffer -- the 64 KB Output Buffer (32768 FP16 words).
//
// Holds the FP16 activation vector that is the input of a GEMM and receives the
// GEMM output. Ports: a host port (one read and one write per cycle, used by the
// memory controller to fill and drain it), NCR single-word read ports for the
// Clustering Units, a burst read port of NBR consecutive words for loading the
// Orizuru leaves, and NMW write ports, one per PE line, for the merged outputs.
// Reads are combinational, writes happen on the rising edge; if two ports write
// the same word, the higher-numbered line port wins and the host port loses.
// The port set is this design's choice; the paper gives the size and users.
module output_buffer
  import fp16_pkg::*;
#(
  parameter int unsigned WORDS = oasis_pkg::OBUF_WORDS_DEF,
  parameter int unsigned NCR   = oasis_pkg::N_CLUST_DEF,
  parameter int unsigned NBR   = oasis_pkg::ORZ_LOAD_DEF,
  parameter int unsigned NMW   = oasis_pkg::N_LINES_DEF,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          h_we,
  input  logic [AW-1:0] h_waddr,
  input  fp16_t         h_wdata,
  input  logic [AW-1:0] h_raddr,
  output fp16_t         h_rdata,
  input  logic [AW-1:0] c_addr [NCR],
  output fp16_t         c_data [NCR],
  input  logic [AW-1:0] b_addr,
  output fp16_t         b_data [NBR],
  input  logic          m_we   [NMW],
  input  logic [AW-1:0] m_addr [NMW],
  input  fp16_t         m_data [NMW]
);
  fp16_t mem [WORDS];

  always_ff @(posedge clk) begin
    if (h_we) mem[h_waddr] <= h_wdata;
    for (int p = 0; p < int'(NMW); p++) if (m_we[p]) mem[m_addr[p]] <= m_data[p];
  end

  assign h_rdata = mem[h_raddr];
  always_comb begin
    for (int p = 0; p < int'(NCR); p++) c_data[p] = mem[c_addr[p]];
    for (int j = 0; j < int'(NBR); j++) b_data[j] = mem[AW'(int'(b_addr) + j)];
  end
endmodule
