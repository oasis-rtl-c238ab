// lut_mem -- the on-chip LUT.
//
// Holds the three tables the accelerator needs, all FP16 and loaded before
// inference: the Cartesian-product table cp[{a,w}] = C_A[a] * C_W[w]
// (2^(NA+NW) entries), the weight codebook C_W (2^NW entries, used by the
// Dequantization Units) and the activation codebook C_A (2^NA entries, used by
// the Clustering Units and the Error Calculation Unit). The paper states that
// the LUT stores these three; it sizes the LUT at 2 KB, larger than the 576 B
// these tables take at W4A4.
//
// Interface: one write port, address map cp at 0.., C_W after cp, C_A after
// C_W. All entries are read in parallel (register outputs). Reset clears all.
module lut_mem
  import fp16_pkg::*;
#(
  parameter int unsigned NW = oasis_pkg::NW_DEF,
  parameter int unsigned NA = oasis_pkg::NA_DEF,
  localparam int unsigned NCP = 1 << (NW + NA),
  localparam int unsigned NCW = 1 << NW,
  localparam int unsigned NCA = 1 << NA,
  localparam int unsigned AW  = $clog2(NCP + NCW + NCA)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  fp16_t         wr_data,
  output fp16_t         cp   [NCP],
  output fp16_t         w_cb [NCW],
  output fp16_t         a_cb [NCA]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NCP); i++) cp[i] <= FP16_ZERO;
      for (int i = 0; i < int'(NCW); i++) w_cb[i] <= FP16_ZERO;
      for (int i = 0; i < int'(NCA); i++) a_cb[i] <= FP16_ZERO;
    end else if (wr_en) begin
      if (int'(wr_addr) < int'(NCP)) cp[int'(wr_addr)] <= wr_data;
      else if (int'(wr_addr) < int'(NCP + NCW)) w_cb[int'(wr_addr) - int'(NCP)] <= wr_data;
      else if (int'(wr_addr) < int'(NCP + NCW + NCA)) a_cb[int'(wr_addr) - int'(NCP + NCW)] <= wr_data;
    end
  end
endmodule
