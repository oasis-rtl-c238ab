// clustering_unit -- maps an FP16 activation to the index of its nearest
// centroid in the activation codebook (non-uniform quantization, step 1 of the
// main branch).
//
// As in the paper, the unit first forms the boundaries between adjacent
// centroids, b_i = (c_i + c_{i+1}) / 2 (codebook sorted ascending), and assigns
// x to cluster i when b_{i-1} <= x < b_i. The boundary comparisons are arranged
// as a binary search tree: at each level x is compared with the middle boundary
// of the remaining range ("x < b?", yes = lower half). With 2^NA centroids this
// takes NA levels. The unit resolves LPC levels per cycle with LPC shared
// comparators, so an activation occupies it for ceil(NA/LPC) cycles: 2 cycles at
// W4A4, which with 4 units gives the 2048-cycle quantization of a 4096-element
// token printed in the paper's pipeline figure. LPC is this design's choice.
//
// Interface: valid/ready input (in_x plus a pass-through tag such as the channel
// number); out_valid pulses for one cycle with out_idx and out_tag, the cycle
// after the last search level. Boundaries are recomputed combinationally from
// `cb`, which must be stable while the unit works.
module clustering_unit
  import fp16_pkg::*;
#(
  parameter int unsigned NA  = oasis_pkg::NA_DEF,
  parameter int unsigned LPC = oasis_pkg::CLUST_LPC_DEF,
  parameter int unsigned TW  = $clog2(oasis_pkg::K_DEF),
  localparam int unsigned NC = 1 << NA,
  localparam int unsigned RW = $clog2(NA + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  fp16_t         cb [NC],
  input  logic          in_valid,
  output logic          in_ready,
  input  fp16_t         in_x,
  input  logic [TW-1:0] in_tag,
  output logic          out_valid,
  output logic [NA-1:0] out_idx,
  output logic [TW-1:0] out_tag
);
  fp16_t bnd [NC];  // bnd[NC-1] unused

  always_comb begin
    for (int i = 0; i < int'(NC) - 1; i++) bnd[i] = fp16_half(fp16_add(cb[i], cb[i+1]));
    bnd[NC-1] = FP16_POS_INF;
  end

  logic [RW-1:0] rem_q;   // search levels still to resolve; 0 = idle
  logic [NA-1:0] lo_q;
  fp16_t         x_q;
  logic [TW-1:0] tag_q;

  // one shared search datapath of LPC levels
  logic          busy;
  fp16_t         sx;
  logic [NA-1:0] slo, nlo;
  logic [RW-1:0] srem, nrem;

  assign busy     = (rem_q != '0);
  assign in_ready = !busy;
  assign sx       = busy ? x_q : in_x;
  assign slo      = busy ? lo_q : '0;
  assign srem     = busy ? rem_q : RW'(NA);

  always_comb begin
    int unsigned half, mid;
    half = 0;
    mid  = 0;
    nlo  = slo;
    nrem = srem;
    for (int l = 0; l < int'(LPC); l++) begin
      if (nrem != '0) begin
        half = 1 << (int'(nrem) - 1);
        mid  = int'(nlo) + half - 1;
        if (!fp16_lt(sx, bnd[mid])) nlo = nlo + NA'(half);
        nrem = nrem - RW'(1);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem_q     <= '0;
      lo_q      <= '0;
      x_q       <= FP16_ZERO;
      tag_q     <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (busy || in_valid) begin
        if (!busy) begin
          x_q   <= in_x;
          tag_q <= in_tag;
        end
        lo_q  <= nlo;
        rem_q <= nrem;
        if (nrem == '0) begin
          out_valid <= 1'b1;
          out_idx   <= nlo;
          out_tag   <= busy ? tag_q : in_tag;
        end
      end
    end
  end
endmodule
