// error_calc_unit -- Error Calculation Unit of the outlier branch.
//
// For each outlier (FP16 value x and its channel index) it finds the centroid
// the main branch quantized x to, using the same mid-point boundaries and
// binary search as the Clustering Units, and outputs the residual
// r = x - C_A[idx] with the channel index. All NA search levels and the FP16
// subtraction are done in one cycle; the result sits in an output register with
// a valid/ready handshake (a one-entry pipeline stage). The paper gives the
// function ("calculates the residual between the outlier activation and its
// nearest centroid"); the single-cycle organisation is this design's choice.
module error_calc_unit
  import fp16_pkg::*;
#(
  parameter int unsigned NA = oasis_pkg::NA_DEF,
  parameter int unsigned KW = $clog2(oasis_pkg::K_DEF),
  localparam int unsigned NC = 1 << NA
) (
  input  logic          clk,
  input  logic          rst_n,
  input  fp16_t         cb [NC],
  input  logic          in_valid,
  output logic          in_ready,
  input  fp16_t         in_x,
  input  logic [KW-1:0] in_ch,
  output logic          out_valid,
  input  logic          out_ready,
  output fp16_t         out_res,
  output logic [KW-1:0] out_ch
);
  fp16_t         bnd [NC];
  logic [NA-1:0] idx;
  fp16_t         res;

  always_comb begin
    for (int i = 0; i < int'(NC) - 1; i++) bnd[i] = fp16_half(fp16_add(cb[i], cb[i+1]));
    bnd[NC-1] = FP16_POS_INF;
  end

  always_comb begin
    int unsigned half;
    idx  = '0;
    half = 0;
    for (int l = int'(NA); l >= 1; l--) begin
      half = 1 << (l - 1);
      if (!fp16_lt(in_x, bnd[int'(idx) + half - 1])) idx = idx + NA'(half);
    end
    res = fp16_sub(in_x, cb[idx]);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_res   <= FP16_ZERO;
      out_ch    <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_res <= res;
        out_ch  <= in_ch;
      end
    end
  end
endmodule
