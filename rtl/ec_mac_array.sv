// ec_mac_array -- the 8 FP16 MAC units of a PE line that perform error
// compensation for activation outliers, and merge the result with the
// look-ahead (main branch) outputs.
//
// For each accepted outlier (channel ch, residual r) the unit walks the NOUT
// output channels of the line, NMAC at a time: acc[n] += r * W[ch][n], where
// W[ch][n] is the dequantized weight supplied on `w_deq` for the column address
// it drives on `rd_ch`/`rd_base`. One outlier therefore takes NOUT/NMAC cycles
// (32 at the default 256 outputs per line), and the first beat happens in the
// cycle the outlier is accepted. The merge port adds an external look-ahead
// value to acc[merge_idx] (combinational). `clear` zeroes all accumulators.
// The paper gives the MAC count, the one-outlier-per-cycle stream and the merge;
// keeping the accumulators inside the line is this design's choice.
module ec_mac_array
  import fp16_pkg::*;
#(
  parameter int unsigned NOUT = oasis_pkg::N_OUT_DEF / oasis_pkg::N_LINES_DEF,
  parameter int unsigned NMAC = oasis_pkg::N_MAC_DEF,
  parameter int unsigned KW   = $clog2(oasis_pkg::K_DEF),
  localparam int unsigned NB  = NOUT / NMAC,
  localparam int unsigned NOW = (NOUT > 1) ? $clog2(NOUT) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [KW-1:0]  in_ch,
  input  fp16_t          in_res,
  output logic [KW-1:0]  rd_ch,
  output logic [NOW-1:0] rd_base,
  input  fp16_t          w_deq [NMAC],
  output logic           busy,
  input  logic [NOW-1:0] merge_idx,
  input  fp16_t          merge_la,
  output fp16_t          merge_y
);
  localparam int unsigned BW = (NB > 1) ? $clog2(NB) : 1;

  logic [BW-1:0] beat;
  logic [KW-1:0] ch_q;
  fp16_t         res_q;
  fp16_t         acc [NOUT];
  logic          fire;
  fp16_t         cur_res;
  logic [NOW-1:0] base;

  assign in_ready = !busy;
  assign fire     = busy || in_valid;
  assign cur_res  = busy ? res_q : in_res;
  assign rd_ch    = busy ? ch_q : in_ch;
  assign base     = busy ? NOW'(beat) * NOW'(NMAC) : '0;
  assign rd_base  = base;
  assign merge_y  = fp16_add(merge_la, acc[merge_idx]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      beat  <= '0;
      ch_q  <= '0;
      res_q <= FP16_ZERO;
      for (int n = 0; n < int'(NOUT); n++) acc[n] <= FP16_ZERO;
    end else if (clear) begin
      busy <= 1'b0;
      beat <= '0;
      for (int n = 0; n < int'(NOUT); n++) acc[n] <= FP16_ZERO;
    end else if (fire) begin
      for (int j = 0; j < int'(NMAC); j++)
        acc[int'(base)+j] <= fp16_add(acc[int'(base)+j], fp16_mul(cur_res, w_deq[j]));
      if (!busy) begin
        ch_q  <= in_ch;
        res_q <= in_res;
        busy  <= (NB > 1);
        beat  <= BW'(1);
      end else if (int'(beat) == int'(NB) - 1) begin
        busy <= 1'b0;
        beat <= '0;
      end else begin
        beat <= beat + BW'(1);
      end
    end
  end
endmodule
