// pe_line -- one PE line: computes NOUT output channels of y = x * W for one
// token, with the main (look-ahead) branch and the outlier (error-compensation)
// branch running side by side.
//
// Main branch, one output channel n per slot of SLOT cycles, two-stage pipeline:
//   stage A  cycle 0       Concat Units load {idx_A[k], idx_W[k][n]} for all K
//            cycles 1..CH  the NIC Index Counters (IC_IN inputs each) count one
//                          chunk of NIC*IC_IN concatenated indices per cycle; the
//                          counts are added into a 2^(NA+NW)-bin histogram
//   stage B  (next slot)   the histogram of channel n is handed over; the MAC
//                          tree reduces MT_IN bins per beat against the
//                          Cartesian-product LUT; the result is the look-ahead
//                          output la[n]
// SLOT = max(CH, BEATS) + 1; at the default sizes CH = 4096/512 = 8 and
// BEATS = 256/32 = 8, so SLOT = 9 and the 256 channels of a line take 9 cycles
// each, the 2304 reduction cycles of the paper's pipeline figure (plus one slot
// to fill the pipeline).
// Outlier branch: each accepted outlier (channel ch, FP16 residual r) is applied
// by the 8 error-compensation MACs: acc[n] += r * C_W[idx_W[ch][n]] for all n,
// NMAC per cycle, the weight indices read from the Weight Index Buffer and
// dequantized by the Dequantization Unit.
// Merge: one channel per cycle, y[n] = la[n] + acc[n], streamed out on y_*.
//
// The step order and unit counts follow the paper. The slot schedule, the
// histogram accumulator between the Index Counters and the MAC tree, and keeping
// la[] and acc[] inside the line until the merge are this design's choices.
//
// Interface: w_* loads weight indices (WR_W per cycle); act_idx, lut_cp and w_cb
// are the broadcast activation index row, Cartesian-product LUT and weight
// codebook. op_clear zeroes the error accumulators; main_start starts the main
// branch and main_done pulses when la[] is complete; ol_* is the outlier stream;
// merge_start streams NOUT merged outputs (y_valid, y_n, y_data) and merge_done
// pulses with the last one.
module pe_line
  import fp16_pkg::*;
#(
  parameter int unsigned K     = oasis_pkg::K_DEF,
  parameter int unsigned NOUT  = oasis_pkg::N_OUT_DEF / oasis_pkg::N_LINES_DEF,
  parameter int unsigned NW    = oasis_pkg::NW_DEF,
  parameter int unsigned NA    = oasis_pkg::NA_DEF,
  parameter int unsigned NIC   = oasis_pkg::N_IC_DEF,
  parameter int unsigned IC_IN = oasis_pkg::IC_IN_DEF,
  parameter int unsigned MT_IN = oasis_pkg::MT_IN_DEF,
  parameter int unsigned NMAC  = oasis_pkg::N_MAC_DEF,
  parameter int unsigned WR_W  = 16,
  localparam int unsigned CW    = NW + NA,
  localparam int unsigned NBINS = 1 << CW,
  localparam int unsigned KW    = $clog2(K),
  localparam int unsigned NOW   = (NOUT > 1) ? $clog2(NOUT) : 1,
  localparam int unsigned WDW   = (K / WR_W > 1) ? $clog2(K / WR_W) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           w_we,
  input  logic [NOW-1:0] w_row,
  input  logic [WDW-1:0] w_word,
  input  logic [NW-1:0]  w_data [WR_W],
  input  logic [NA-1:0]  act_idx [K],
  input  fp16_t          lut_cp [NBINS],
  input  fp16_t          w_cb [1<<NW],
  input  logic           op_clear,
  input  logic           main_start,
  output logic           main_busy,
  output logic           main_done,
  input  logic           ol_valid,
  output logic           ol_ready,
  input  logic [KW-1:0]  ol_ch,
  input  fp16_t          ol_res,
  output logic           ec_busy,
  input  logic           merge_start,
  output logic           y_valid,
  output logic [NOW-1:0] y_n,
  output fp16_t          y_data,
  output logic           merge_done
);
  localparam int unsigned CHUNK = NIC * IC_IN;
  localparam int unsigned CH    = K / CHUNK;
  localparam int unsigned BEATS = NBINS / MT_IN;
  localparam int unsigned SLOT  = ((CH > BEATS) ? CH : BEATS) + 1;
  localparam int unsigned SW    = $clog2(SLOT);
  localparam int unsigned HW    = $clog2(K + 1);
  localparam int unsigned ICW   = $clog2(IC_IN + 1);

  // ---------------- storage ----------------
  logic [NW-1:0] row_idx [K];
  logic [KW-1:0] col_ch;
  logic [NOW-1:0] col_base;
  logic [NW-1:0] col_idx [NMAC];

  logic [NOW-1:0] a_ch, b_ch;
  logic           a_vld, b_vld;

  weight_index_buffer #(.K(K), .NOUT(NOUT), .NW(NW), .WR_W(WR_W), .NRD(NMAC)) u_wib (
    .clk, .wr_en(w_we), .wr_row(w_row), .wr_word(w_word), .wr_data(w_data),
    .row_sel(a_ch), .row_idx,
    .col_ch, .col_base, .col_idx
  );

  // ---------------- main branch control ----------------
  logic          m_run;
  logic [SW-1:0] slot;
  logic          cat_load;

  assign main_busy = m_run;
  assign cat_load  = m_run && a_vld && (slot == '0);

  logic [CW-1:0] cat_idx [K];
  concat_units #(.K(K), .NW(NW), .NA(NA)) u_cat (
    .clk, .rst_n, .load(cat_load), .act_idx, .wgt_idx(row_idx), .cat_idx
  );

  // ---------------- index counters ----------------
  logic [CW-1:0]  ic_in  [NIC][IC_IN];
  logic [ICW-1:0] ic_cnt [NIC][NBINS];
  int unsigned    chunk;
  assign chunk = (slot == '0) ? 0 : int'(slot) - 1;

  always_comb begin
    for (int i = 0; i < int'(NIC); i++)
      for (int j = 0; j < int'(IC_IN); j++)
        ic_in[i][j] = cat_idx[(chunk % CH) * CHUNK + i * IC_IN + j];
  end

  for (genvar i = 0; i < NIC; i++) begin : g_ic
    index_counter #(.IN(IC_IN), .CW(CW)) u_ic (.cat_idx(ic_in[i]), .count(ic_cnt[i]));
  end

  logic [HW-1:0] hist_a [NBINS];
  logic [HW-1:0] hist_a_nxt [NBINS];
  logic [HW-1:0] hist_b [NBINS];
  logic          counting;
  assign counting = m_run && a_vld && (slot != '0) && (int'(slot) <= int'(CH));

  always_comb begin
    for (int b = 0; b < int'(NBINS); b++) begin
      logic [HW-1:0] s;
      s = '0;
      for (int i = 0; i < int'(NIC); i++) s = s + HW'(ic_cnt[i][b]);
      if (m_run && slot == '0) hist_a_nxt[b] = '0;
      else if (counting)       hist_a_nxt[b] = hist_a[b] + s;
      else                     hist_a_nxt[b] = hist_a[b];
    end
  end

  // ---------------- MAC tree (reduction) ----------------
  logic [HW-1:0] mt_cnt [MT_IN];
  fp16_t         mt_val [MT_IN];
  fp16_t         mt_acc;
  logic          mt_en;
  assign mt_en = m_run && b_vld && (int'(slot) < int'(BEATS));

  always_comb begin
    for (int j = 0; j < int'(MT_IN); j++) begin
      mt_cnt[j] = hist_b[(int'(slot) % BEATS) * MT_IN + j];
      mt_val[j] = lut_cp[(int'(slot) % BEATS) * MT_IN + j];
    end
  end

  mac_tree #(.IN(MT_IN), .CNTW(HW)) u_mt (
    .clk, .rst_n, .en(mt_en), .first(slot == '0), .cnt(mt_cnt), .val(mt_val), .acc(mt_acc)
  );

  fp16_t la [NOUT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_run     <= 1'b0;
      slot      <= '0;
      a_ch      <= '0;
      b_ch      <= '0;
      a_vld     <= 1'b0;
      b_vld     <= 1'b0;
      main_done <= 1'b0;
      for (int b = 0; b < int'(NBINS); b++) begin
        hist_a[b] <= '0;
        hist_b[b] <= '0;
      end
      for (int n = 0; n < int'(NOUT); n++) la[n] <= FP16_ZERO;
    end else begin
      main_done <= 1'b0;
      if (main_start && !m_run) begin
        m_run <= 1'b1;
        slot  <= '0;
        a_ch  <= '0;
        a_vld <= 1'b1;
        b_vld <= 1'b0;
      end else if (m_run) begin
        hist_a <= hist_a_nxt;
        if (b_vld && int'(slot) == int'(BEATS)) la[b_ch] <= mt_acc;
        if (int'(slot) == int'(SLOT) - 1) begin
          slot   <= '0;
          hist_b <= hist_a_nxt;
          b_ch   <= a_ch;
          b_vld  <= a_vld;
          if (a_vld) begin
            if (int'(a_ch) == int'(NOUT) - 1) a_vld <= 1'b0;
            else a_ch <= a_ch + 1'b1;
          end else begin
            m_run     <= 1'b0;
            main_done <= 1'b1;
          end
        end else begin
          slot <= slot + 1'b1;
        end
      end
    end
  end

  // ---------------- outlier branch ----------------
  fp16_t          w_deq [NMAC];
  logic [NOW-1:0] merge_idx;
  fp16_t          merge_y;

  dequant_unit #(.NW(NW), .NMAC(NMAC)) u_dq (.idx(col_idx), .cb(w_cb), .w(w_deq));

  ec_mac_array #(.NOUT(NOUT), .NMAC(NMAC), .KW(KW)) u_ec (
    .clk, .rst_n, .clear(op_clear),
    .in_valid(ol_valid), .in_ready(ol_ready), .in_ch(ol_ch), .in_res(ol_res),
    .rd_ch(col_ch), .rd_base(col_base), .w_deq,
    .busy(ec_busy),
    .merge_idx, .merge_la(la[merge_idx]), .merge_y
  );

  // ---------------- merge ----------------
  logic mg_run;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mg_run     <= 1'b0;
      merge_idx  <= '0;
      y_valid    <= 1'b0;
      y_n        <= '0;
      y_data     <= FP16_ZERO;
      merge_done <= 1'b0;
    end else begin
      y_valid    <= 1'b0;
      merge_done <= 1'b0;
      if (merge_start && !mg_run) begin
        mg_run    <= 1'b1;
        merge_idx <= '0;
      end else if (mg_run) begin
        y_valid <= 1'b1;
        y_n     <= merge_idx;
        y_data  <= merge_y;
        if (int'(merge_idx) == int'(NOUT) - 1) begin
          mg_run     <= 1'b0;
          merge_done <= 1'b1;
        end else begin
          merge_idx <= merge_idx + 1'b1;
        end
      end
    end
  end
endmodule
