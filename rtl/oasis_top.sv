// oasis_top -- the OASIS accelerator: a LUT-based GEMM engine for LLM layers
// whose weights and activations are both quantized to learned codebooks
// (4-bit indices), with outliers of the activation handled by a parallel
// error-compensation branch.
//
// It computes y[n] = sum_k x[k] * W[k][n] for one FP16 token x of K elements:
//   main branch   x is clustered to 4-bit activation indices (4 Clustering
//                 Units -> Activation Index Buffer), the indices are broadcast to
//                 N_LINES PE lines, each line concatenates them with the weight
//                 indices of one output channel, counts every concatenated value
//                 and forms the weighted sum of Cartesian-product LUT entries:
//                 the look-ahead result, which treats outliers as if quantized;
//   outlier branch Orizuru finds the k largest and k smallest activations,
//                 the Error Calculation Unit turns each into a residual
//                 (x - its centroid), and every line adds residual * W[ch][n]
//                 to its outputs with 8 FP16 MACs;
//   merge         each line adds the two and writes y to the Output Buffer.
// Line l owns output channels l*NOUT .. l*NOUT+NOUT-1 (NOUT = N_OUT/N_LINES),
// which is this design's choice. The Orizuru engine is one K-leaf tree; at
// K = 4096 it is the 3-level arrangement of 16-input units (256 + 16 + 1 = 273)
// that the paper counts.
//
// Lint note: rst_n is used as the asynchronous reset of every register and
// also in the `disable iff` of the lockstep assertion below, which some lint
// tools report as a reset used both synchronously and asynchronously; the
// assertion is not hardware, so the warning stands.
//
// Ports (plain signals, the HBM and on-chip interconnect are outside): the host
// port of the Output Buffer (x is written at X_BASE = 0, y read back at
// Y_BASE = K); the LUT write port (Cartesian products, then C_W, then C_A); the
// weight index write port, which writes WR_W indices of one row into every
// line at once; start / k / busy / done; and the controller's cycle counters.
module oasis_top
  import fp16_pkg::*;
#(
  parameter int unsigned K       = oasis_pkg::K_DEF,
  parameter int unsigned N_OUT   = oasis_pkg::N_OUT_DEF,
  parameter int unsigned N_LINES = oasis_pkg::N_LINES_DEF,
  parameter int unsigned NW      = oasis_pkg::NW_DEF,
  parameter int unsigned NA      = oasis_pkg::NA_DEF,
  parameter int unsigned NIC     = oasis_pkg::N_IC_DEF,
  parameter int unsigned IC_IN   = oasis_pkg::IC_IN_DEF,
  parameter int unsigned MT_IN   = oasis_pkg::MT_IN_DEF,
  parameter int unsigned NMAC    = oasis_pkg::N_MAC_DEF,
  parameter int unsigned NCL     = oasis_pkg::N_CLUST_DEF,
  parameter int unsigned ORZ_LW  = oasis_pkg::ORZ_LOAD_DEF,
  parameter int unsigned OB_WORDS = oasis_pkg::OBUF_WORDS_DEF,
  parameter int unsigned AIB_ROWS = oasis_pkg::AIB_ROWS_DEF,
  parameter int unsigned WR_W    = 16,
  localparam int unsigned NOUT   = N_OUT / N_LINES,
  localparam int unsigned KW     = $clog2(K),
  localparam int unsigned KCW    = $clog2(K + 1),
  localparam int unsigned NOW    = (NOUT > 1) ? $clog2(NOUT) : 1,
  localparam int unsigned WDW    = (K / WR_W > 1) ? $clog2(K / WR_W) : 1,
  localparam int unsigned OBW    = $clog2(OB_WORDS),
  localparam int unsigned NCP    = 1 << (NW + NA),
  localparam int unsigned LAW    = $clog2(NCP + (1 << NW) + (1 << NA))
) (
  input  logic           clk,
  input  logic           rst_n,
  // Output Buffer host port
  input  logic           h_we,
  input  logic [OBW-1:0] h_waddr,
  input  fp16_t          h_wdata,
  input  logic [OBW-1:0] h_raddr,
  output fp16_t          h_rdata,
  // LUT load
  input  logic           lut_we,
  input  logic [LAW-1:0] lut_addr,
  input  fp16_t          lut_wdata,
  // weight index load (same row/word in every line, per-line data)
  input  logic           w_we,
  input  logic [NOW-1:0] w_row,
  input  logic [WDW-1:0] w_word,
  input  logic [NW-1:0]  w_data [N_LINES][WR_W],
  // operation
  input  logic           start,
  input  logic [KCW-1:0] topk,
  output logic           busy,
  output logic           done,
  output logic [31:0]    cyc_quant,
  output logic [31:0]    cyc_main,
  output logic [31:0]    cyc_outlier,
  output logic [31:0]    cyc_total
);
  localparam int unsigned X_BASE = 0;
  localparam int unsigned Y_BASE = K;

  // ---------------- LUT ----------------
  fp16_t cp [NCP];
  fp16_t w_cb [1<<NW];
  fp16_t a_cb [1<<NA];
  lut_mem #(.NW(NW), .NA(NA)) u_lut (
    .clk, .rst_n, .wr_en(lut_we), .wr_addr(lut_addr), .wr_data(lut_wdata),
    .cp, .w_cb, .a_cb
  );

  // ---------------- controller ----------------
  logic          op_clear, quant_done, main_start, main_done, merge_start, merge_done;
  logic          cl_in_ready [NCL], cl_in_valid [NCL], cl_out_valid [NCL];
  logic [KW-1:0] cl_ch [NCL], cl_out_tag [NCL];
  logic [NA-1:0] cl_out_idx [NCL];
  logic          orz_ld_en, orz_start, orz_done, ol_pending;
  logic [KW-1:0] orz_ld_base;

  mem_ctrl #(.K(K), .NCL(NCL), .LW(ORZ_LW)) u_mc (
    .clk, .rst_n, .start, .busy, .done, .op_clear,
    .cl_in_ready, .cl_in_valid, .cl_ch, .cl_out_valid, .quant_done,
    .orz_ld_en, .orz_ld_base, .orz_start, .orz_done, .ol_pending,
    .main_start, .main_done, .merge_start, .merge_done,
    .cyc_quant, .cyc_main, .cyc_outlier, .cyc_total
  );

  // ---------------- Output Buffer ----------------
  logic [OBW-1:0] c_addr [NCL];
  fp16_t          c_data [NCL];
  fp16_t          b_data [ORZ_LW];
  logic           m_we   [N_LINES];
  logic [OBW-1:0] m_addr [N_LINES];
  fp16_t          m_data [N_LINES];

  always_comb begin
    for (int u = 0; u < int'(NCL); u++) c_addr[u] = OBW'(X_BASE + int'(cl_ch[u]));
  end

  output_buffer #(.WORDS(OB_WORDS), .NCR(NCL), .NBR(ORZ_LW), .NMW(N_LINES)) u_ob (
    .clk, .h_we, .h_waddr, .h_wdata, .h_raddr, .h_rdata,
    .c_addr, .c_data, .b_addr(OBW'(X_BASE + int'(orz_ld_base))), .b_data,
    .m_we, .m_addr, .m_data
  );

  // ---------------- Clustering Units + Activation Index Buffer ----------------
  for (genvar u = 0; u < NCL; u++) begin : g_cl
    clustering_unit #(.NA(NA), .TW(KW)) u_cl (
      .clk, .rst_n, .cb(a_cb),
      .in_valid(cl_in_valid[u]), .in_ready(cl_in_ready[u]), .in_x(c_data[u]), .in_tag(cl_ch[u]),
      .out_valid(cl_out_valid[u]), .out_idx(cl_out_idx[u]), .out_tag(cl_out_tag[u])
    );
  end

  logic [NA-1:0] act_idx [K];
  act_idx_buffer #(.K(K), .NA(NA), .ROWS(AIB_ROWS), .NWR(NCL)) u_aib (
    .clk, .wr_row('0), .wr_en(cl_out_valid), .wr_addr(cl_out_tag), .wr_data(cl_out_idx),
    .rd_row('0), .rd_idx(act_idx)
  );

  // ---------------- outlier branch: Orizuru + Error Calculation ----------------
  logic          oz_valid, oz_ready, oz_is_max;
  fp16_t         oz_val;
  logic [KW-1:0] oz_idx;

  orizuru #(.N(K), .LW(ORZ_LW)) u_orz (
    .clk, .rst_n, .ld_en(orz_ld_en), .ld_base(orz_ld_base), .ld_data(b_data),
    .start(orz_start), .k(topk), .busy(),
    .out_valid(oz_valid), .out_ready(oz_ready), .out_val(oz_val), .out_idx(oz_idx),
    .out_is_max(oz_is_max), .done(orz_done)
  );

  logic          ec_valid, ec_ready;
  fp16_t         ec_res;
  logic [KW-1:0] ec_ch;
  error_calc_unit #(.NA(NA), .KW(KW)) u_ecu (
    .clk, .rst_n, .cb(a_cb),
    .in_valid(oz_valid), .in_ready(oz_ready), .in_x(oz_val), .in_ch(oz_idx),
    .out_valid(ec_valid), .out_ready(ec_ready), .out_res(ec_res), .out_ch(ec_ch)
  );

  // ---------------- PE lines ----------------
  logic [N_LINES-1:0] l_ready, l_ecbusy, l_mdone, l_mgdone;
  logic               l_yv [N_LINES];
  logic [NOW-1:0]     l_yn [N_LINES];
  fp16_t              l_yd [N_LINES];

  assign ec_ready   = &l_ready;
  assign ol_pending = ec_valid || (|l_ecbusy) || oz_valid;
  assign main_done  = l_mdone[0];
  assign merge_done = l_mgdone[0];

  for (genvar l = 0; l < N_LINES; l++) begin : g_line
    pe_line #(.K(K), .NOUT(NOUT), .NW(NW), .NA(NA), .NIC(NIC), .IC_IN(IC_IN),
              .MT_IN(MT_IN), .NMAC(NMAC), .WR_W(WR_W)) u_line (
      .clk, .rst_n,
      .w_we, .w_row, .w_word, .w_data(w_data[l]),
      .act_idx, .lut_cp(cp), .w_cb,
      .op_clear, .main_start, .main_busy(), .main_done(l_mdone[l]),
      .ol_valid(ec_valid && ec_ready), .ol_ready(l_ready[l]), .ol_ch(ec_ch), .ol_res(ec_res),
      .ec_busy(l_ecbusy[l]),
      .merge_start, .y_valid(l_yv[l]), .y_n(l_yn[l]), .y_data(l_yd[l]), .merge_done(l_mgdone[l])
    );
    assign m_we[l]   = l_yv[l];
    assign m_addr[l] = OBW'(Y_BASE + l * NOUT + int'(l_yn[l]));
    assign m_data[l] = l_yd[l];
  end

  // all lines run in lockstep
  a_lines_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (l_mdone == '0 || l_mdone == '1) && (l_ready == '0 || l_ready == '1));
endmodule
