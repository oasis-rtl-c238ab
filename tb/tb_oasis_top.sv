// tb_oasis_top -- end-to-end test of the whole accelerator at a reduced size
// (K=64 input channels, 32 output channels over 4 PE lines, 2 Index Counters
// per line, 4 error-compensation MACs per line).
//
// The testbench loads the Cartesian-product LUT and the codebooks, the weight
// indices of every line and one activation vector, runs the GEMM for several
// outlier counts k and reads y back from the Output Buffer. The reference is
// computed independently in double precision: every activation is mapped to
// its codebook index with mid-point boundaries, its LUT term
// C_A[a]*C_W[w] (rounded to FP16 as stored) is summed, and each of the k
// largest and k smallest activations adds (x - C_A[a]) * C_W[w]. Every output
// must be within 1% of the sum of the magnitudes of its terms.
//
// Mechanisms counted (each must occur at least once): pops of maxima and of
// minima from Orizuru, Orizuru stalls while the error-compensation MACs are busy,
// a run in which the outlier branch ends after the main branch and one in which
// it ends before, a run with no outliers, and merged outputs written back.
// The quantization time must be 2 cycles per activation per Clustering Unit.
module tb_oasis_top;
  import tb_fp16_pkg::*;
  localparam int K = 64, N_OUT = 32, N_LINES = 4, NIC = 2, IC_IN = 16, NMAC = 4, OB_WORDS = 128;
  localparam int NCL = 4, WR_W = 16, NOUT = N_OUT / N_LINES, XS = 8;
  localparam int CH = K / (NIC * IC_IN), SLOT = ((CH > 256 / 32) ? CH : 256 / 32) + 1;
  localparam int KCW = $clog2(K + 1), OBW = $clog2(OB_WORDS), NOW = (NOUT > 1) ? $clog2(NOUT) : 1;
  localparam int WDW = (K / WR_W > 1) ? $clog2(K / WR_W) : 1;

  logic clk = 0, rst_n = 0;
  logic h_we = 0, lut_we = 0, w_we = 0, start = 0, busy, done;
  logic [OBW-1:0] h_waddr = 0, h_raddr = 0;
  logic [15:0] h_wdata = 0, h_rdata, lut_wdata = 0;
  logic [8:0] lut_addr = 0;
  logic [NOW-1:0] w_row = 0;
  logic [WDW-1:0] w_word = 0;
  logic [3:0] w_data [N_LINES][WR_W];
  logic [KCW-1:0] topk = 0;
  logic [31:0] cyc_quant, cyc_main, cyc_outlier, cyc_total;

  int checks = 0, failures = 0;
  int n_maxpop = 0, n_minpop = 0, n_stall = 0, n_ol_last = 0, n_main_last = 0, n_nok = 0, n_merged = 0;
  real ca [16], cw [16], cp [16][16], x [K];
  int aidx [K];

  oasis_top #(.K(K), .N_OUT(N_OUT), .N_LINES(N_LINES), .NIC(NIC), .IC_IN(IC_IN), .NMAC(NMAC),
              .OB_WORDS(OB_WORDS)) dut (.*);
  always #5 clk = ~clk;
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (rst_n) begin
    if (dut.oz_valid && dut.oz_ready && dut.oz_is_max) n_maxpop++;
    if (dut.oz_valid && dut.oz_ready && !dut.oz_is_max) n_minpop++;
    if (dut.oz_valid && !dut.oz_ready) n_stall++;
  end

  function automatic int wgt(int k, int n);
    return (k * 7 + n * 13 + ((k * n) >> 3) + (k >> 2)) & 15;
  endfunction

  // index by mid-point boundaries: count the boundaries at or below x
  function automatic int quant(real v);
    int a = 0;
    for (int i = 0; i < 15; i++) if (v >= h2r(r2h((ca[i] + ca[i+1]) / 2.0))) a = i + 1;
    return a;
  endfunction

  task automatic run_gemm(int k);
    int ord [K];
    bit is_ol [K];
    real yref, scale;
    int tmp;
    // outliers: the k largest and k smallest activations (values are distinct)
    for (int i = 0; i < K; i++) begin ord[i] = i; is_ol[i] = 0; end
    for (int i = 0; i < K; i++) for (int j = i + 1; j < K; j++)
      if (x[ord[j]] > x[ord[i]]) begin tmp = ord[i]; ord[i] = ord[j]; ord[j] = tmp; end
    for (int i = 0; i < k; i++) begin is_ol[ord[i]] = 1; is_ol[ord[K-1-i]] = 1; end
    topk = KCW'(k);
    start = 1; @(posedge clk); #1; start = 0;
    while (!done) begin @(posedge clk); #1; end
    if (k == 0) n_nok++;
    if (cyc_outlier > cyc_quant + cyc_main) n_ol_last++; else n_main_last++;
    checks++;
    if (cyc_quant != 32'(2 * K / NCL + 1)) begin failures++; $display("cyc_quant %0d", cyc_quant); end
    // main branch: NOUT channels plus one pipeline-fill slot of SLOT cycles, plus the start and done cycles
    checks++;
    if (cyc_main != 32'((NOUT + 1) * SLOT + 2)) begin failures++; $display("cyc_main %0d", cyc_main); end
    for (int n = 0; n < N_OUT; n++) begin
      yref = 0.0; scale = 0.0;
      for (int kk = 0; kk < K; kk++) begin
        real t;
        t = cp[aidx[kk]][wgt(kk, n)];
        if (is_ol[kk]) t += h2r(r2h(x[kk] - ca[aidx[kk]])) * cw[wgt(kk, n)];
        yref += t; scale += rabs(t);
      end
      h_raddr = OBW'(K + n); #1;
      checks++; n_merged++;
      if (!close(h2r(h_rdata), yref, scale, 0.01)) begin
        failures++; if (failures < 10) $display("k=%0d y[%0d] got %f exp %f", k, n, h2r(h_rdata), yref);
      end
    end
    $display("k=%0d quant=%0d main=%0d outlier=%0d total=%0d", k, cyc_quant, cyc_main, cyc_outlier, cyc_total);
  endtask

  initial begin
    for (int l = 0; l < N_LINES; l++) for (int i = 0; i < WR_W; i++) w_data[l][i] = 0;
    // codebooks: activations cover the central 60% of the range, weights +-0.8
    for (int i = 0; i < 16; i++) begin
      ca[i] = h2r(r2h((i - 7.5) * (0.6 * K / 2 / XS) / 7.5));
      cw[i] = h2r(r2h(-0.8 + 0.1 * i + 0.004 * (i % 5)));
    end
    for (int a = 0; a < 16; a++) for (int w = 0; w < 16; w++) cp[a][w] = h2r(r2h(ca[a] * cw[w]));
    // activations: a permutation of (-K/2 .. K/2-1) / XS, all distinct and exact in FP16
    for (int k = 0; k < K; k++) begin x[k] = real'(((k * 37) % K) - K / 2) / XS; aidx[k] = quant(x[k]); end
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    lut_we = 1;
    for (int a = 0; a < 16; a++) for (int w = 0; w < 16; w++) begin
      lut_addr = 9'(a * 16 + w); lut_wdata = r2h(cp[a][w]); @(posedge clk); #1;
    end
    for (int i = 0; i < 16; i++) begin lut_addr = 9'(256 + i); lut_wdata = r2h(cw[i]); @(posedge clk); #1; end
    for (int i = 0; i < 16; i++) begin lut_addr = 9'(272 + i); lut_wdata = r2h(ca[i]); @(posedge clk); #1; end
    lut_we = 0;
    w_we = 1;
    for (int r = 0; r < NOUT; r++) for (int wd = 0; wd < K / WR_W; wd++) begin
      w_row = NOW'(r); w_word = WDW'(wd);
      for (int l = 0; l < N_LINES; l++) for (int i = 0; i < WR_W; i++) w_data[l][i] = 4'(wgt(wd * WR_W + i, l * NOUT + r));
      @(posedge clk); #1;
    end
    w_we = 0;
    h_we = 1;
    for (int k = 0; k < K; k++) begin h_waddr = OBW'(k); h_wdata = r2h(x[k]); @(posedge clk); #1; end
    h_we = 0;
    run_gemm(2);
    run_gemm(0);
    run_gemm(30);
    run_gemm(7);
    checks++; if (n_maxpop != 39 || n_minpop != 39) begin failures++; $display("pops max %0d min %0d", n_maxpop, n_minpop); end
    checks++; if (n_stall == 0) begin failures++; $display("no Orizuru stall"); end
    checks++; if (n_ol_last == 0) begin failures++; $display("outlier branch never ended last"); end
    checks++; if (n_main_last == 0) begin failures++; $display("main branch never ended last"); end
    checks++; if (n_nok == 0) begin failures++; $display("no run without outliers"); end
    checks++; if (n_merged == 0) begin failures++; $display("nothing merged"); end
    $display("mechanisms: max pops %0d, min pops %0d, stalls %0d, outlier-last %0d, main-last %0d, k=0 runs %0d, merged %0d",
             n_maxpop, n_minpop, n_stall, n_ol_last, n_main_last, n_nok, n_merged);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
