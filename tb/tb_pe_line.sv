// tb_pe_line -- one PE line at K=64, NOUT=8 (2 Index Counters of 16 inputs,
// 32-input MAC tree, 4 error-compensation MACs). Random weight indices and
// activation indices, a Cartesian-product LUT built from two random codebooks.
// Checks: the look-ahead output of every channel against sum_k C_A[a_k]*C_W[w_kn]
// in double precision, the main-branch cycle count (NOUT+1 slots of 9 cycles),
// the error-compensated merged outputs after three outliers, and the merge rate.
module tb_pe_line;
  import tb_fp16_pkg::*;
  localparam int K = 64, NOUT = 8, NIC = 2, ICIN = 16, NMAC = 4, WR_W = 16;
  logic clk = 0, rst_n = 0;
  logic w_we = 0;
  logic [2:0] w_row;
  logic [1:0] w_word;
  logic [3:0] w_data [WR_W], act_idx [K];
  logic [15:0] lut_cp [256], w_cb [16];
  logic op_clear = 0, main_start = 0, main_busy, main_done;
  logic ol_valid = 0, ol_ready, ec_busy, merge_start = 0, y_valid, merge_done;
  logic [5:0] ol_ch;
  logic [15:0] ol_res, y_data;
  logic [2:0] y_n;
  int checks = 0, failures = 0;
  real ca [16], cw [16], la_ref [NOUT], y_ref [NOUT], scale [NOUT];
  logic [3:0] W [K][NOUT];

  pe_line #(.K(K), .NOUT(NOUT), .NIC(NIC), .IC_IN(ICIN), .NMAC(NMAC), .WR_W(WR_W)) dut (.*);
  always #5 clk = ~clk;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int t0, nmerge;
    w_row = 0; w_word = 0; ol_ch = 0; ol_res = 0;
    for (int i = 0; i < WR_W; i++) w_data[i] = 0;
    for (int i = 0; i < 16; i++) begin
      ca[i] = h2r(r2h(-1.5 + 0.2 * i)); cw[i] = h2r(r2h(-0.8 + 0.1 * i + 0.01 * (i % 4)));
      w_cb[i] = r2h(cw[i]);
    end
    for (int a = 0; a < 16; a++) for (int w = 0; w < 16; w++) lut_cp[a*16+w] = r2h(ca[a] * cw[w]);
    for (int k = 0; k < K; k++) begin
      act_idx[k] = (k < 40) ? 4'($urandom) : 4'd3;  // many repeats of one index too
      for (int n = 0; n < NOUT; n++) W[k][n] = 4'($urandom);
    end
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int n = 0; n < NOUT; n++)
      for (int wd = 0; wd < K / WR_W; wd++) begin
        w_we = 1; w_row = 3'(n); w_word = 2'(wd);
        for (int i = 0; i < WR_W; i++) w_data[i] = W[wd*WR_W+i][n];
        @(posedge clk); #1;
      end
    w_we = 0;
    for (int n = 0; n < NOUT; n++) begin
      la_ref[n] = 0.0; scale[n] = 0.0;
      for (int k = 0; k < K; k++) begin
        la_ref[n] += h2r(lut_cp[act_idx[k]*16 + W[k][n]]);
        scale[n]  += rabs(h2r(lut_cp[act_idx[k]*16 + W[k][n]]));
      end
      y_ref[n] = la_ref[n];
    end
    op_clear = 1; @(posedge clk); #1; op_clear = 0;
    main_start = 1; t0 = $time; @(posedge clk); #1; main_start = 0;
    // outliers are applied while the main branch runs
    for (int o = 0; o < 3; o++) begin
      real r;
      r = h2r(r2h(1.5 * (o + 1) * ((o % 2) ? -1.0 : 1.0)));
      ol_valid = 1; ol_ch = 6'(o * 17 + 5); ol_res = r2h(r);
      #1; while (!ol_ready) begin @(posedge clk); #1; end
      for (int n = 0; n < NOUT; n++) begin y_ref[n] += r * cw[W[ol_ch][n]]; scale[n] += rabs(r); end
      @(posedge clk); #1; ol_valid = 0;
    end
    while (!main_done) begin @(posedge clk); #1; end
    checks++;
    if (($time - t0) / 10 != (NOUT + 1) * 9 + 1) begin failures++; $display("main cycles %0d", ($time - t0) / 10); end
    for (int n = 0; n < NOUT; n++) begin
      checks++;
      if (!close(h2r(dut.la[n]), la_ref[n], scale[n], 0.01)) begin failures++; $display("la[%0d] got %f exp %f", n, h2r(dut.la[n]), la_ref[n]); end
    end
    while (ec_busy) @(posedge clk);
    #1;
    merge_start = 1; @(posedge clk); #1; merge_start = 0;
    nmerge = 0; t0 = $time;
    while (!merge_done) begin
      if (y_valid) begin
        nmerge++; checks++;
        if (!close(h2r(y_data), y_ref[y_n], scale[y_n], 0.01)) begin failures++; $display("y[%0d] got %f exp %f", y_n, h2r(y_data), y_ref[y_n]); end
      end
      @(posedge clk); #1;
    end
    if (y_valid) begin nmerge++; checks++; if (!close(h2r(y_data), y_ref[y_n], scale[y_n], 0.01)) failures++; end
    checks++; if (nmerge != NOUT) begin failures++; $display("merged %0d", nmerge); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
