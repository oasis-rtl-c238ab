// tb_error_calc_unit -- residuals x - nearest centroid for random activations
// (reference in double precision), the Fig. 7 example (5.07 with centroids
// 0.13/0.78 -> 4.29), and back-pressure: the output holds while out_ready is low.
module tb_error_calc_unit;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [15:0] cb [16], in_x, out_res;
  logic [11:0] in_ch, out_ch;
  int checks = 0, failures = 0;
  error_calc_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic one(real x, int ch, real cbr [16]);
    real best, d, expr;
    best = 1.0e9; expr = 0.0;
    for (int i = 0; i < 16; i++) begin d = rabs(x - cbr[i]); if (d < best) begin best = d; expr = x - cbr[i]; end end
    in_valid = 1; in_x = r2h(x); in_ch = 12'(ch);
    @(posedge clk); #1; in_valid = 0;
    checks++;
    if (!out_valid || out_ch != 12'(ch) || !close(h2r(out_res), expr, rabs(x) + 1.0, 0.004)) begin
      failures++; $display("x=%f got %f exp %f ch %0d", x, h2r(out_res), expr, out_ch);
    end
  endtask
  initial begin
    real cbr [16];
    in_x = 0; in_ch = 0;
    // Fig. 7: a 1-bit codebook {0.13, 0.78}; the upper entries repeat 0.78
    for (int i = 0; i < 16; i++) begin cbr[i] = (i == 0) ? 0.13 : 0.78; cb[i] = r2h(cbr[i]); cbr[i] = h2r(cb[i]); end
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    one(5.07, 2, cbr);
    one(-3.01, 4, cbr);
    for (int i = 0; i < 16; i++) begin cbr[i] = -2.0 + 0.27 * i; cb[i] = r2h(cbr[i]); cbr[i] = h2r(cb[i]); end
    for (int t = 0; t < 100; t++) one(h2r(r2h((real'($urandom_range(0, 20000)) - 10000.0) / 1000.0)), t, cbr);
    // back-pressure (let the last result drain first)
    @(posedge clk); #1;
    out_ready = 0;
    in_valid = 1; in_x = r2h(1.0); in_ch = 12'd7; @(posedge clk); #1;
    in_x = r2h(2.0); in_ch = 12'd8; @(posedge clk); #1;
    checks++; if (in_ready || out_ch != 12'd7) begin failures++; $display("backpressure"); end
    out_ready = 1; @(posedge clk); #1; in_valid = 0;
    checks++; if (out_ch != 12'd8) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
