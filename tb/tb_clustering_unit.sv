// tb_clustering_unit -- random ascending 16-entry codebooks and random FP16
// activations streamed back to back; each index must select the nearest
// centroid (reference: argmin |x - c| in double precision; inputs that sit within
// FP16 rounding of a boundary are not scored). Also checks the Fig. 9(b) case and
// the rate of 2 cycles per activation.
module tb_clustering_unit;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid;
  logic [15:0] cb [16], in_x;
  logic [11:0] in_tag, out_tag;
  logic [3:0] out_idx;
  real xs [4096];
  int checks = 0, failures = 0, nout = 0, nsent = 0;
  clustering_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (rst_n && out_valid) begin
    real x, best, d, d2; int bi;
    x = xs[out_tag]; bi = 0; best = 1.0e9;
    for (int i = 0; i < 16; i++) begin d = rabs(x - h2r(cb[i])); if (d < best) begin best = d; bi = i; end end
    d2 = rabs(x - h2r(cb[out_idx]));
    nout++;
    if (rabs(d2 - best) > 0.004 * (rabs(x) + 0.01) || out_idx != 4'(bi)) begin
      if (rabs(d2 - best) > 0.004 * (rabs(x) + 0.01)) begin
        failures++; if (failures < 6) $display("tag %0d x=%f got %0d exp %0d", out_tag, x, out_idx, bi);
      end
    end
    checks++;
  end

  initial begin
    int t0, t1;
    in_x = 0; in_tag = 0;
    for (int i = 0; i < 16; i++) cb[i] = r2h(-3.0 + 0.4 * i + 0.05 * (i % 3));
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    t0 = $time;
    for (int n = 0; n < 200; n++) begin
      xs[n] = h2r(r2h((real'($urandom_range(0, 8000)) - 4000.0) / 1000.0));
      in_valid = 1; in_x = r2h(xs[n]); in_tag = 12'(n);
      while (!in_ready) begin @(posedge clk); #1; end
      @(posedge clk); #1;
      nsent++;
    end
    in_valid = 0;
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 > 2 * 200 + 2) begin failures++; $display("rate: %0d cycles for 200", (t1 - t0) / 10); end
    repeat (5) @(posedge clk);
    checks++; if (nout != 200) begin failures++; $display("outputs %0d", nout); end
    // 4-centroid style example of Fig. 9(b): x between b0 and b1 -> index 1
    for (int i = 0; i < 16; i++) cb[i] = r2h(real'(i));
    xs[300] = 1.25; in_valid = 1; in_x = r2h(1.25); in_tag = 12'd300;
    @(posedge clk); #1; in_valid = 0;
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
