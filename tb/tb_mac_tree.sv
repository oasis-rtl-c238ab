// tb_mac_tree -- weighted sums of 32 counts x FP16 LUT values over 8 beats (one
// 256-entry reduction), compared with a double-precision reference, plus the
// Fig. 6 example (counts 0,3,2,1 on LUT 0.02,0.08,0.11,0.48 -> 0.94).
module tb_mac_tree;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic [12:0] cnt [32];
  logic [15:0] val [32], acc;
  int checks = 0, failures = 0;
  mac_tree dut (.clk, .rst_n, .en, .first, .cnt, .val, .acc);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    real ref_sum, scale;
    repeat (2) @(posedge clk); rst_n = 1;
    // Fig. 6 example
    for (int j = 0; j < 32; j++) begin cnt[j] = 0; val[j] = 0; end
    cnt[1] = 3; cnt[2] = 2; cnt[3] = 1;
    val[0] = r2h(0.02); val[1] = r2h(0.08); val[2] = r2h(0.11); val[3] = r2h(0.48);
    en = 1; first = 1; @(posedge clk); #1; en = 0;
    checks++;
    if (!close(h2r(acc), 0.94, 1.0, 0.005)) begin failures++; $display("fig6 got %f", h2r(acc)); end
    for (int t = 0; t < 20; t++) begin
      ref_sum = 0.0; scale = 0.0;
      for (int b = 0; b < 8; b++) begin
        for (int j = 0; j < 32; j++) begin
          cnt[j] = 13'($urandom_range(0, 40));
          val[j] = r2h((real'($urandom_range(0, 2000)) - 1000.0) / 1000.0);
          ref_sum += real'(cnt[j]) * h2r(val[j]);
          scale   += real'(cnt[j]) * rabs(h2r(val[j]));
        end
        en = 1; first = (b == 0);
        @(posedge clk); #1;
      end
      en = 0;
      checks++;
      if (!close(h2r(acc), ref_sum, scale, 0.01)) begin failures++; $display("t=%0d got %f exp %f", t, h2r(acc), ref_sum); end
      // holds when en is low
      @(posedge clk); #1;
      checks++;
      if (!close(h2r(acc), ref_sum, scale, 0.01)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
