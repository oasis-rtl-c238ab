// tb_ec_mac_array -- error compensation over NOUT=16 outputs with 4 MACs: the
// testbench plays the weight buffer + dequantizer (answers rd_ch/rd_base with
// FP16 weights), sends outliers back to back and checks the accumulated terms
// through the merge port, the 4-cycle-per-outlier rate and `clear`.
module tb_ec_mac_array;
  import tb_fp16_pkg::*;
  localparam int NOUT = 16, NMAC = 4, KW = 6;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_ready, busy;
  logic [KW-1:0] in_ch, rd_ch;
  logic [15:0] in_res, w_deq [NMAC], merge_la, merge_y;
  logic [3:0] rd_base, merge_idx;
  int checks = 0, failures = 0;
  real W [64][NOUT];
  real ref_acc [NOUT];
  ec_mac_array #(.NOUT(NOUT), .NMAC(NMAC), .KW(KW)) dut (.*);
  always #5 clk = ~clk;
  always_comb for (int j = 0; j < NMAC; j++) w_deq[j] = r2h(W[rd_ch][int'(rd_base) + j]);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic check_all(real la_v);
    for (int n = 0; n < NOUT; n++) begin
      merge_idx = 4'(n); merge_la = r2h(la_v); #1;
      checks++;
      if (!close(h2r(merge_y), ref_acc[n] + h2r(r2h(la_v)), 8.0, 0.01)) begin
        failures++; $display("n=%0d got %f exp %f", n, h2r(merge_y), ref_acc[n] + la_v);
      end
    end
  endtask
  initial begin
    int t0, nacc;
    for (int k = 0; k < 64; k++) for (int n = 0; n < NOUT; n++) W[k][n] = h2r(r2h((real'($urandom_range(0, 200)) - 100.0) / 100.0));
    for (int n = 0; n < NOUT; n++) ref_acc[n] = 0.0;
    in_ch = 0; in_res = 0; merge_idx = 0; merge_la = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    nacc = 0; t0 = 0;
    for (int o = 0; o < 5; o++) begin
      real r;
      r = h2r(r2h((real'($urandom_range(0, 1000)) - 500.0) / 100.0));
      in_valid = 1; in_ch = KW'($urandom_range(0, 63)); in_res = r2h(r);
      #1; while (!in_ready) begin @(posedge clk); #1; end
      if (o == 1) t0 = $time;
      if (o == 4) begin checks++; if (($time - t0) / 10 != 3 * NOUT / NMAC) begin failures++; $display("rate %0d", ($time - t0) / 10); end end
      for (int n = 0; n < NOUT; n++) ref_acc[n] += r * W[in_ch][n];
      @(posedge clk); #1; in_valid = 0;
    end
    while (busy) @(posedge clk);
    #1;
    check_all(0.0);
    check_all(1.5);
    clear = 1; @(posedge clk); #1; clear = 0;
    for (int n = 0; n < NOUT; n++) ref_acc[n] = 0.0;
    check_all(0.25);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
