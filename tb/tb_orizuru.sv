// tb_orizuru -- the 8-leaf example of the paper's Orizuru figure (values
// 1,8,2,4,1,5,9,6: first max 9 at leaf 6 = node 14, then 8), then random
// 16-leaf tokens with and without repeated values. Expected order: descending
// values for the max pops and ascending for the min pops, ties broken towards
// the lower channel; and exactly k of each. Also checks the cycle count:
// log2(N) initialization cycles, then one pop per cycle.
module tb_orizuru;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---- 8-leaf instance ----
  logic ld8, st8, bz8, ov8, or8, om8, dn8;
  logic [2:0] lb8, oi8;
  logic [15:0] ld8d [8], ovl8;
  logic [3:0] k8;
  orizuru #(.N(8), .LW(8)) d8 (.clk, .rst_n, .ld_en(ld8), .ld_base(lb8), .ld_data(ld8d), .start(st8), .k(k8),
    .busy(bz8), .out_valid(ov8), .out_ready(or8), .out_val(ovl8), .out_idx(oi8), .out_is_max(om8), .done(dn8));

  // ---- 16-leaf instance ----
  logic ld, st, bz, ov, ordy, om, dn;
  logic [3:0] lb, oi;
  logic [15:0] ldd [4], ovl;
  logic [4:0] kk;
  orizuru #(.N(16), .LW(4)) d16 (.clk, .rst_n, .ld_en(ld), .ld_base(lb), .ld_data(ldd), .start(st), .k(kk),
    .busy(bz), .out_valid(ov), .out_ready(ordy), .out_val(ovl), .out_idx(oi), .out_is_max(om), .done(dn));

  task automatic run16(real xs [16], int k, bit stall);
    int order_max [16], order_min [16], used [16];
    int t_start, npop;
    // reference: repeated selection, ties -> lower index
    for (int i = 0; i < 16; i++) used[i] = 0;
    for (int r = 0; r < 16; r++) begin
      int b; b = -1;
      for (int i = 0; i < 16; i++) if (!used[i] && (b < 0 || xs[i] > xs[b])) b = i;
      order_max[r] = b; used[b] = 1;
    end
    for (int i = 0; i < 16; i++) used[i] = 0;
    for (int r = 0; r < 16; r++) begin
      int b; b = -1;
      for (int i = 0; i < 16; i++) if (!used[i] && (b < 0 || xs[i] < xs[b])) b = i;
      order_min[r] = b; used[b] = 1;
    end
    for (int g = 0; g < 4; g++) begin
      ld = 1; lb = 4'(g * 4);
      for (int j = 0; j < 4; j++) ldd[j] = r2h(xs[g*4+j]);
      @(posedge clk); #1;
    end
    ld = 0; st = 1; kk = 5'(k); @(posedge clk); #1; st = 0;
    t_start = $time;
    npop = 0;
    while (!dn) begin
      ordy = stall ? 1'($urandom_range(0, 1)) : 1'b1;
      #1;
      if (ov && ordy) begin
        int ex; bit ismax;
        if (npop == 0 && !stall) begin
          checks++; if (($time - t_start) / 10 != 4) begin failures++; $display("init took %0d", ($time - t_start) / 10); end
        end
        ismax = (npop < k);
        ex = ismax ? order_max[npop] : order_min[npop - k];
        checks++;
        if (om != ismax || int'(oi) != ex || ovl != r2h(xs[ex])) begin
          failures++; if (failures < 8) $display("pop %0d: got idx %0d max %0d exp idx %0d", npop, oi, om, ex);
        end
        npop++;
      end
      @(posedge clk); #1;
    end
    checks++; if (npop != 2 * k) begin failures++; $display("popped %0d of %0d", npop, 2 * k); end
    if (!stall) begin checks++; if (($time - t_start) / 10 != 4 + 2 * k) begin failures++; $display("total %0d", ($time - t_start)/10); end end
  endtask

  initial begin
    real fig [8] = '{1.0, 8.0, 2.0, 4.0, 1.0, 5.0, 9.0, 6.0};
    real xs [16];
    ld8 = 0; st8 = 0; or8 = 1; lb8 = 0; k8 = 2; ld = 0; st = 0; ordy = 1; lb = 0; kk = 0;
    for (int j = 0; j < 8; j++) ld8d[j] = r2h(fig[j]);
    for (int j = 0; j < 4; j++) ldd[j] = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    ld8 = 1; @(posedge clk); #1; ld8 = 0;
    st8 = 1; @(posedge clk); #1; st8 = 0;
    repeat (3) @(posedge clk); #1;
    // after initialization: root bit 1 -> node 3 -> node 7 -> leaf node 14 (index 6), value 9
    checks++; if (!(ov8 && om8 && oi8 == 3'd6 && ovl8 == r2h(9.0))) begin failures++; $display("fig10b: idx %0d val %f", oi8, h2r(ovl8)); end
    @(posedge clk); #1;
    checks++; if (!(ov8 && om8 && oi8 == 3'd1 && ovl8 == r2h(8.0))) begin failures++; $display("fig10c: idx %0d val %f", oi8, h2r(ovl8)); end
    @(posedge clk); #1;  // min pops: 1 (leaf 0, left tie), then 1 (leaf 4)
    checks++; if (!(ov8 && !om8 && oi8 == 3'd0)) begin failures++; $display("min1 idx %0d", oi8); end
    @(posedge clk); #1;
    checks++; if (!(ov8 && !om8 && oi8 == 3'd4)) begin failures++; $display("min2 idx %0d", oi8); end
    @(posedge clk); #1;
    for (int t = 0; t < 30; t++) begin
      for (int i = 0; i < 16; i++)
        xs[i] = (t % 3 == 0) ? real'($urandom_range(0, 3)) : h2r(r2h((real'($urandom_range(0, 20000)) - 10000.0) / 100.0));
      run16(xs, (t % 8) + 1, t % 4 == 3);
    end
    for (int i = 0; i < 16; i++) xs[i] = real'(i % 5);
    run16(xs, 16, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
