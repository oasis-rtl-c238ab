// tb_concat_units -- checks that every Concat Unit registers {act, wgt} when
// loaded and holds its value otherwise.
module tb_concat_units;
  localparam int K = 64;
  logic clk = 0, rst_n = 0, load = 0;
  logic [3:0] a [K], w [K];
  logic [7:0] c [K];
  int checks = 0, failures = 0;
  concat_units #(.K(K)) dut (.clk, .rst_n, .load, .act_idx(a), .wgt_idx(w), .cat_idx(c));
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [7:0] exp_c [K];
    for (int k = 0; k < K; k++) begin a[k] = 0; w[k] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      for (int k = 0; k < K; k++) begin a[k] = 4'($urandom); w[k] = 4'($urandom); end
      load = (t % 3 != 2);
      if (load) for (int k = 0; k < K; k++) exp_c[k] = a[k] * 16 + w[k];
      @(posedge clk); #1;
      for (int k = 0; k < K; k++) begin
        checks++;
        if (c[k] !== exp_c[k]) begin failures++; if (failures < 5) $display("mismatch k=%0d got %h exp %h", k, c[k], exp_c[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
