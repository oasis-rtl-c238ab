// tb_dequant_unit -- random weight codebooks and indices; each output must be
// the codebook entry the index selects.
module tb_dequant_unit;
  logic [3:0]  idx [8];
  logic [15:0] cb [16], w [8];
  int checks = 0, failures = 0;
  dequant_unit dut (.idx, .cb, .w);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < 16; i++) cb[i] = 16'($urandom);
      for (int j = 0; j < 8; j++) idx[j] = 4'($urandom);
      #1;
      for (int j = 0; j < 8; j++) begin
        checks++;
        if (w[j] !== cb[idx[j]]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
