// tb_index_counter -- random 16-input vectors; each of the 256 bin counts is
// compared with a count done by a direct scan of the inputs.
module tb_index_counter;
  logic [7:0] ci [16];
  logic [4:0] cnt [256];
  int checks = 0, failures = 0;
  index_counter dut (.cat_idx(ci), .count(cnt));
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 60; t++) begin
      int e;
      for (int i = 0; i < 16; i++) ci[i] = (t < 20) ? 8'($urandom_range(0, 7)) : 8'($urandom);
      if (t == 0) for (int i = 0; i < 16; i++) ci[i] = 8'd5;   // all identical
      #1;
      for (int b = 0; b < 256; b++) begin
        e = 0;
        for (int i = 0; i < 16; i++) if (ci[i] == 8'(b)) e++;
        checks++;
        if (int'(cnt[b]) != e) begin failures++; if (failures < 5) $display("bin %0d got %0d exp %0d", b, cnt[b], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
