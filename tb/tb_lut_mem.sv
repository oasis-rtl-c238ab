// tb_lut_mem -- loads the Cartesian-product table and both codebooks through the
// single write port and checks every parallel output, and the reset values.
module tb_lut_mem;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [8:0] wr_addr;
  logic [15:0] wr_data, cp [256], w_cb [16], a_cb [16];
  logic [15:0] shadow [288];
  int checks = 0, failures = 0;
  lut_mem dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    wr_addr = 0; wr_data = 0;
    repeat (2) @(posedge clk); #1;
    for (int i = 0; i < 256; i++) begin checks++; if (cp[i] !== 16'h0) failures++; end
    rst_n = 1;
    for (int i = 0; i < 288; i++) begin
      wr_en = 1; wr_addr = 9'(i); wr_data = 16'($urandom); shadow[i] = wr_data;
      @(posedge clk); #1;
    end
    wr_en = 0;
    for (int i = 0; i < 256; i++) begin checks++; if (cp[i] !== shadow[i]) failures++; end
    for (int i = 0; i < 16; i++) begin checks++; if (w_cb[i] !== shadow[256+i]) failures++; end
    for (int i = 0; i < 16; i++) begin checks++; if (a_cb[i] !== shadow[272+i]) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
