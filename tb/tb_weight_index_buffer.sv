// tb_weight_index_buffer -- fills a K=64 x NOUT=8 buffer 16 indices per write
// and checks the row port (all K indices of one output channel) and the column
// port (one input channel for 8 output channels) against a shadow copy.
module tb_weight_index_buffer;
  localparam int K = 64, NOUT = 8, WR_W = 16, NRD = 8;
  logic clk = 0, wr_en = 0;
  logic [2:0] wr_row, row_sel, col_base;
  logic [1:0] wr_word;
  logic [3:0] wr_data [WR_W], row_idx [K], col_idx [NRD];
  logic [5:0] col_ch;
  logic [3:0] shadow [NOUT][K];
  int checks = 0, failures = 0;
  weight_index_buffer #(.K(K), .NOUT(NOUT), .WR_W(WR_W), .NRD(NRD)) dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    row_sel = 0; col_base = 0; col_ch = 0; wr_row = 0; wr_word = 0;
    for (int i = 0; i < WR_W; i++) wr_data[i] = 0;
    for (int pass = 0; pass < 2; pass++)
      for (int r = 0; r < NOUT; r++)
        for (int wd = 0; wd < K / WR_W; wd++) begin
          wr_en = 1; wr_row = 3'(r); wr_word = 2'(wd);
          for (int i = 0; i < WR_W; i++) begin wr_data[i] = 4'($urandom); shadow[r][wd*WR_W+i] = wr_data[i]; end
          @(posedge clk); #1;
        end
    wr_en = 0;
    for (int r = 0; r < NOUT; r++) begin
      row_sel = 3'(r); #1;
      for (int k = 0; k < K; k++) begin checks++; if (row_idx[k] !== shadow[r][k]) failures++; end
    end
    for (int k = 0; k < K; k++) begin
      col_ch = 6'(k); col_base = 0; #1;
      for (int j = 0; j < NRD; j++) begin checks++; if (col_idx[j] !== shadow[j][k]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
