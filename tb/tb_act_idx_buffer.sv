// tb_act_idx_buffer -- four write ports fill rows of a K=64, 4-row buffer at
// scattered addresses; each row read must match the shadow copy.
module tb_act_idx_buffer;
  localparam int K = 64, ROWS = 4, NWR = 4;
  logic clk = 0;
  logic [1:0] wr_row, rd_row;
  logic wr_en [NWR];
  logic [5:0] wr_addr [NWR];
  logic [3:0] wr_data [NWR], rd_idx [K];
  logic [3:0] shadow [ROWS][K];
  int checks = 0, failures = 0;
  act_idx_buffer #(.K(K), .ROWS(ROWS), .NWR(NWR)) dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    rd_row = 0; wr_row = 0;
    for (int p = 0; p < NWR; p++) begin wr_en[p] = 0; wr_addr[p] = 0; wr_data[p] = 0; end
    for (int r = 0; r < ROWS; r++)
      for (int i = 0; i < K / NWR; i++) begin
        wr_row = 2'(r);
        for (int p = 0; p < NWR; p++) begin
          wr_en[p] = 1; wr_addr[p] = 6'((K / NWR - 1 - i) * NWR + p); wr_data[p] = 4'($urandom);
          shadow[r][wr_addr[p]] = wr_data[p];
        end
        @(posedge clk); #1;
      end
    for (int p = 0; p < NWR; p++) wr_en[p] = 0;
    for (int r = 0; r < ROWS; r++) begin
      rd_row = 2'(r); #1;
      for (int k = 0; k < K; k++) begin checks++; if (rd_idx[k] !== shadow[r][k]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
