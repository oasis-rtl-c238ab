// tb_output_buffer -- a 256-word buffer: host writes, single-word and burst reads,
// and per-line merge writes, all compared with a shadow array.
module tb_output_buffer;
  localparam int WORDS = 256, NCR = 4, NBR = 16, NMW = 4;
  logic clk = 0, h_we = 0;
  logic [7:0] h_waddr, h_raddr, b_addr, c_addr [NCR], m_addr [NMW];
  logic [15:0] h_wdata, h_rdata, c_data [NCR], b_data [NBR], m_data [NMW];
  logic m_we [NMW];
  logic [15:0] shadow [WORDS];
  int checks = 0, failures = 0;
  output_buffer #(.WORDS(WORDS), .NCR(NCR), .NBR(NBR), .NMW(NMW)) dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    h_waddr = 0; h_raddr = 0; b_addr = 0; h_wdata = 0;
    for (int p = 0; p < NCR; p++) c_addr[p] = 0;
    for (int p = 0; p < NMW; p++) begin m_we[p] = 0; m_addr[p] = 0; m_data[p] = 0; end
    for (int i = 0; i < WORDS; i++) begin
      h_we = 1; h_waddr = 8'(i); h_wdata = 16'($urandom); shadow[i] = h_wdata; @(posedge clk); #1;
    end
    h_we = 0;
    for (int i = 0; i < 32; i++) begin
      for (int p = 0; p < NMW; p++) begin
        m_we[p] = 1; m_addr[p] = 8'(128 + p * 32 + i); m_data[p] = 16'($urandom); shadow[m_addr[p]] = m_data[p];
      end
      @(posedge clk); #1;
    end
    for (int p = 0; p < NMW; p++) m_we[p] = 0;
    for (int i = 0; i < WORDS; i++) begin
      h_raddr = 8'(i); for (int p = 0; p < NCR; p++) c_addr[p] = 8'(i + p); #1;
      checks++; if (h_rdata !== shadow[i]) failures++;
      for (int p = 0; p < NCR; p++) begin checks++; if (c_data[p] !== shadow[8'(i + p)]) failures++; end
    end
    for (int i = 0; i < WORDS; i += NBR) begin
      b_addr = 8'(i); #1;
      for (int j = 0; j < NBR; j++) begin checks++; if (b_data[j] !== shadow[i + j]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
