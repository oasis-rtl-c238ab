// tb_mem_ctrl -- the Memory Controller at K=16, 4 Clustering Units, Orizuru
// loaded 4 leaves per cycle. Behavioural models stand in for the Clustering
// Units (2 cycles per activation, busy in between), Orizuru (done a set time
// after start), the error-compensation drain (ol_pending) and the PE lines
// (main_done / merge_done a set time after their starts). Two GEMMs are run:
// one where the outlier branch ends last and one where the main branch does.
// Checks: every channel is sent to unit (channel mod 4) exactly once; main_start
// comes only after all K indices; the Orizuru leaves are loaded in K/4 cycles
// before orz_start; merge_start waits for both branches; done follows
// merge_done; op_clear at start; the cycle counters.
module tb_mem_ctrl;
  localparam int K = 16, NCL = 4, LW = 4;
  logic clk = 0, rst_n = 0, start = 0, busy, done, op_clear;
  logic cl_in_ready [NCL], cl_in_valid [NCL], cl_out_valid [NCL];
  logic [3:0] cl_ch [NCL];
  logic quant_done, orz_ld_en, orz_start, orz_done = 0, ol_pending = 0;
  logic [3:0] orz_ld_base;
  logic main_start, main_done = 0, merge_start, merge_done = 0;
  logic [31:0] cyc_quant, cyc_main, cyc_outlier, cyc_total;
  int checks = 0, failures = 0;
  int cl_busy [NCL];
  int seen [K], nidx, nload, t_start, t_main_start, t_orz_start, t_orz_done, t_main_done, t_drain, t_merge, t_done;
  int main_lat, orz_lat, drain_lat, cyc;
  bit got_op_clear;

  mem_ctrl #(.K(K), .NCL(NCL), .LW(LW)) dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always_comb for (int u = 0; u < NCL; u++) cl_in_ready[u] = (cl_busy[u] == 0);

  // behavioural responders, all updated on the clock edge
  always @(posedge clk) begin
    cyc++;
    for (int u = 0; u < NCL; u++) begin
      cl_out_valid[u] <= 1'b0;
      if (cl_busy[u] == 1) cl_out_valid[u] <= 1'b1;
      if (cl_busy[u] > 0) cl_busy[u] <= cl_busy[u] - 1;
      if (rst_n && cl_in_valid[u] && cl_in_ready[u]) begin
        cl_busy[u] <= 1;
        seen[cl_ch[u]]++;
        if (int'(cl_ch[u]) % NCL != u) begin failures++; $display("channel %0d to unit %0d", cl_ch[u], u); end
      end
      if (rst_n && cl_out_valid[u]) nidx++;
    end
    if (rst_n && orz_ld_en) begin
      if (int'(orz_ld_base) != nload * LW) begin failures++; $display("load base %0d", orz_ld_base); end
      nload++;
    end
    if (rst_n && op_clear) got_op_clear = 1;
    if (rst_n && main_start) begin
      t_main_start = cyc; checks++;
      if (nidx + (cl_out_valid[0] + cl_out_valid[1] + cl_out_valid[2] + cl_out_valid[3]) != K) begin
        failures++; $display("main_start after %0d indices", nidx);
      end
    end
    if (rst_n && orz_start) begin
      t_orz_start = cyc; checks++;
      if (nload != K / LW) begin failures++; $display("orz_start after %0d loads", nload); end
    end
    if (rst_n && merge_start) begin
      t_merge = cyc; checks++;
      if (t_main_done == 0 || t_drain == 0) begin failures++; $display("merge before both branches"); end
    end
    if (rst_n && done) t_done = cyc;
    orz_done   <= rst_n && t_orz_start != 0 && t_orz_done == 0 && cyc == t_orz_start + orz_lat;
    if (orz_done) t_orz_done = cyc;
    ol_pending <= rst_n && t_orz_start != 0 && (t_orz_done == 0 || cyc < t_orz_done + drain_lat);
    if (rst_n && t_orz_done != 0 && !ol_pending && t_drain == 0 && cyc > t_orz_done) t_drain = cyc;
    main_done  <= rst_n && t_main_start != 0 && t_main_done == 0 && cyc == t_main_start + main_lat;
    if (main_done) t_main_done = cyc;
    merge_done <= rst_n && t_merge != 0 && cyc == t_merge + 5;
  end

  task automatic run(int ml, int ol, int dl);
    main_lat = ml; orz_lat = ol; drain_lat = dl;
    for (int k = 0; k < K; k++) seen[k] = 0;
    nidx = 0; nload = 0; t_main_start = 0; t_orz_start = 0; t_orz_done = 0; t_main_done = 0;
    t_drain = 0; t_merge = 0; t_done = 0; got_op_clear = 0;
    start = 1; t_start = cyc; @(posedge clk); #1; start = 0;
    while (!done) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    for (int k = 0; k < K; k++) begin checks++; if (seen[k] != 1) begin failures++; $display("channel %0d sent %0d times", k, seen[k]); end end
    checks++; if (!got_op_clear) begin failures++; $display("no op_clear"); end
    checks++; if (busy) begin failures++; $display("still busy"); end
    // quantization: K/NCL activations per unit, 2 cycles each, plus the final count
    checks++; if (cyc_quant != 32'(2 * K / NCL + 1)) begin failures++; $display("cyc_quant %0d", cyc_quant); end
    checks++; if (cyc_main != 32'(ml + 2)) begin failures++; $display("cyc_main %0d", cyc_main); end
    checks++; if (t_merge < t_main_done || t_merge < t_drain) begin failures++; $display("merge order"); end
    // cyc_total counts from the cycle after start is taken to the one before done
    checks++; if (cyc_total != 32'(t_done - t_start - 2)) begin failures++; $display("cyc_total %0d vs %0d", cyc_total, t_done - t_start); end
  endtask

  initial begin
    for (int u = 0; u < NCL; u++) begin cl_busy[u] = 0; cl_out_valid[u] = 0; end
    cyc = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    run(20, 40, 10);   // outlier branch ends last
    run(60, 5, 3);     // main branch ends last
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
