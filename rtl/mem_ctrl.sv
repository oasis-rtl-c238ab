// mem_ctrl -- the Memory Controller: sequences one 1 x K x N_OUT GEMM and
// overlaps the main branch with the outlier branch.
//
// After `start` it launches, in the same cycle:
//   main branch    feed the K activations (Output Buffer words X_BASE..) to the
//                  NCL Clustering Units, channel c to unit c mod NCL, and count
//                  the indices written to the Activation Index Buffer; once all K
//                  are quantized, pulse main_start to all PE lines and wait for
//                  main_done;
//   outlier branch copy the activation vector into the Orizuru leaves (LW words
//                  per cycle), pulse orz_start, wait for orz_done, then wait
//                  until the Error Calculation Unit and every line's
//                  error-compensation MACs are idle.
// When both branches are finished it pulses merge_start and, at merge_done,
// pulses `done`. op_clear is pulsed with the start to zero the error
// accumulators. Cycle counters for each branch are kept for observation.
// The paper names this block and says it orchestrates the pipelined execution
// of both branches; the schedule above (quantize, then concat/count/reduce, in
// parallel with detect/compensate, then merge) follows the paper's pipeline
// figure, while the exact handshakes are this design's.
module mem_ctrl #(
  parameter int unsigned K      = oasis_pkg::K_DEF,
  parameter int unsigned NCL    = oasis_pkg::N_CLUST_DEF,
  parameter int unsigned LW     = oasis_pkg::ORZ_LOAD_DEF,
  localparam int unsigned KW    = $clog2(K),
  localparam int unsigned PW    = $clog2(K / NCL + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic          op_clear,
  // clustering feed
  input  logic          cl_in_ready  [NCL],
  output logic          cl_in_valid  [NCL],
  output logic [KW-1:0] cl_ch        [NCL],
  input  logic          cl_out_valid [NCL],
  output logic          quant_done,
  // Orizuru load
  output logic          orz_ld_en,
  output logic [KW-1:0] orz_ld_base,
  output logic          orz_start,
  input  logic          orz_done,
  input  logic          ol_pending,   // error-calc output or any line's EC busy
  // PE lines
  output logic          main_start,
  input  logic          main_done,
  output logic          merge_start,
  input  logic          merge_done,
  // observation
  output logic [31:0]   cyc_quant,
  output logic [31:0]   cyc_main,
  output logic [31:0]   cyc_outlier,
  output logic [31:0]   cyc_total
);
  typedef enum logic [1:0] {O_IDLE, O_LOAD, O_DETECT, O_DRAIN} ostate_t;

  logic          run, q_run, m_run, m_fin, o_fin, mg_run;
  logic [PW-1:0] ptr [NCL];
  logic [KW:0]   q_cnt;
  ostate_t       ost;
  logic [KW:0]   ld_ptr;

  assign busy = run;

  always_comb begin
    for (int u = 0; u < int'(NCL); u++) begin
      cl_in_valid[u] = q_run && (int'(ptr[u]) < int'(K / NCL));
      cl_ch[u]       = KW'(int'(ptr[u]) * int'(NCL) + u);
    end
  end

  assign orz_ld_en   = (ost == O_LOAD);
  assign orz_ld_base = KW'(ld_ptr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; q_run <= 1'b0; m_run <= 1'b0; m_fin <= 1'b0; o_fin <= 1'b0; mg_run <= 1'b0;
      for (int u = 0; u < int'(NCL); u++) ptr[u] <= '0;
      q_cnt <= '0; ost <= O_IDLE; ld_ptr <= '0;
      done <= 1'b0; op_clear <= 1'b0; orz_start <= 1'b0; main_start <= 1'b0;
      merge_start <= 1'b0; quant_done <= 1'b0;
      cyc_quant <= '0; cyc_main <= '0; cyc_outlier <= '0; cyc_total <= '0;
    end else begin
      done <= 1'b0; op_clear <= 1'b0; orz_start <= 1'b0; main_start <= 1'b0;
      merge_start <= 1'b0; quant_done <= 1'b0;
      if (start && !run) begin
        run <= 1'b1; q_run <= 1'b1; m_run <= 1'b0; m_fin <= 1'b0; o_fin <= 1'b0;
        for (int u = 0; u < int'(NCL); u++) ptr[u] <= '0;
        q_cnt <= '0; ost <= O_LOAD; ld_ptr <= '0; op_clear <= 1'b1;
        cyc_quant <= '0; cyc_main <= '0; cyc_outlier <= '0; cyc_total <= '0;
      end else if (run) begin
        cyc_total <= cyc_total + 1;
        // ---- main branch: quantization ----
        if (q_run) begin
          logic [KW:0] inc;
          cyc_quant <= cyc_quant + 1;
          inc = '0;
          for (int u = 0; u < int'(NCL); u++) begin
            if (cl_in_valid[u] && cl_in_ready[u]) ptr[u] <= ptr[u] + 1'b1;
            if (cl_out_valid[u]) inc = inc + 1'b1;
          end
          q_cnt <= q_cnt + inc;
          if (int'(q_cnt) + int'(inc) == int'(K)) begin
            q_run      <= 1'b0;
            quant_done <= 1'b1;
            main_start <= 1'b1;
            m_run      <= 1'b1;
          end
        end
        // ---- main branch: PE lines ----
        if (m_run) begin
          cyc_main <= cyc_main + 1;
          if (main_done) begin
            m_run <= 1'b0;
            m_fin <= 1'b1;
          end
        end
        // ---- outlier branch ----
        if (ost != O_IDLE) cyc_outlier <= cyc_outlier + 1;
        case (ost)
          O_LOAD: begin
            if (int'(ld_ptr) + int'(LW) >= int'(K)) begin
              ost       <= O_DETECT;
              orz_start <= 1'b1;
            end
            ld_ptr <= ld_ptr + (KW+1)'(LW);
          end
          O_DETECT: if (orz_done) ost <= O_DRAIN;
          O_DRAIN: if (!ol_pending) begin
            ost   <= O_IDLE;
            o_fin <= 1'b1;
          end
          default: ;
        endcase
        // ---- merge ----
        if (m_fin && o_fin && !mg_run) begin
          mg_run      <= 1'b1;
          merge_start <= 1'b1;
          m_fin       <= 1'b0;
          o_fin       <= 1'b0;
        end
        if (mg_run && merge_done) begin
          mg_run <= 1'b0;
          run    <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end
endmodule
