// orizuru -- top-k outlier detection engine: picks the k largest and the k
// smallest FP16 values of an N-element activation token and streams them out
// one per cycle with their channel index.
//
// Structure (from the paper): two complete binary trees share the N leaves, a
// max tree P and a min tree Q. Node i (1..N-1, root 1, children 2i and 2i+1,
// leaves N..2N-1) holds one bit that selects its left (0) or right (1) child;
// in P the bit points at the larger side, in Q at the smaller side. Each tree has
// a mask of still-available leaves; a popped leaf keeps its value but counts as
// -inf (P) or +inf (Q).
//   * Initialization, bottom-up, one tree level per cycle (log2 N cycles). The
//     level right above the leaves of Q reuses P's comparison result reversed
//     (plus an equality test so that ties still pick the left leaf), so Q spends
//     no comparators there.
//   * Pop: the winner is found by walking the bits from the root; the leaf
//     index is the concatenated path bits (the paper's "1110" = node 14 example).
//   * Maintenance, in the same cycle as the pop: the popped leaf is masked and
//     the log2 N ancestors are re-compared bottom-up, one comparison per level.
//   * Ties pick the left child, in both trees, so exactly k values come out.
// The engine first pops k maxima, then k minima; each pop takes one cycle when
// the consumer is ready. Doing a whole tree level per cycle at initialization
// (N/2 comparators in the widest level) and the complete maintenance in one
// cycle are this design's choices; the paper gives the algorithm and comparison
// counts but not the per-cycle schedule.
//
// Interface: while idle, ld_en writes LW leaves starting at ld_base. `start`
// (with k) begins initialization. out_valid/out_ready stream the results:
// out_val, out_idx (leaf number 0..N-1 = channel), out_is_max. `done` pulses
// after the last pop. k above N is treated as N.
//
// Lint note: the winner vectors pa/qa hold every tree node in one packed
// vector, and node i is computed from nodes 2i and 2i+1 of the same vector.
// There is no real loop (each bit depends only on bits of higher index), but
// a linter that tracks whole vectors reports circular combinational logic
// (UNOPTFLAT); the warning stands for that reason.
module orizuru
  import fp16_pkg::*;
#(
  parameter int unsigned N  = 16,
  parameter int unsigned LW = 16,
  localparam int unsigned L   = $clog2(N),
  localparam int unsigned IW  = L,
  localparam int unsigned KCW = $clog2(N + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           ld_en,
  input  logic [IW-1:0]  ld_base,
  input  fp16_t          ld_data [LW],
  input  logic           start,
  input  logic [KCW-1:0] k,
  output logic           busy,
  output logic           out_valid,
  input  logic           out_ready,
  output fp16_t          out_val,
  output logic [IW-1:0]  out_idx,
  output logic           out_is_max,
  output logic           done
);
  typedef enum logic [2:0] {S_IDLE, S_INIT, S_PMAX, S_PMIN} state_t;
  state_t state;

  fp16_t          val [N];
  logic [N-1:0]   pm, qm;        // availability masks
  logic [N-1:0]   pb, qb;        // node bits, index 1..N-1 used
  logic [KCW-1:0] k_q, cnt;
  logic [IW:0]    lev;           // level being initialised (L .. 1)

  // ---------------- winner (MUX) outputs of every node ----------------
  fp16_t      pv [2*N], qv [2*N];
  logic [2*N-1:0] pa, qa;

  function automatic logic right_max(fp16_t lv, logic la, fp16_t rv, logic ra);
    return ra && (!la || fp16_gt(rv, lv));
  endfunction
  function automatic logic right_min(fp16_t lv, logic la, fp16_t rv, logic ra);
    return ra && (!la || fp16_lt(rv, lv));
  endfunction

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      pv[N+i] = val[i]; pa[N+i] = pm[i];
      qv[N+i] = val[i]; qa[N+i] = qm[i];
    end
    for (int i = int'(N) - 1; i >= 1; i--) begin
      pv[i] = pv[2*i + int'(pb[i])]; pa[i] = pa[2*i + int'(pb[i])];
      qv[i] = qv[2*i + int'(qb[i])]; qa[i] = qa[2*i + int'(qb[i])];
    end
    pv[0] = FP16_ZERO; pa[0] = 1'b0;
    qv[0] = FP16_ZERO; qa[0] = 1'b0;
  end

  // ---------------- initialization comparators ----------------
  logic [N-1:0] ip, iq;
  always_comb begin
    ip = '0;
    iq = '0;
    for (int i = 1; i < int'(N); i++) begin
      ip[i] = right_max(pv[2*i], pa[2*i], pv[2*i+1], pa[2*i+1]);
      if (i >= int'(N) / 2)  // level above the leaves: reuse P's comparison
        iq[i] = !ip[i] && (pv[2*i] != pv[2*i+1]);
      else
        iq[i] = right_min(qv[2*i], qa[2*i], qv[2*i+1], qa[2*i+1]);
    end
  end

  // ---------------- pop: walk from the root ----------------
  logic [IW-1:0] pleaf, qleaf;
  always_comb begin
    int unsigned np, nq;
    np = 1;
    nq = 1;
    for (int l = 0; l < int'(L); l++) begin
      np = 2 * np + int'(pb[np]);
      nq = 2 * nq + int'(qb[nq]);
    end
    pleaf = IW'(np - N);
    qleaf = IW'(nq - N);
  end

  // ---------------- maintenance along the popped path ----------------
  logic [IW-1:0] mleaf;
  logic          mmax;
  int unsigned   path_node [L];
  logic          path_bit  [L];
  always_comb begin
    int unsigned node, sib;
    fp16_t cv, sv, lv, rv;
    logic  ca, sa, la, ra, b;
    node = int'(N) + int'(mleaf);
    cv   = val[mleaf];
    ca   = 1'b0;  // the popped leaf counts as -inf / +inf
    for (int l = 0; l < int'(L); l++) begin
      sib = node ^ 1;
      sv  = mmax ? pv[sib] : qv[sib];
      sa  = mmax ? pa[sib] : qa[sib];
      if (node[0] == 1'b0) begin
        lv = cv; la = ca; rv = sv; ra = sa;
      end else begin
        lv = sv; la = sa; rv = cv; ra = ca;
      end
      b = mmax ? right_max(lv, la, rv, ra) : right_min(lv, la, rv, ra);
      path_node[l] = node >> 1;
      path_bit[l]  = b;
      cv   = b ? rv : lv;
      ca   = b ? ra : la;
      node = node >> 1;
    end
  end

  assign mmax       = (state == S_PMAX);
  assign mleaf      = mmax ? pleaf : qleaf;
  assign busy       = (state != S_IDLE);
  assign out_valid  = (state == S_PMAX) || (state == S_PMIN);
  assign out_is_max = mmax;
  assign out_idx    = mleaf;
  assign out_val    = val[mleaf];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      for (int i = 0; i < int'(N); i++) val[i] <= FP16_ZERO;
      pm   <= '1;
      qm   <= '1;
      pb   <= '0;
      qb   <= '0;
      k_q  <= '0;
      cnt  <= '0;
      lev  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: begin
          if (ld_en)
            for (int j = 0; j < int'(LW); j++) val[IW'(int'(ld_base) + j)] <= ld_data[j];
          if (start) begin
            pm    <= '1;
            qm    <= '1;
            k_q   <= (k > KCW'(N)) ? KCW'(N) : k;
            cnt   <= '0;
            lev   <= (IW+1)'(L);
            state <= S_INIT;
          end
        end
        S_INIT: begin
          for (int i = 1; i < int'(N); i++) begin
            if (i >= (1 << (int'(lev) - 1)) && i < (1 << int'(lev))) begin
              pb[i] <= ip[i];
              qb[i] <= iq[i];
            end
          end
          if (lev == (IW+1)'(1)) begin
            if (k_q == '0) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_PMAX;
            end
          end
          lev <= lev - 1'b1;
        end
        S_PMAX, S_PMIN: begin
          if (out_ready) begin
            for (int l = 0; l < int'(L); l++) begin
              if (mmax) pb[path_node[l]] <= path_bit[l];
              else      qb[path_node[l]] <= path_bit[l];
            end
            if (mmax) pm[mleaf] <= 1'b0;
            else      qm[mleaf] <= 1'b0;
            if (cnt == k_q - 1'b1) begin
              cnt <= '0;
              if (mmax) state <= S_PMIN;
              else begin
                state <= S_IDLE;
                done  <= 1'b1;
              end
            end else begin
              cnt <= cnt + 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
