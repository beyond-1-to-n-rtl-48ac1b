// scl_core: successive-cancellation list decoder that follows an arbitrary
// decoding schedule and freezes bit copies the moment they are decided.
//
// The code is a polar code of length N (leaf i = u_i, 0-based). Leaves not
// in info_mask are frozen to 0. The decoder walks a schedule table s_0,
// s_1, ... (read through sched_addr/sched_t). For every scheduled leaf that
// is not yet known it recomputes the LLR of that leaf from the channel LLRs
// by walking the decoding tree from the root down to the leaf. At each node
// the child holding the target is produced lane by lane with
//   target in upper child: h(a, beta_lower)  if the lower sibling is fully
//                          known, otherwise f(a, b)
//   target in lower child: g(a, b, beta_upper) if the upper sibling is fully
//                          known, otherwise b (lower subtree decoded first)
// where a/b are the upper/lower halves of the parent's LLRs and beta are the
// sibling's partial sums (partial_sum_net). At the leaf every one of the L
// paths splits into u=0/u=1, the path metric grows by |LLR| for the decision
// against the LLR's sign, and path_sorter keeps the L best. The decided leaf
// and then every member of its copy set (a ring: copy_next[i] is the next
// member, copy_next[i] = i for no copies) become known, with the copies
// taking the decided value in every path. Scheduled leaves that are already
// known are skipped.
//
// Structure: per path, one LLR vector per tree level (level d node at
// lm[2^d .. 2^(d+1)-1]); LANES lanes per path; the channel buffer is the
// root and is read through 2*LANES ports. Recomputing from the root for every
// decision makes a path copy cost nothing but its hard-decision vector and
// metric. This node-rule form of the schedule, the recomputation from the
// root and the LLR-based path metric are this implementation's choices; the
// f/g/h functions, the schedule, the bit-copy freezing and the list
// decoding follow the design.
//
// Timing, per scheduled leaf that is still unknown: 1 fetch cycle, then
// ceil(2^(d-1)/LANES) cycles for each level d = log2(N)..1, 1 decision
// cycle and 1 + (copy-set size - 1) copy cycles. A known leaf costs 1 cycle.
// start is taken in S_IDLE; done pulses one cycle when the schedule ends;
// u_hat/pm/path_active then hold the list.
module scl_core
  import polar_pkg::*;
#(
  parameter int unsigned N     = NMAX_DEF,
  parameter int unsigned L     = LIST_DEF,
  parameter int unsigned W     = LLR_W_DEF,
  parameter int unsigned PM_W  = PM_W_DEF,
  parameter int unsigned LANES = LANES_DEF,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned DW   = $clog2(LOGN + 1),
  localparam int unsigned CW   = $clog2(2 * L)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [N-1:0]        info_mask,
  input  logic [LOGN:0]       sched_len,
  output logic [LOGN-1:0]     sched_addr,
  input  logic [LOGN-1:0]     sched_t,
  output logic [LOGN-1:0]     copy_addr,
  input  logic [LOGN-1:0]     copy_next,
  output logic [LOGN-1:0]     ch_addr [2*LANES],
  input  logic signed [W-1:0] ch_llr  [2*LANES],
  output logic                busy,
  output logic                done,
  output logic [N-1:0]        u_hat       [L],
  output logic [PM_W-1:0]     pm          [L],
  output logic                path_active [L],
  output logic [N-1:0]        known
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_CALC, S_DECIDE, S_COPY, S_DONE} state_e;
  state_e state;

  logic [LOGN:0]        p;
  logic [LOGN-1:0]      tgt, cw;
  logic [DW-1:0]        d;
  logic [LOGN-1:0]      chunk;
  logic signed [W-1:0]  lm [L][N];

  // ---------------------------------------------------------------- tree state
  logic [N-1:0] beta [L][LOGN+1];
  for (genvar q = 0; q < L; q++) begin : g_ps
    partial_sum_net #(.N(N)) u_ps (.u(u_hat[q]), .beta(beta[q]));
  end

  // cl[l][b] = 1 when every leaf of the level-l node starting at b is known
  logic [N-1:0] cl [LOGN+1];
  assign cl[0] = known;
  for (genvar l = 1; l <= LOGN; l++) begin : g_cl
    localparam int unsigned H = 1 << (l - 1);
    for (genvar b = 0; b < N; b += 2 * H) begin : g_node
      assign cl[l][b +: 2*H] = {(2*H){cl[l-1][b] & cl[l-1][b + H]}};
    end
  end

  // ------------------------------------------------------------ node decode
  int unsigned m_sz, nb, sib;
  logic        side, sib_known, last_chunk;
  pe_op_e      op;

  always_comb begin
    m_sz      = 1 << (d - 1);
    nb        = int'(tgt) & ~((1 << d) - 1);
    side      = tgt[d-1];
    sib       = side ? nb : nb + m_sz;
    sib_known = cl[d-1][sib];
    if (side) op = sib_known ? OP_G : OP_PASS;
    else      op = sib_known ? OP_H : OP_F;
    last_chunk = (int'(chunk) + 1) * LANES >= m_sz;
  end

  logic signed [W-1:0] pe_a [L][LANES];
  logic signed [W-1:0] pe_b [L][LANES];
  logic                pe_beta [L][LANES];
  logic signed [W-1:0] pe_y [L][LANES];
  logic                lane_act [LANES];

  // channel buffer addresses (root level): upper and lower half of lane j
  always_comb
    for (int k = 0; k < LANES; k++) begin
      ch_addr[2*k]   = LOGN'(int'(chunk) * LANES + k);
      ch_addr[2*k+1] = LOGN'(int'(chunk) * LANES + k + m_sz);
    end

  always_comb begin
    for (int k = 0; k < LANES; k++) begin
      automatic int unsigned j = int'(chunk) * LANES + k;
      lane_act[k]     = (j < m_sz);
      for (int q = 0; q < L; q++) begin
        if (d == DW'(LOGN)) begin
          pe_a[q][k] = ch_llr[2*k];
          pe_b[q][k] = ch_llr[2*k+1];
        end else begin
          pe_a[q][k] = lm[q][((1 << d) + j) % N];
          pe_b[q][k] = lm[q][((1 << d) + m_sz + j) % N];
        end
        pe_beta[q][k] = beta[q][d-1][(sib + j) % N];
      end
    end
  end

  for (genvar q = 0; q < L; q++) begin : g_path
    for (genvar k = 0; k < LANES; k++) begin : g_lane
      llr_pe #(.W(W)) u_pe (
        .op(op), .a(pe_a[q][k]), .b(pe_b[q][k]), .beta(pe_beta[q][k]), .y(pe_y[q][k])
      );
    end
  end

  // ------------------------------------------------------------ list decision
  logic [PM_W-1:0] cand_pm    [2*L];
  logic            cand_valid [2*L];
  logic [CW-1:0]   sel        [L];
  logic            sel_valid  [L];
  logic [PM_W-1:0] sel_pm     [L];

  always_comb begin
    for (int q = 0; q < L; q++) begin
      automatic logic signed [W-1:0] lf = lm[q][1];
      automatic logic [W-1:0]        mag = lf[W-1] ? W'(-lf) : W'(lf);
      automatic logic [PM_W:0]       grown = {1'b0, pm[q]} + (PM_W+1)'(mag);
      automatic logic [PM_W-1:0]     pen_pm = grown[PM_W] ? '1 : grown[PM_W-1:0];
      // candidate 2q: u = 0, candidate 2q+1: u = 1; hard decision = sign bit
      cand_pm[2*q]      = lf[W-1] ? pen_pm : pm[q];
      cand_pm[2*q+1]    = lf[W-1] ? pm[q]  : pen_pm;
      cand_valid[2*q]   = path_active[q];
      cand_valid[2*q+1] = path_active[q];
    end
  end

  path_sorter #(.L(L), .PM_W(PM_W)) u_sort (
    .pm_in(cand_pm), .valid_in(cand_valid), .sel(sel), .sel_valid(sel_valid), .sel_pm(sel_pm)
  );

  // ------------------------------------------------------------ control
  assign sched_addr = p[LOGN-1:0];
  assign copy_addr  = (state == S_COPY) ? cw : tgt;
  assign busy       = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      p     <= '0;
      tgt   <= '0;
      cw    <= '0;
      d     <= DW'(LOGN);
      chunk <= '0;
      done  <= 1'b0;
      known <= '0;
      for (int q = 0; q < L; q++) begin
        u_hat[q]       <= '0;
        pm[q]          <= '0;
        path_active[q] <= 1'b0;
        for (int i = 0; i < N; i++) lm[q][i] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          known <= ~info_mask;
          p     <= '0;
          for (int q = 0; q < L; q++) begin
            u_hat[q]       <= '0;
            pm[q]          <= '0;
            path_active[q] <= (q == 0);
          end
          state <= S_FETCH;
        end
        S_FETCH: begin
          if (p >= sched_len)        state <= S_DONE;
          else if (known[sched_t])   p <= p + 1'b1;
          else begin
            tgt   <= sched_t;
            d     <= DW'(LOGN);
            chunk <= '0;
            state <= S_CALC;
          end
        end
        S_CALC: begin
          for (int q = 0; q < L; q++)
            for (int k = 0; k < LANES; k++)
              if (lane_act[k])
                lm[q][((1 << (d - 1)) + int'(chunk) * LANES + k) % N] <= pe_y[q][k];
          if (last_chunk) begin
            chunk <= '0;
            if (d == DW'(1)) state <= S_DECIDE;
            else             d <= d - 1'b1;
          end else begin
            chunk <= chunk + 1'b1;
          end
        end
        S_DECIDE: begin
          for (int s = 0; s < L; s++) begin
            automatic logic [N-1:0] nu = u_hat[int'(sel[s]) >> 1];
            nu[tgt]        = sel[s][0];
            u_hat[s]       <= nu;
            pm[s]          <= sel_pm[s];
            path_active[s] <= sel_valid[s];
          end
          known[tgt] <= 1'b1;
          cw         <= copy_next;
          state      <= S_COPY;
        end
        S_COPY: begin
          if (cw == tgt) begin
            p     <= p + 1'b1;
            state <= S_FETCH;
          end else begin
            known[cw] <= 1'b1;
            for (int q = 0; q < L; q++) u_hat[q][cw] <= u_hat[q][tgt];
            cw <= copy_next;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A decision is only taken on a leaf that was unknown.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_DECIDE) |-> !known[tgt]);

endmodule
