// sched_gen: channel-aware decoding scheduler with copy resolution.
//
// Produces the order in which the list decoder decides the information
// leaves, greedily: the next leaf is the not-yet-known information leaf with
// the smallest Bhattacharyya parameter Z, conditioned on the leaves already
// scheduled. Once a leaf is picked, the other members of its copy ring that
// are still unknown follow it at once, since one decision fixes them all.
// Z is evaluated on a binary erasure channel with erasure probability eps:
// a received code position has Z = eps, a punctured one Z = 1. The tree is
// walked root to leaves with the decoder's own four node rules, so the Z of
// a leaf is that of the LLR the decoder will see:
//   upper child, lower sibling unknown  f:    z1 + z2 - z1*z2
//   upper child, lower sibling known    h:    z1
//   lower child, upper sibling known    g:    z1*z2
//   lower child, upper sibling unknown  pass: z2
// (z1 from the node's upper half, z2 from its lower half).
//
// Fixed point: Z is an unsigned ZW-bit fraction with 1.0 = 2^ZW - 1.
// The product is (a*b + a + b) >> ZW, exact at 0 and 1; f is clamped to 1.
// Ties go to the lowest index.
//
// One iteration: load the channel Z vector (1 cycle); LOGN tree levels,
// each N/2 node pairs updated in place, PAIRS = min(LANES, N/2) per cycle;
// scan the leaves, SCAN = min(LANES, N) per cycle; pick (1 cycle); walk the
// picked leaf's ring, one member per cycle (m cycles for a ring of m,
// 1 when the leaf has no copies). Each iteration therefore costs
//   1 + LOGN*N/(2*PAIRS) + N/SCAN + 1 + m
// cycles, and the last one, which finds no unknown leaf, costs the same
// without the ring. For N = 1024 and 32 lanes that is 194 + m.
//
// Interface: pulse start with info_mask, rx_mask and eps stable until done.
// The ring is read through copy_addr / copy_next (combinational table read,
// each leaf names the next member of its ring, itself when it has none).
// Every scheduled leaf appears once on out_idx with out_valid; done pulses
// one cycle after the last entry.
//
// The greedy rule with copy resolution and the BEC recursions are the
// design's; the fixed-point format, the in-place level-by-level evaluation,
// the lane count and the tie-break are this implementation's choices.
module sched_gen
  import polar_pkg::*;
#(
  parameter int unsigned N     = NMAX_DEF,
  parameter int unsigned ZW    = Z_W_DEF,
  parameter int unsigned LANES = LANES_DEF,
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [N-1:0]    info_mask,   // information leaves, copies included
  input  logic [N-1:0]    rx_mask,     // 1: code position received
  input  logic [ZW-1:0]   eps,         // erasure probability of a received position
  output logic [LOGN-1:0] copy_addr,
  input  logic [LOGN-1:0] copy_next,
  output logic            busy,
  output logic            out_valid,
  output logic [LOGN-1:0] out_idx,
  output logic            done
);

  localparam int unsigned PAIRS = (LANES < N / 2) ? LANES : N / 2;
  localparam int unsigned LCYC  = N / 2 / PAIRS;
  localparam int unsigned SCAN  = (LANES < N) ? LANES : N;
  localparam int unsigned SCYC  = N / SCAN;
  localparam logic [ZW-1:0] ONE = '1;

  function automatic logic [ZW-1:0] zmul(input logic [ZW-1:0] a, input logic [ZW-1:0] b);
    logic [2*ZW-1:0] p;
    p = (2*ZW)'(a) * (2*ZW)'(b) + (2*ZW)'(a) + (2*ZW)'(b);
    return p[2*ZW-1:ZW];
  endfunction

  function automatic logic [ZW-1:0] zf(input logic [ZW-1:0] a, input logic [ZW-1:0] b);
    logic [ZW+1:0] s;
    s = (ZW+2)'(a) + (ZW+2)'(b) - (ZW+2)'(zmul(a, b));
    return (s > (ZW+2)'(ONE)) ? ONE : s[ZW-1:0];
  endfunction

  typedef enum logic [2:0] {G_IDLE, G_LOAD, G_LEVEL, G_SCAN, G_PICK, G_RING} gstate_e;
  gstate_e gstate;

  logic [ZW-1:0]   z [N];
  logic [N-1:0]    known;
  logic [LOGN-1:0] lvl;            // tree depth being expanded, 0 = root
  logic [LOGN:0]   cyc;
  logic            found;
  logic [ZW-1:0]   best_z;
  logic [LOGN-1:0] best_i, w;

  // kt[l][b +: 2^l] = 1 when every leaf of the size-2^l node at b is known
  logic [N-1:0] kt [LOGN+1];
  assign kt[0] = known;
  for (genvar l = 1; l <= LOGN; l++) begin : g_kt
    localparam int unsigned H = 1 << (l - 1);
    for (genvar b = 0; b < N; b += 2 * H) begin : g_node
      assign kt[l][b +: 2*H] = {(2*H){kt[l-1][b] & kt[l-1][b + H]}};
    end
  end

  // one scan step: best candidate among this cycle's SCAN leaves and the
  // best so far (strictly smaller wins, so earlier indices win ties)
  logic            s_found;
  logic [ZW-1:0]   s_z;
  logic [LOGN-1:0] s_i;
  always_comb begin
    s_found = found;
    s_z     = best_z;
    s_i     = best_i;
    for (int j = 0; j < SCAN; j++) begin
      automatic int unsigned i = int'(cyc) * SCAN + j;
      if (info_mask[i] && !known[i] && (!s_found || z[i] < s_z)) begin
        s_found = 1'b1;
        s_z     = z[i];
        s_i     = LOGN'(i);
      end
    end
  end

  assign busy      = (gstate != G_IDLE);
  assign copy_addr = (gstate == G_PICK) ? best_i : w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gstate    <= G_IDLE;
      known     <= '0;
      lvl       <= '0;
      cyc       <= '0;
      found     <= 1'b0;
      best_z    <= '0;
      best_i    <= '0;
      w         <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      done      <= 1'b0;
      for (int i = 0; i < N; i++) z[i] <= ONE;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      unique case (gstate)
        G_IDLE: if (start) begin
          known  <= ~info_mask;
          gstate <= G_LOAD;
        end
        G_LOAD: begin
          for (int i = 0; i < N; i++) z[i] <= rx_mask[i] ? eps : ONE;
          lvl    <= '0;
          cyc    <= '0;
          gstate <= G_LEVEL;
        end
        G_LEVEL: begin
          // node size 2^(LOGN-lvl), child size hs = 2^(LOGN-1-lvl)
          for (int j = 0; j < PAIRS; j++) begin
            automatic int unsigned pj = int'(cyc) * PAIRS + j;
            automatic int unsigned cs = LOGN - 1 - int'(lvl);
            automatic int unsigned hs = 1 << cs;
            automatic int unsigned ia = ((pj >> cs) << (cs + 1)) + (pj & (hs - 1));
            automatic int unsigned ib = ia + hs;
            automatic logic [ZW-1:0] z1 = z[ia], z2 = z[ib];
            z[ia] <= kt[cs][ib] ? z1 : zf(z1, z2);
            z[ib] <= kt[cs][ia] ? zmul(z1, z2) : z2;
          end
          if (cyc == (LOGN+1)'(LCYC - 1)) begin
            cyc <= '0;
            if (lvl == LOGN'(LOGN - 1)) begin
              found  <= 1'b0;
              gstate <= G_SCAN;
            end else
              lvl <= lvl + 1'b1;
          end else
            cyc <= cyc + 1'b1;
        end
        G_SCAN: begin
          found  <= s_found;
          best_z <= s_z;
          best_i <= s_i;
          if (cyc == (LOGN+1)'(SCYC - 1)) begin
            cyc    <= '0;
            gstate <= G_PICK;
          end else
            cyc <= cyc + 1'b1;
        end
        G_PICK: begin
          if (!found) begin
            done   <= 1'b1;
            gstate <= G_IDLE;
          end else begin
            out_valid     <= 1'b1;
            out_idx       <= best_i;
            known[best_i] <= 1'b1;
            w             <= copy_next;
            gstate        <= G_RING;
          end
        end
        G_RING: begin
          if (w == best_i) gstate <= G_LOAD;
          else begin
            if (info_mask[w] && !known[w]) begin
              out_valid <= 1'b1;
              out_idx   <= w;
              known[w]  <= 1'b1;
            end
            w <= copy_next;
          end
        end
        default: gstate <= G_IDLE;
      endcase
    end
  end

endmodule
