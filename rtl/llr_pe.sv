// llr_pe: one LLR processing lane of the scheduled SC/SCL decoder.
//
// A parent node of the decoding tree holds LLRs (a, b) for the code bits of
// its upper and lower halves. Depending on which child holds the bit being
// decoded and whether the sibling subtree is already fully known, the lane
// produces the child LLR with one of four operations:
//   OP_F    f(a,b) = sign(a) sign(b) min(|a|,|b|)   (min-sum form of the
//           2 atanh(tanh(a/2) tanh(b/2)) rule)
//   OP_G    g(a,b,beta) = b + (-1)^beta a
//   OP_H    h(a,beta)   = (-1)^beta a   (reverse cancellation: upper bit given
//           the lower partial sum)
//   OP_PASS b           (lower child decoded before the upper one)
// f, g and h are the decoder's three functions; min-sum for f and the
// saturating arithmetic are this implementation's choices. LLRs are W-bit
// two's complement kept in the symmetric range [-(2^(W-1)-1), 2^(W-1)-1] so
// that negation never overflows. Purely combinational.
module llr_pe
  import polar_pkg::*;
#(
  parameter int unsigned W = LLR_W_DEF
) (
  input  pe_op_e              op,
  input  logic signed [W-1:0] a,     // LLR of the upper-half code bit
  input  logic signed [W-1:0] b,     // LLR of the lower-half code bit
  input  logic                beta,  // partial sum of the known sibling
  output logic signed [W-1:0] y
);

  localparam logic signed [W:0] MAXV = (W+1)'((1 << (W-1)) - 1);

  logic signed [W-1:0] abs_a, abs_b, mn, a_s;
  logic signed [W:0]   sum;

  always_comb begin
    abs_a = a[W-1] ? -a : a;
    abs_b = b[W-1] ? -b : b;
    mn    = (abs_a < abs_b) ? abs_a : abs_b;
    a_s   = beta ? -a : a;
    sum   = {b[W-1], b} + {a_s[W-1], a_s};
    unique case (op)
      OP_F:    y = (a[W-1] ^ b[W-1]) ? -mn : mn;
      OP_G: begin
        if (sum > MAXV)       y = MAXV[W-1:0];
        else if (sum < -MAXV) y = -MAXV[W-1:0];
        else                  y = sum[W-1:0];
      end
      OP_H:    y = a_s;
      default: y = b;
    endcase
  end

endmodule
