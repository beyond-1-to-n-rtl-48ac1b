// partial_sum_net: partial sums of every subtree of the polar decoding tree.
//
// Given the hard-decision vector u (bit i is u_i, frozen and not yet decided
// bits are 0), level l of the output holds, for every node of 2^l leaves,
// the polar transform of that node's leaves: beta[l][b +: 2^l] = u[b +: 2^l]
// * G_{2^l}, with G = F^{(x)l}, F = [1 0; 1 1]. It is built as the butterfly
// recursion of the decoder's partial-sum return (beta1 xor beta2, beta2):
// beta[l] upper half = beta[l-1] upper ^ beta[l-1] lower, lower half copied.
// beta[0] = u, beta[LOGN] is the full codeword. Combinational; the decoder
// reads the sibling's partial sums from here instead of storing them.
module partial_sum_net #(
  parameter int unsigned N    = 1024,
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic [N-1:0] u,
  output logic [N-1:0] beta [LOGN+1]
);

  assign beta[0] = u;

  for (genvar l = 1; l <= LOGN; l++) begin : g_lvl
    localparam int unsigned H = 1 << (l - 1);
    for (genvar b = 0; b < N; b += 2 * H) begin : g_node
      assign beta[l][b +: H]     = beta[l-1][b +: H] ^ beta[l-1][b + H +: H];
      assign beta[l][b + H +: H] = beta[l-1][b + H +: H];
    end
  end

endmodule
