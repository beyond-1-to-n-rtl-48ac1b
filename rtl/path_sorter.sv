// path_sorter: list pruning of the SCL decoder.
//
// At an information leaf each of the L paths splits into two candidates
// (candidate c = 2*path + bit). The sorter ranks all 2L candidates and puts
// the candidate of rank s into surviving slot s, s = 0..L-1. A candidate
// ranks before another if it is valid and the other is not, or both have the
// same validity and it has the smaller metric, or equal metrics and the
// smaller index. The rank of each candidate is the number of candidates that
// rank before it: 2L x 2L comparators, one combinational step. Keeping the
// L best by path metric is the SCL rule; the rank network is this
// implementation's choice.
module path_sorter #(
  parameter int unsigned L    = 8,
  parameter int unsigned PM_W = 16,
  localparam int unsigned C   = 2 * L,
  localparam int unsigned CW  = $clog2(C)
) (
  input  logic [PM_W-1:0] pm_in    [C],
  input  logic            valid_in [C],
  output logic [CW-1:0]   sel      [L],   // candidate placed in slot s
  output logic            sel_valid[L],
  output logic [PM_W-1:0] sel_pm   [L]
);

  logic [CW:0] rank [C];

  function automatic logic ranks_before(input int unsigned x, input int unsigned y,
                                  input logic vx, input logic vy,
                                  input logic [PM_W-1:0] px, input logic [PM_W-1:0] py);
    if (vx != vy) return vx;
    if (px != py) return px < py;
    return x < y;
  endfunction

  always_comb begin
    for (int d = 0; d < C; d++) begin
      rank[d] = '0;
      for (int c = 0; c < C; c++)
        if (c != d && ranks_before(c, d, valid_in[c], valid_in[d], pm_in[c], pm_in[d]))
          rank[d] = rank[d] + 1'b1;
    end
    for (int s = 0; s < L; s++) begin
      sel[s]       = '0;
      sel_valid[s] = 1'b0;
      sel_pm[s]    = '0;
      for (int c = 0; c < C; c++)
        if (rank[c] == (CW+1)'(s)) begin
          sel[s]       = CW'(c);
          sel_valid[s] = valid_in[c];
          sel_pm[s]    = pm_in[c];
        end
    end
  end

endmodule
