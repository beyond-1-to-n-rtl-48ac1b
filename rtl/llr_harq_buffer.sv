// llr_harq_buffer: receive-side circular buffer of the rateless IR-HARQ link.
//
// The transmitter reads its N_max coded bits out of a circular buffer whose
// order follows sequential puncturing: the first transmission carries the
// mother block x[NMAX-NMIN .. NMAX-1] in ascending order, and every further
// bit walks backwards from x[NMAX-NMIN-1] down to x[0]; after NMAX bits the
// buffer wraps. This block undoes that: the k-th received LLR of a codeword
// (k counted over all transmissions, modulo NMAX) is added to position
//   pos(k) = NMAX-NMIN+k   for k <  NMIN
//   pos(k) = NMAX-1-k      for k >= NMIN.
// Positions never received stay 0, i.e. punctured. A repeat after a wrap is
// combined by saturating addition (chase combining). clear starts a new
// codeword. One LLR per cycle in; RP combinational read ports out.
// The buffer order follows the design's puncturing rule; the additive
// combining of wrapped bits and the port layout are this implementation's.
module llr_harq_buffer
  import polar_pkg::*;
#(
  parameter int unsigned NMAX = NMAX_DEF,
  parameter int unsigned NMIN = NMIN_DEF,
  parameter int unsigned W    = LLR_W_DEF,
  parameter int unsigned RP   = 2 * LANES_DEF,
  localparam int unsigned AW  = $clog2(NMAX)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,      // start a new codeword
  input  logic                in_valid,
  input  logic signed [W-1:0] in_llr,
  input  logic [AW-1:0]       rd_addr [RP],
  output logic signed [W-1:0] rd_data [RP],
  output logic [AW:0]         rx_count,   // LLRs received for this codeword (saturates at NMAX)
  output logic                wrapped     // at least one position has been combined
);

  localparam logic signed [W:0] MAXV = (W+1)'((1 << (W-1)) - 1);

  logic signed [W-1:0] mem [NMAX];
  logic [AW-1:0]       k;       // circular-buffer read pointer of the transmitter
  logic [AW-1:0]       pos;
  logic signed [W:0]   sum;
  logic signed [W-1:0] sat;

  always_comb begin
    if (k < AW'(NMIN)) pos = AW'(NMAX - NMIN) + k;
    else               pos = AW'(NMAX - 1) - k;
    sum = {mem[pos][W-1], mem[pos]} + {in_llr[W-1], in_llr};
    if (sum > MAXV)       sat = MAXV[W-1:0];
    else if (sum < -MAXV) sat = -MAXV[W-1:0];
    else                  sat = sum[W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k        <= '0;
      rx_count <= '0;
      wrapped  <= 1'b0;
      for (int i = 0; i < NMAX; i++) mem[i] <= '0;
    end else if (clear) begin
      k        <= '0;
      rx_count <= '0;
      wrapped  <= 1'b0;
      for (int i = 0; i < NMAX; i++) mem[i] <= '0;
    end else if (in_valid) begin
      mem[pos] <= sat;
      k        <= (k == AW'(NMAX - 1)) ? '0 : k + 1'b1;
      if (rx_count == (AW+1)'(NMAX)) wrapped <= 1'b1;
      else                           rx_count <= rx_count + 1'b1;
    end
  end

  always_comb
    for (int r = 0; r < RP; r++) rd_data[r] = mem[rd_addr[r]];

endmodule
