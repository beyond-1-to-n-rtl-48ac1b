// copy_map_gen: reverse information-bit mapping between nested blocks.
//
// When the code is extended from length N to 2N, the positions I_p that are
// information bits only in the mother block and the new positions I_q of the
// extension block carry the same information bits. The pairing is reversed:
// the i-th smallest index of I_p is paired with the i-th largest index of
// I_q, so that the bits decided first in the mother block land on the
// extension positions that sequential puncturing keeps longest.
// Implementation: one pointer scans ip_mask upwards from 0 and another scans
// iq_mask downwards from N-1, each advancing by one position per cycle until
// both rest on a set bit; then the pair (pair_p, pair_q) is emitted with
// pair_valid for one cycle and both advance. done pulses when either
// pointer runs out, at most 2N+1 cycles after start (every cycle moves at
// least one pointer). The pairing rule is the
// design's; running it on the chip as a scanner is this implementation's.
module copy_map_gen #(
  parameter int unsigned N    = 1024,
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [N-1:0]    ip_mask,
  input  logic [N-1:0]    iq_mask,
  output logic            busy,
  output logic            pair_valid,
  output logic [LOGN-1:0] pair_p,
  output logic [LOGN-1:0] pair_q,
  output logic            done
);

  logic [LOGN:0] a;   // next I_p candidate, counts up to N
  logic [LOGN:0] bq;  // next I_q candidate plus one, counts down to 0
  logic          fa, fb, a_end, b_end;

  always_comb begin
    a_end = (a == (LOGN+1)'(N));
    b_end = (bq == '0);
    fa    = !a_end && ip_mask[a[LOGN-1:0]];
    fb    = !b_end && iq_mask[LOGN'(bq - 1'b1)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      a          <= '0;
      bq         <= '0;
      pair_valid <= 1'b0;
      pair_p     <= '0;
      pair_q     <= '0;
      done       <= 1'b0;
    end else begin
      pair_valid <= 1'b0;
      done       <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          a    <= '0;
          bq   <= (LOGN+1)'(N);
        end
      end else if (a_end || b_end) begin
        busy <= 1'b0;
        done <= 1'b1;
      end else begin
        if (fa && fb) begin
          pair_valid <= 1'b1;
          pair_p     <= a[LOGN-1:0];
          pair_q     <= LOGN'(bq - 1'b1);
        end
        if (!fa || fb) a  <= a + 1'b1;
        if (!fb || fa) bq <= bq - 1'b1;
      end
    end
  end

endmodule
