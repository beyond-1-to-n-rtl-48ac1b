// tb_llr_harq_buffer: NMAX = 32, NMIN = 8 (three nested lengths) and the
// default size. Streams transmissions of random lengths into the buffer and
// compares every position with a reference buffer filled in transmitter
// order (mother block ascending, then backwards from NMAX-NMIN-1), with
// positions not yet received at 0 and wrapped repeats added with saturation.
module tb_llr_harq_buffer;
  import polar_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NM = 32, NN = 8, W = 6, RP = 4;
  logic              clear = 0, iv = 0;
  logic signed [W-1:0] il = 0;
  logic [4:0]        ra [RP];
  logic signed [W-1:0] rd [RP];
  logic [5:0]        rxc;
  logic              wr;

  llr_harq_buffer #(.NMAX(NM), .NMIN(NN), .W(W), .RP(RP)) dut (
    .clk, .rst_n, .clear, .in_valid(iv), .in_llr(il), .rd_addr(ra), .rd_data(rd),
    .rx_count(rxc), .wrapped(wr));

  // default-size instance: only the first-transmission placement is checked
  logic              iv2 = 0;
  logic signed [7:0] il2 = 0;
  logic [9:0]        ra2 [64];
  logic signed [7:0] rd2 [64];
  logic [10:0]       rxc2;
  logic              wr2;
  llr_harq_buffer dut2 (.clk, .rst_n, .clear(1'b0), .in_valid(iv2), .in_llr(il2),
                        .rd_addr(ra2), .rd_data(rd2), .rx_count(rxc2), .wrapped(wr2));

  int refbuf [NM];
  int order [NM];
  int seen_wrap = 0;

  initial begin
    for (int k = 0; k < NM; k++) order[k] = (k < NN) ? (NM - NN + k) : (NM - NN - 1 - (k - NN));
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cw = 0; cw < 30; cw++) begin
      automatic int k = 0;
      clear <= 1; @(posedge clk); clear <= 0;
      foreach (refbuf[i]) refbuf[i] = 0;
      for (int t = 0; t < 4; t++) begin
        automatic int e = (t == 0) ? NN : 1 + $urandom_range(NM / 2);
        for (int i = 0; i < e; i++) begin
          automatic int v = int'($urandom_range(2 * 31)) - 31;
          iv <= 1; il <= W'(v);
          refbuf[order[k % NM]] = sat(refbuf[order[k % NM]] + v, W);
          k++;
          @(posedge clk);
        end
        iv <= 0;
        @(posedge clk);
        for (int a = 0; a < NM; a += RP) begin
          for (int r = 0; r < RP; r++) ra[r] = 5'(a + r);
          #1;
          for (int r = 0; r < RP; r++) begin
            checks++;
            if (int'(rd[r]) != refbuf[a + r]) begin
              failures++;
              if (failures < 10) $display("cw %0d pos %0d: %0d expected %0d", cw, a + r, rd[r], refbuf[a + r]);
            end
          end
        end
        checks++;
        if (wr != (k > NM)) begin failures++; $display("wrapped flag %0d after %0d LLRs", wr, k); end
        if (wr) seen_wrap++;
      end
    end
    // default size: 512 LLRs land on positions 512..1023, the rest stay 0
    for (int i = 0; i < 512; i++) begin
      iv2 <= 1; il2 <= 8'((i % 100) + 1);
      @(posedge clk);
    end
    iv2 <= 0;
    @(posedge clk);
    for (int a = 0; a < 1024; a += 64) begin
      for (int r = 0; r < 64; r++) ra2[r] = 10'(a + r);
      #1;
      for (int r = 0; r < 64; r++) begin
        automatic int e = (a + r >= 512) ? ((a + r - 512) % 100) + 1 : 0;
        checks++;
        if (int'(rd2[r]) != e) begin failures++; if (failures < 20) $display("default pos %0d: %0d expected %0d", a + r, rd2[r], e); end
      end
    end
    checks++;
    if (seen_wrap == 0) begin failures++; $display("no wrap-around exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
