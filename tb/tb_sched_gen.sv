// tb_sched_gen: checks the greedy channel-aware scheduler.
//  (1) Length 8, information leaves {3,5,6,7} (u1..u4 of the K = 4
//      example), eps = 0.3, values worked by hand. With 5 positions
//      received (x0..x2 punctured): Z(u2) = eps^2(2-eps)^2 = 0.26 is the
//      smallest; then Z(u4|u2) = eps^2 = 0.09 (lower leaf by pass) beats
//      Z(u3|u2) = 2eps^2-eps^4 = 0.17; last u1. Order 5, 7, 6, 3. With 7 or
//      8 received u1 = (2eps-eps^2)^4 comes first, then u2, then again the
//      lower leaf u4 (eps^4) before u3 (2eps^4-eps^8): 3, 5, 7, 6.
//  (2) N = 64, 4 lanes: random information sets, random copy rings of two or
//      three members (some with a frozen member, which must not be
//      scheduled), received sets from sequential puncturing and random
//      ones, random eps. The emitted order must equal the fixed-point
//      reference schedule entry for entry, and the cycle count from start
//      to done must equal 1 + sum over picks of (X + ring size) + X with
//      X = 2 + log2(N)*N/(2*lanes) + N/lanes.
module tb_sched_gen;
  import polar_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int ZW = 16, LN = 4;
  localparam longint ONE = (longint'(1) << ZW) - 1;

  // length-8 instance
  logic          s8 = 0, busy8, ov8, done8;
  logic [7:0]    info8, rx8;
  logic [2:0]    ca8, oi8;
  logic [ZW-1:0] eps8;
  sched_gen #(.N(8), .ZW(ZW), .LANES(LN)) dut8 (
    .clk, .rst_n, .start(s8), .info_mask(info8), .rx_mask(rx8), .eps(eps8),
    .copy_addr(ca8), .copy_next(ca8), .busy(busy8), .out_valid(ov8), .out_idx(oi8), .done(done8)
  );

  // length-64 instance
  localparam int N = 64;
  logic          s64 = 0, busy64, ov64, done64;
  logic [N-1:0]  info64, rx64;
  logic [5:0]    ca64, oi64;
  logic [ZW-1:0] eps64;
  int            ring [N];
  sched_gen #(.N(N), .ZW(ZW), .LANES(LN)) dut64 (
    .clk, .rst_n, .start(s64), .info_mask(info64), .rx_mask(rx64), .eps(eps64),
    .copy_addr(ca64), .copy_next(6'(ring[ca64])), .busy(busy64), .out_valid(ov64), .out_idx(oi64),
    .done(done64)
  );

  int n_ring3 = 0, n_frozen_member = 0, n_nonnatural = 0;

  initial begin
    info8 = 8'b1110_1000;
    rx8   = '0;
    eps8  = ZW'(longint'(0.3 * real'(ONE)));
    info64 = '0; rx64 = '0; eps64 = '0;
    foreach (ring[i]) ring[i] = i;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // (1) the K = 4 example
    for (int e = 5; e <= 8; e++) begin
      automatic int got [$];
      automatic int exp [4];
      if (e == 5) exp = '{5, 7, 6, 3}; else exp = '{3, 5, 7, 6};
      for (int p = 0; p < 8; p++) rx8[p] = (p >= 8 - e);
      s8 = 1; @(negedge clk); s8 = 0;
      while (!done8) begin
        if (ov8) got.push_back(int'(oi8));
        @(negedge clk);
      end
      if (e == 6) continue;  // an exact tie between u1 and u2 at this length
      checks++;
      if (got.size() != 4 || got[0] != exp[0] || got[1] != exp[1] || got[2] != exp[2] || got[3] != exp[3]) begin
        failures++;
        $display("length 8, E=%0d: got %p", e, got);
      end
    end

    // (2) random schedules at N = 64
    for (int it = 0; it < 60; it++) begin
      automatic bvec_t info = new[N];
      automatic ivec_t zc = new[N], cn = new[N], exp;
      automatic int got [$];
      automatic int cyc = 0, expcyc, x;
      automatic int k = 8 + $urandom_range(40);
      automatic longint e = longint'(real'(ONE) * (0.05 + 0.6 * real'($urandom_range(1000)) / 1000.0));
      automatic int erx = 32 + $urandom_range(32);
      info64 = '0;
      for (int c = 0; c < k; c++) begin
        int p;
        do p = $urandom_range(N - 1); while (info64[p]);
        info64[p] = 1;
      end
      // rings over information leaves; now and then one frozen member
      foreach (ring[i]) ring[i] = i;
      for (int r = 0; r < 6; r++) begin
        automatic int m = 2 + $urandom_range(1);
        automatic int mem [$];
        for (int c = 0; c < m; c++) begin
          automatic int p, tries = 0;
          do begin
            p = $urandom_range(N - 1);
            tries++;
          end while ((ring[p] != p || (!info64[p] && !(c == m - 1 && r == 0 && it % 3 == 0)) ||
                      (p inside {mem})) && tries < 1000);
          if (tries < 1000) mem.push_back(p);
        end
        if (mem.size() >= 2) begin
          for (int c = 0; c < mem.size(); c++) ring[mem[c]] = mem[(c + 1) % mem.size()];
          if (mem.size() == 3) n_ring3++;
          foreach (mem[c]) if (!info64[mem[c]]) n_frozen_member++;
        end
      end
      // received set: sequential puncturing or random
      for (int p = 0; p < N; p++)
        rx64[p] = (it % 2 == 0) ? (p >= N - erx) : 1'($urandom_range(3) != 0);
      eps64 = ZW'(e);
      for (int p = 0; p < N; p++) begin
        info[p] = info64[p];
        zc[p]   = rx64[p] ? int'(e) : int'(ONE);
        cn[p]   = ring[p];
      end
      exp = greedy_schedule_fx(zc, info, cn, ZW);
      // expected cycles
      x = 2 + 6 * N / (2 * LN) + N / LN;
      expcyc = 1 + x;
      begin
        automatic bit kn [N];
        for (int p = 0; p < N; p++) kn[p] = !info[p];
        for (int i = 0; i < exp.size(); i++) begin
          if (!kn[exp[i]]) begin
            automatic int m = 1;
            for (int w = ring[exp[i]]; w != exp[i]; w = ring[w]) begin
              m++;
              kn[w] = 1;
            end
            kn[exp[i]] = 1;
            expcyc += x + m;
          end
        end
      end
      begin
        automatic bit natural = 1;
        for (int i = 1; i < exp.size(); i++) if (exp[i] < exp[i - 1]) natural = 0;
        if (!natural) n_nonnatural++;
      end
      s64 = 1; @(negedge clk); s64 = 0;
      cyc = 1;
      while (!done64) begin
        if (ov64) got.push_back(int'(oi64));
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (got.size() != exp.size()) begin
        failures++;
        $display("it %0d: %0d entries, expected %0d", it, got.size(), exp.size());
      end else begin
        automatic bit same = 1;
        foreach (exp[i]) if (got[i] != exp[i]) same = 0;
        if (!same) begin
          failures++;
          $display("it %0d: order differs\n got %p\n exp %p", it, got, exp);
        end
      end
      checks++;
      if (cyc != expcyc) begin
        failures++;
        $display("it %0d: %0d cycles, expected %0d", it, cyc, expcyc);
      end
      @(negedge clk);
    end

    checks++;
    if (n_ring3 == 0 || n_frozen_member == 0 || n_nonnatural == 0) begin
      failures++;
      $display("coverage: rings of 3 %0d, frozen members %0d, non-natural orders %0d",
               n_ring3, n_frozen_member, n_nonnatural);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
