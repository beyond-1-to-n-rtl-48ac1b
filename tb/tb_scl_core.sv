// tb_scl_core: two instances of the scheduled SCL core.
//  (1) The length-8, K=4 example with x0..x2 punctured, information set
//      {3,5,6,7} and the schedule 5,6,7,3 (lower subtree first), single
//      path. The leaf LLRs and the f/g/h/pass operations used on the way
//      down are compared with values worked out by hand.
//  (2) N = 64, L = 4, 4 lanes: random information sets, copy rings of up to
//      three members, random schedules that include already-known entries,
//      random channel LLRs. After each decode every path's decisions, metric
//      and activity must equal the behavioural reference, and the cycle
//      count must equal the latency formula of the core.
module tb_scl_core;
  import polar_pkg::*;
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

  // ------------------------------------------------------------ instance 1
  localparam int N1 = 8;
  logic       st1 = 0, busy1, done1;
  logic [2:0] sa1, st1_t, ca1, cn1;
  logic [2:0] cha1 [4];
  logic signed [7:0] chl1 [4];
  logic [7:0] u1 [1];
  logic [15:0] pm1 [1];
  logic       act1 [1];
  logic [7:0] kn1;
  int ch1 [N1] = '{0, 0, 0, 5, 7, 3, 9, 4};
  int sch1 [4] = '{5, 6, 7, 3};

  assign st1_t = 3'(sch1[sa1]);
  assign cn1   = ca1;
  always_comb for (int r = 0; r < 4; r++) chl1[r] = 8'(ch1[cha1[r]]);

  scl_core #(.N(8), .L(1), .LANES(2)) dut1 (
    .clk, .rst_n, .start(st1), .info_mask(8'b1110_1000), .sched_len(4'd4),
    .sched_addr(sa1), .sched_t(st1_t), .copy_addr(ca1), .copy_next(cn1),
    .ch_addr(cha1), .ch_llr(chl1), .busy(busy1), .done(done1),
    .u_hat(u1), .pm(pm1), .path_active(act1), .known(kn1));

  // ------------------------------------------------------------ instance 2
  localparam int N = 64, L = 4, LN = 4, W = 8, PMW = 16;
  logic       st2 = 0, busy2, done2;
  logic [5:0] sa2, st2_t, ca2, cn2;
  logic [6:0] slen;
  logic [5:0] cha2 [2*LN];
  logic signed [W-1:0] chl2 [2*LN];
  logic [N-1:0] info2;
  logic [N-1:0] u2 [L];
  logic [PMW-1:0] pm2 [L];
  logic       act2 [L];
  logic [N-1:0] kn2;
  int ch2 [N];
  int sch2 [N];
  int cnx [N];

  assign st2_t = 6'(sch2[sa2]);
  assign cn2   = 6'(cnx[ca2]);
  always_comb for (int r = 0; r < 2 * LN; r++) chl2[r] = W'(ch2[cha2[r]]);

  scl_core #(.N(N), .L(L), .W(W), .PM_W(PMW), .LANES(LN)) dut2 (
    .clk, .rst_n, .start(st2), .info_mask(info2), .sched_len(slen),
    .sched_addr(sa2), .sched_t(st2_t), .copy_addr(ca2), .copy_next(cn2),
    .ch_addr(cha2), .ch_llr(chl2), .busy(busy2), .done(done2),
    .u_hat(u2), .pm(pm2), .path_active(act2), .known(kn2));

  // operations seen by instance 1 during each leaf computation
  string ops1 = "";
  always @(posedge clk)
    if (dut1.state == 3'd2 && dut1.chunk == 0)
      ops1 = {ops1, dut1.op == OP_F ? "F" : dut1.op == OP_G ? "G" : dut1.op == OP_H ? "H" : "P"};

  initial begin
    int exp_llr [4] = '{10, 7, 23, 5};
    string exp_ops [4] = '{"PFG", "PGF", "PGG", "HGG"};
    int nd = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // ---------------- (1) hand-worked example
    st1 <= 1; @(posedge clk); st1 <= 0;
    while (!done1) begin
      @(posedge clk);
      if (dut1.state == 3'd3) begin
        checks++;
        if (int'(dut1.lm[0][1]) != exp_llr[nd] || ops1 != exp_ops[nd]) begin
          failures++;
          $display("example leaf %0d: llr %0d ops %s, expected %0d %s", nd, dut1.lm[0][1], ops1, exp_llr[nd], exp_ops[nd]);
        end
        ops1 = "";
        nd++;
      end
    end
    checks++;
    if (nd != 4 || u1[0] != 8'h00 || kn1 != 8'hff) begin failures++; $display("example: %0d decisions u=%b", nd, u1[0]); end

    // ---------------- (2) random codes against the reference
    for (int it = 0; it < 40; it++) begin
      automatic bvec_t info = new[N];
      automatic ivec_t chv = new[N], sv, cnv = new[N];
      automatic bvec_t ru [];
      automatic int rpm [];
      automatic bit ract [];
      automatic int k = 8 + $urandom_range(40);
      automatic int ninfo = 0, cyc = 0, exp_cyc = 3;
      automatic int pos [$];
      automatic bvec_t kn = new[N];
      for (int i = 0; i < N; i++) begin
        info[i] = 0;
        cnv[i] = i;
        chv[i] = ($urandom_range(5) == 0) ? 0 : int'($urandom_range(2 * 40)) - 40;
      end
      while (ninfo < k) begin
        automatic int x = $urandom_range(N - 1);
        if (!info[x]) begin info[x] = 1; ninfo++; pos.push_back(x); end
      end
      pos.shuffle();
      // rings of two or three members over disjoint info positions
      for (int r = 0; r + 2 < pos.size() && r < 12; r += 3) begin
        if (it % 2) begin
          cnv[pos[r]] = pos[r + 1]; cnv[pos[r + 1]] = pos[r + 2]; cnv[pos[r + 2]] = pos[r];
        end else begin
          cnv[pos[r]] = pos[r + 1]; cnv[pos[r + 1]] = pos[r];
        end
      end
      // schedule: all info positions in random order plus a few frozen ones
      pos.shuffle();
      for (int e = 0; e < 3; e++) begin
        automatic int x = $urandom_range(N - 1);
        if (!info[x]) pos.insert($urandom_range(pos.size()), x);
      end
      sv = new[pos.size()];
      foreach (pos[i]) sv[i] = pos[i];
      for (int i = 0; i < N; i++) begin
        info2[i] = info[i]; ch2[i] = chv[i]; cnx[i] = cnv[i]; sch2[i] = 0;
        kn[i] = !info[i];
      end
      foreach (sv[i]) sch2[i] = sv[i];
      slen = 7'(sv.size());
      // latency formula
      foreach (sv[i]) begin
        if (kn[sv[i]]) exp_cyc += 1;
        else begin
          exp_cyc += 3;
          for (int d = 6; d >= 1; d--) exp_cyc += ((1 << (d - 1)) + LN - 1) / LN;
          kn[sv[i]] = 1;
          for (int c = cnv[sv[i]]; c != sv[i]; c = cnv[c]) begin kn[c] = 1; exp_cyc++; end
        end
      end
      void'(scl_decode(chv, info, sv, cnv, L, W, PMW, ru, rpm, ract));
      st2 <= 1; @(posedge clk); st2 <= 0;
      while (!done2) begin @(posedge clk); cyc++; end
      for (int q = 0; q < L; q++) begin
        automatic bit ok = (pm2[q] == PMW'(rpm[q])) && (act2[q] == ract[q]);
        for (int i = 0; i < N; i++) if (u2[q][i] != ru[q][i]) ok = 0;
        checks++;
        if (!ok) begin
          failures++;
          if (failures < 10) $display("it %0d path %0d: pm %0d/%0d act %0d/%0d", it, q, pm2[q], rpm[q], act2[q], ract[q]);
        end
      end
      checks++;
      if (cyc != exp_cyc) begin failures++; $display("it %0d: %0d cycles, formula %0d", it, cyc, exp_cyc); end
      checks++;
      if (kn2 != '1) begin failures++; $display("it %0d: not all leaves known", it); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
