// tb_rateless_polar_decoder: end-to-end test of the decoder at reduced size
// (N_max = 128, N_min = 64, L = 4, 4 lanes, K = 48 with a 16-bit CRC).
// The testbench builds the nested code (mother block in the lower half,
// information sets from BEC Bhattacharyya parameters), loads the masks,
// lets the chip generate the reverse bit mapping, provides the greedy
// channel-aware schedule for each received length (for every other codeword the
// chip's own scheduler computes it, checked against the fixed-point
// reference through the decode that follows), encodes random messages
// with their CRC and bit copies, and sends them as one or more
// transmissions over a BPSK/AWGN channel. Every decode is compared bit for
// bit with the behavioural reference (decisions, metric, CRC verdict);
// noiseless codewords must also return the message. Each mechanism of the
// design is counted and must occur at least once.
module tb_rateless_polar_decoder;
  import polar_pkg::*;
  import polar_ref_pkg::*;

  localparam int NMAX = 128, NMIN = 64, L = 4, LANES = 4, W = 8, PMW = 16;
  localparam int K = 48, NCW = 60;
  localparam int LOGN = $clog2(NMAX);

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic              cfg_we = 0, map_start = 0, map_busy, map_done;
  logic [2:0]        cfg_sel = 0;
  logic [LOGN-1:0]   cfg_addr = 0;
  logic [LOGN:0]     cfg_data = 0;
  logic              llr_clear = 0, llr_valid = 0, llr_wrapped;
  logic signed [W-1:0] llr_in = 0;
  logic [LOGN:0]     rx_count;
  logic              sched_start = 0, sched_busy, sched_done;
  logic [15:0]       sched_eps = 0;
  logic              start = 0, busy, done, crc_ok;
  logic [NMAX-1:0]   dec_u;
  logic [PMW-1:0]    dec_pm;

  rateless_polar_decoder #(.NMAX(NMAX), .NMIN(NMIN), .L(L), .W(W), .PM_W(PMW), .LANES(LANES)) dut (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_addr, .cfg_data, .map_start, .map_busy, .map_done,
    .sched_start, .sched_eps, .sched_busy, .sched_done,
    .llr_clear, .llr_valid, .llr_in, .rx_count, .llr_wrapped,
    .start, .busy, .done, .crc_ok, .dec_u, .dec_pm);

  // ------------------------------------------------------------ mechanism counters
  int n_f = 0, n_g = 0, n_h = 0, n_pass = 0, n_skip = 0, n_copy = 0, n_prune = 0;
  int n_pairs = 0, n_crc_fail = 0, n_crc_other = 0, n_wrap = 0, n_punct = 0, n_hwsched = 0;
  always @(posedge clk) begin
    if (dut.u_core.state == 3'd2 && dut.u_core.chunk == 0)
      case (dut.u_core.op)
        OP_F: n_f++;
        OP_G: n_g++;
        OP_H: n_h++;
        default: n_pass++;
      endcase
    if (dut.u_core.state == 3'd1 && dut.u_core.p < dut.sched_len &&
        dut.u_core.known[dut.u_core.sched_t]) n_skip++;
    if (dut.u_core.state == 3'd4 && dut.u_core.cw != dut.u_core.tgt) n_copy++;
    if (dut.u_core.state == 3'd3 && dut.u_core.path_active[L-1]) n_prune++;
    if (dut.pair_valid) n_pairs++;
    if (dut.tstate == 2'd3 && dut.pick_ok && dut.pick != 0) n_crc_other++;
  end

  task automatic cfg(input cfg_sel_e s, input int a, input int d);
    cfg_we = 1; cfg_sel = 3'(s); cfg_addr = LOGN'(a); cfg_data = (LOGN+1)'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  function automatic real gauss();
    real u1 = (real'($urandom_range(1000000)) + 1.0) / 1000002.0;
    real u2 = real'($urandom_range(1000000)) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307 * u2);
  endfunction

  initial begin
    bvec_t i0s, i1, ip, iq, info, msgm;
    ivec_t partner, cnext, msgpos;
    rvec_t z;
    int order [NMAX];
    for (int k = 0; k < NMAX; k++) order[k] = (k < NMIN) ? (NMAX - NMIN + k) : (NMAX - 1 - k);

    // ---------------- nested construction (design epsilon 0.5)
    z = new[NMIN];
    foreach (z[i]) z[i] = 0.5;
    begin
      automatic bvec_t m0 = best_set(bhat(z), K);
      i0s = new[NMAX];
      for (int i = 0; i < NMIN; i++) i0s[NMAX - NMIN + i] = m0[i];
    end
    z = new[NMAX];
    foreach (z[i]) z[i] = 0.5;
    i1 = best_set(bhat(z), K);
    ip = new[NMAX]; iq = new[NMAX]; info = new[NMAX];
    msgpos = new[K];
    begin
      automatic int c = 0;
      for (int i = 0; i < NMAX; i++) begin
        ip[i] = i0s[i] & !i1[i];
        iq[i] = i1[i] & !i0s[i];
        info[i] = i0s[i] | i1[i];
        if (i0s[i]) msgpos[c++] = i;
      end
    end
    partner = reverse_map(ip, iq);
    cnext = new[NMAX];
    foreach (cnext[i]) cnext[i] = (partner[i] >= 0) ? partner[i] : i;

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NMAX; i++) begin
      cfg(CFG_INFO, i, info[i]);
      cfg(CFG_MSG, i, i0s[i]);
      cfg(CFG_IP, i, ip[i]);
      cfg(CFG_IQ, i, iq[i]);
    end
    map_start = 1; @(negedge clk); map_start = 0;
    while (!map_done) @(negedge clk);
    @(negedge clk);
    for (int i = 0; i < NMAX; i++) begin
      checks++;
      if (int'(dut.copy_tab[i]) != cnext[i]) begin failures++; $display("copy table %0d: %0d expected %0d", i, dut.copy_tab[i], cnext[i]); end
    end

    // ---------------- codewords
    for (int cw = 0; cw < NCW; cw++) begin
      automatic bvec_t u = new[NMAX], x, msg = new[K - 16], mb = new[K];
      automatic bit [15:0] crc;
      automatic int ntx = 1 + (cw % 3);
      automatic int etot = 0, sent = 0;
      automatic int etx [3];
      automatic real sigma = (cw % 4 == 3) ? 1.0 : (cw % 4 == 2) ? 0.8 : (cw % 4 == 1) ? 0.55 : 0.0;
      automatic bit noise_only = (cw % 10 == 9);
      automatic ivec_t chref = new[NMAX], sched;
      automatic rvec_t zc = new[NMAX];
      automatic bvec_t ru [];
      automatic int rpm [];
      automatic bit ract [];
      automatic int rpick = 0;
      automatic bit rok = 0;
      // lengths: first transmission is the mother block, then increments
      etx[0] = NMIN;
      etx[1] = 1 + $urandom_range(NMIN / 2);
      etx[2] = (cw % 7 == 6) ? NMAX : 1 + $urandom_range(NMIN / 2);
      for (int t = 0; t < ntx; t++) etot += etx[t];
      // message and codeword
      foreach (msg[i]) msg[i] = 1'($urandom);
      crc = crc16(msg);
      foreach (msg[i]) mb[i] = msg[i];
      for (int j = 0; j < 16; j++) mb[K - 16 + j] = crc[15 - j];
      foreach (msgpos[i]) u[msgpos[i]] = mb[i];
      for (int i = 0; i < NMAX; i++) if (iq[i]) u[i] = u[partner[i]];
      x = polar_encode(u);
      // transmissions
      llr_clear = 1; @(negedge clk); llr_clear = 0;
      foreach (chref[i]) chref[i] = 0;
      for (int t = 0; t < ntx; t++) begin
        for (int e = 0; e < etx[t]; e++) begin
          automatic int p = order[sent % NMAX];
          automatic real y = (noise_only ? 0.0 : (x[p] ? -1.0 : 1.0)) + sigma * gauss() + (noise_only ? gauss() : 0.0);
          automatic int q = sat(int'(y * 8.0), W);
          chref[p] = sat(chref[p] + q, W);
          llr_valid = 1; llr_in = W'(q);
          @(negedge clk);
          sent++;
        end
        llr_valid = 0;
        @(negedge clk);
      end
      if (llr_wrapped) n_wrap++;
      if (etot < NMAX) n_punct++;
      // schedule for what has been received
      foreach (zc[i]) zc[i] = 1.0;
      for (int k = 0; k < etot && k < NMAX; k++) zc[order[k]] = 0.3;
      if (cw % 2 == 1) begin
        // on-chip scheduler, compared with its fixed-point reference
        automatic ivec_t zfx = new[NMAX];
        automatic longint one = (longint'(1) << 16) - 1;
        automatic longint e = longint'(0.3 * real'(one));
        foreach (zfx[i]) zfx[i] = int'(one);
        for (int k = 0; k < etot && k < NMAX; k++) zfx[order[k]] = int'(e);
        sched = greedy_schedule_fx(zfx, info, cnext, 16);
        sched_eps = 16'(e);
        sched_start = 1; @(negedge clk); sched_start = 0;
        while (!sched_done) @(negedge clk);
        @(negedge clk);
        n_hwsched++;
        checks++;
        if (int'(dut.sched_len) != sched.size()) begin
          failures++;
          $display("cw %0d: on-chip schedule has %0d entries, expected %0d", cw, dut.sched_len, sched.size());
        end
      end else begin
        sched = greedy_schedule(zc, info, partner);
        foreach (sched[i]) cfg(CFG_SCHED, i, sched[i]);
        cfg(CFG_LEN, 0, sched.size());
      end
      // reference decode and CRC choice
      void'(scl_decode(chref, info, sched, cnext, L, W, PMW, ru, rpm, ract));
      for (int q = L - 1; q >= 0; q--) begin
        automatic bvec_t m = new[K - 16];
        automatic bit [15:0] c2;
        for (int i = 0; i < K - 16; i++) m[i] = ru[q][msgpos[i]];
        for (int j = 0; j < 16; j++) c2[15 - j] = ru[q][msgpos[K - 16 + j]];
        if (ract[q] && crc16(m) == c2) begin rpick = q; rok = 1; end
      end
      // decode
      start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      begin
        automatic bit same = (crc_ok == rok) && (dec_pm == PMW'(rpm[rpick]));
        for (int i = 0; i < NMAX; i++) if (dec_u[i] != ru[rpick][i]) same = 0;
        checks++;
        if (!same) begin
          failures++;
          $display("cw %0d (E=%0d): differs from reference (crc %0d/%0d pm %0d/%0d)", cw, etot, crc_ok, rok, dec_pm, rpm[rpick]);
        end
      end
      if (!crc_ok) n_crc_fail++;
      if (sigma == 0.0 && !noise_only) begin
        automatic bit good = crc_ok;
        foreach (msgpos[i]) if (dec_u[msgpos[i]] != mb[i]) good = 0;
        checks++;
        if (!good) begin failures++; $display("cw %0d (E=%0d): noiseless codeword not recovered", cw, etot); end
      end
      @(negedge clk);
    end

    $display("mechanisms: f=%0d g=%0d h=%0d pass=%0d skip=%0d copy=%0d prune=%0d pairs=%0d crc_fail=%0d crc_other_path=%0d wrap=%0d punctured=%0d on_chip_schedule=%0d",
             n_f, n_g, n_h, n_pass, n_skip, n_copy, n_prune, n_pairs, n_crc_fail, n_crc_other, n_wrap, n_punct, n_hwsched);
    begin
      automatic int cnt [13] = '{n_f, n_g, n_h, n_pass, n_skip, n_copy, n_prune, n_pairs, n_crc_fail, n_crc_other, n_wrap, n_punct, n_hwsched};
      foreach (cnt[i]) begin
        checks++;
        if (cnt[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
