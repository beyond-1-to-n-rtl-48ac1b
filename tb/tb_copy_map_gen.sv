// tb_copy_map_gen: random I_p / I_q masks of equal weight (and the example
// of a length-8 extension); the emitted pairs must be exactly those of the
// reference reverse mapping, in order, and done must come within 2N+2
// cycles of start.
module tb_copy_map_gen;
  import polar_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int N = 64;
  logic         start = 0, busy, pv, done;
  logic [N-1:0] ip, iq;
  logic [5:0]   pp, pq;

  copy_map_gen #(.N(N)) dut (.clk, .rst_n, .start, .ip_mask(ip), .iq_mask(iq), .busy,
                             .pair_valid(pv), .pair_p(pp), .pair_q(pq), .done);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 100; it++) begin
      automatic bvec_t bip = new[N], biq = new[N];
      ivec_t partner;
      automatic int exp_p [$], exp_q [$];
      automatic int w = $urandom_range(N / 4);
      automatic int cyc = 0, got = 0;
      ip = '0; iq = '0;
      for (int c = 0; c < w; c++) begin
        int x;
        do x = $urandom_range(N - 1); while (ip[x] || iq[x]);
        ip[x] = 1;
        do x = $urandom_range(N - 1); while (ip[x] || iq[x]);
        iq[x] = 1;
      end
      for (int i = 0; i < N; i++) begin bip[i] = ip[i]; biq[i] = iq[i]; end
      partner = reverse_map(bip, biq);
      for (int i = 0; i < N; i++) if (ip[i]) begin exp_p.push_back(i); exp_q.push_back(partner[i]); end
      start <= 1; @(posedge clk); start <= 0;
      while (!done && cyc < 2 * N + 10) begin
        @(posedge clk);
        cyc++;
        if (pv) begin
          checks++;
          if (got >= exp_p.size() || int'(pp) != exp_p[got] || int'(pq) != exp_q[got]) begin
            failures++;
            if (failures < 10) $display("it %0d pair %0d: (%0d,%0d) exp (%0d,%0d)", it, got, pp, pq, exp_p[got], exp_q[got]);
          end
          got++;
        end
      end
      checks++;
      if (got != w || cyc > 2 * N + 2) begin failures++; $display("it %0d: %0d pairs of %0d, %0d cycles", it, got, w, cyc); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
