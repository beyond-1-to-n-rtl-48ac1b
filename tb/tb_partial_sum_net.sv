// tb_partial_sum_net: checks every level of the partial-sum network against
// the definition beta[l][b+c] = XOR of u[b+r] over r with c a bit-subset of
// r (G = F^{(x)l}), for random and single-bit vectors, N = 64 and N = 1024.
module tb_partial_sum_net;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int N1 = 64, N2 = 1024;
  logic [N1-1:0] u1;
  logic [N1-1:0] b1 [7];
  logic [N2-1:0] u2;
  logic [N2-1:0] b2 [11];

  partial_sum_net #(.N(N1)) dut1 (.u(u1), .beta(b1));
  partial_sum_net dut2 (.u(u2), .beta(b2));

  initial begin
    for (int v = 0; v < 200; v++) begin
      for (int i = 0; i < N1; i++) u1[i] = (v < N1) ? (i == v) : 1'($urandom);
      @(posedge clk);
      for (int l = 0; l <= 6; l++) begin
        automatic int sz = 1 << l;
        automatic bit ok = 1;
        for (int i = 0; i < N1; i++) begin
          automatic int b = i - (i % sz), c = i % sz;
          automatic bit e = 0;
          for (int r = 0; r < sz; r++) if ((c & ~r) == 0) e ^= u1[b + r];
          if (b1[l][i] != e) ok = 0;
        end
        checks++;
        if (!ok) begin failures++; if (failures < 10) $display("N=64 level %0d vector %0d wrong", l, v); end
      end
    end
    for (int v = 0; v < 4; v++) begin
      for (int i = 0; i < N2; i++) u2[i] = 1'($urandom);
      @(posedge clk);
      for (int l = 0; l <= 10; l++) begin
        automatic int sz = 1 << l;
        automatic bit ok = 1;
        for (int i = 0; i < N2; i++) begin
          automatic int b = i - (i % sz), c = i % sz;
          automatic bit e = 0;
          for (int r = c; r < sz; r++) if ((c & ~r) == 0) e ^= u2[b + r];
          if (b2[l][i] != e) ok = 0;
        end
        checks++;
        if (!ok) begin failures++; $display("N=1024 level %0d wrong", l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
