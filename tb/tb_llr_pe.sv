// tb_llr_pe: random test of the f/g/h/pass lane against integer reference
// arithmetic (min-sum f, saturating g) at W = 8 and W = 6.
module tb_llr_pe;
  import polar_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pe_op_e            op;
  logic signed [7:0] a8, b8, y8;
  logic signed [5:0] a6, b6, y6;
  logic              beta;

  llr_pe #(.W(8)) dut8 (.op(op), .a(a8), .b(b8), .beta(beta), .y(y8));
  llr_pe #(.W(6)) dut6 (.op(op), .a(a6), .b(b6), .beta(beta), .y(y6));

  function automatic int ref_pe(input int o, input int a, input int b, input bit bt, input int w);
    int mx = (1 << (w - 1)) - 1;
    int r, ma, mb;
    ma = a < 0 ? -a : a;
    mb = b < 0 ? -b : b;
    case (o)
      0: r = ((a < 0) ^ (b < 0)) ? -(ma < mb ? ma : mb) : (ma < mb ? ma : mb);
      1: r = b + (bt ? -a : a);
      2: r = bt ? -a : a;
      default: r = b;
    endcase
    if (r > mx) r = mx;
    if (r < -mx) r = -mx;
    return r;
  endfunction

  initial begin
    for (int i = 0; i < 4000; i++) begin
      int ia, ib, io;
      io   = i % 4;
      ia   = int'($urandom_range(254)) - 127;
      ib   = int'($urandom_range(254)) - 127;
      if (i < 16) begin ia = (i & 1) ? 127 : -127; ib = (i & 2) ? 127 : -127; end
      op   = pe_op_e'(io);
      beta = 1'($urandom);
      a8 = 8'(ia); b8 = 8'(ib);
      a6 = 6'(ia % 32); b6 = 6'(ib % 32);
      @(posedge clk);
      checks++;
      if (int'(y8) != ref_pe(io, ia, ib, beta, 8)) begin
        failures++;
        if (failures < 10) $display("W8 mismatch op=%0d a=%0d b=%0d beta=%0d y=%0d", io, ia, ib, beta, y8);
      end
      checks++;
      if (int'(y6) != ref_pe(io, ia % 32, ib % 32, beta, 6)) begin
        failures++;
        if (failures < 10) $display("W6 mismatch op=%0d a=%0d b=%0d y=%0d", io, ia % 32, ib % 32, y6);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
