// tb_crc16_serial: shifts random messages with their CRC (computed by
// polynomial long division in the reference package) through the checker:
// the remainder after the message must equal the CRC, the full word must
// give ok = 1, and a word with one flipped bit must give ok = 0.
module tb_crc16_serial;
  import polar_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, en = 0, din = 0, ok;
  logic [15:0] rem;
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  crc16_serial dut (.clk, .rst_n, .clear, .en, .din, .ok, .rem);

  task automatic shift(input bvec_t bits);
    foreach (bits[i]) begin
      en <= 1; din <= bits[i];
      @(posedge clk);
    end
    en <= 0;
    @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      automatic int k = 16 + $urandom_range(400);
      automatic bvec_t m = new[k], w;
      bit [15:0] c;
      foreach (m[i]) m[i] = 1'($urandom);
      c = crc16(m);
      w = new[k + 16];
      foreach (m[i]) w[i] = m[i];
      for (int j = 0; j < 16; j++) w[k + j] = c[15 - j];
      clear <= 1; @(posedge clk); clear <= 0;
      shift(m);
      checks++;
      if (rem != c) begin failures++; $display("remainder %h expected %h", rem, c); end
      clear <= 1; @(posedge clk); clear <= 0;
      shift(w);
      checks++;
      if (!ok) begin failures++; $display("valid word rejected"); end
      w[$urandom_range(k + 15)] ^= 1'b1;
      clear <= 1; @(posedge clk); clear <= 0;
      shift(w);
      checks++;
      if (ok) begin failures++; $display("corrupted word accepted"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
