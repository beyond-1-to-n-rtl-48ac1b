// tb_path_sorter: random metric/validity sets (with many ties) for L = 8 and
// L = 2; each slot must hold the candidate a reference selection sort picks
// (valid first, then smaller metric, then smaller index).
module tb_path_sorter;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int L = 8, C = 16;
  logic [15:0] pm [C];
  logic        v  [C];
  logic [3:0]  sel [L];
  logic        sv  [L];
  logic [15:0] spm [L];

  path_sorter dut (.pm_in(pm), .valid_in(v), .sel(sel), .sel_valid(sv), .sel_pm(spm));

  initial begin
    for (int it = 0; it < 3000; it++) begin
      bit taken [C];
      for (int c = 0; c < C; c++) begin
        pm[c] = (it % 2) ? 16'($urandom_range(7)) : 16'($urandom);
        v[c]  = (it % 3 == 0) ? 1'b1 : 1'($urandom);
        taken[c] = 0;
      end
      @(posedge clk);
      for (int s = 0; s < L; s++) begin
        automatic int bc = -1;
        for (int c = 0; c < C; c++) begin
          if (taken[c]) continue;
          if (bc < 0) bc = c;
          else if (v[c] != v[bc]) begin if (v[c]) bc = c; end
          else if (pm[c] < pm[bc]) bc = c;
        end
        taken[bc] = 1;
        checks++;
        if (int'(sel[s]) != bc || sv[s] != v[bc] || spm[s] != pm[bc]) begin
          failures++;
          if (failures < 10) $display("slot %0d: got %0d expected %0d", s, sel[s], bc);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
