// tb_regfile: writes random values to random registers of the three harts
// and checks all three read ports against a reference copy, including that
// x0 always reads zero and that harts do not see each other's registers.
`timescale 1ns/1ps
module tb_regfile;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [1:0] rharc, wharc;
  logic [4:0] ra1, ra2, ra3, wa;
  logic [31:0] rd1, rd2, rd3, wd;
  logic we;
  logic [31:0] ref_rf [3][32];
  int checks = 0, failures = 0;

  regfile #(.HARTS(3)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1;
    for (int h = 0; h < 3; h++)
      for (int r = 0; r < 32; r++) begin
        wharc = 2'(h); wa = 5'(r); wd = $urandom;
        ref_rf[h][r] = (r == 0) ? 0 : wd;
        @(posedge clk); #1;
      end
    for (int i = 0; i < 600; i++) begin
      we = $urandom_range(0, 1);
      wharc = 2'($urandom_range(0, 2)); wa = 5'($urandom); wd = $urandom;
      rharc = 2'($urandom_range(0, 2));
      ra1 = 5'($urandom); ra2 = 5'($urandom); ra3 = 5'($urandom);
      #1;
      checks += 3;
      if (rd1 !== ref_rf[rharc][ra1]) begin failures++; $display("FAIL rd1"); end
      if (rd2 !== ref_rf[rharc][ra2]) begin failures++; $display("FAIL rd2"); end
      if (rd3 !== ref_rf[rharc][ra3]) begin failures++; $display("FAIL rd3"); end
      @(posedge clk);
      if (we && wa != 0) ref_rf[wharc][wa] = wd;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
