// tb_schemes_workload: the same 2D convolution (8 x 8 image, 3 x 3 filter,
// 32-bit, three harts) run under five coprocessor schemes, each on its own
// core instance (kl_conv_harness):
//   SISD                    M = 1, F = 1, D = 1
//   pure SIMD               M = 1, F = 1, D = 4
//   symmetric MIMD          M = 3, F = 3, D = 1
//   symmetric MIMD + SIMD   M = 3, F = 3, D = 8
//   heterogeneous MIMD      M = 3, F = 1, D = 1
// (the default, heterogeneous MIMD + SIMD with D = 2, is run by the other
// workload tests). Every output of every instance is checked; the cycles
// each scheme needs are printed.
`timescale 1ns/1ps
module tb_schemes_workload;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NS = 5;
  logic [NS-1:0] fin;
  int chk [NS], fail [NS], cyc [NS];

  kl_conv_harness #(.M(1), .F(1), .D(1)) u_sisd  (.clk, .rst_n, .finished(fin[0]), .checks(chk[0]), .failures(fail[0]), .cycles(cyc[0]));
  kl_conv_harness #(.M(1), .F(1), .D(4)) u_simd  (.clk, .rst_n, .finished(fin[1]), .checks(chk[1]), .failures(fail[1]), .cycles(cyc[1]));
  kl_conv_harness #(.M(3), .F(3), .D(1)) u_smimd (.clk, .rst_n, .finished(fin[2]), .checks(chk[2]), .failures(fail[2]), .cycles(cyc[2]));
  kl_conv_harness #(.M(3), .F(3), .D(8)) u_ssimd (.clk, .rst_n, .finished(fin[3]), .checks(chk[3]), .failures(fail[3]), .cycles(cyc[3]));
  kl_conv_harness #(.M(3), .F(1), .D(1)) u_hmimd (.clk, .rst_n, .finished(fin[4]), .checks(chk[4]), .failures(fail[4]), .cycles(cyc[4]));

  int checks = 0, failures = 0;
  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string nm [NS];
    nm = '{"SISD", "pure SIMD D=4", "symmetric MIMD", "symmetric MIMD + SIMD D=8", "heterogeneous MIMD"};
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (&fin);
    @(posedge clk);   // let the last results settle on the ports
    for (int s = 0; s < NS; s++) begin
      $display("%-28s %0d cycles, %0d checks, %0d failures", nm[s], cyc[s], chk[s], fail[s]);
      checks   += chk[s];
      failures += fail[s];
    end
    // the schemes must keep their order of merit: more lanes or more units is
    // never slower here
    checks++;
    if (!(cyc[1] < cyc[0] && cyc[2] < cyc[4] && cyc[3] < cyc[2])) begin
      failures++;
      $display("FAIL unexpected ordering of cycle counts");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
