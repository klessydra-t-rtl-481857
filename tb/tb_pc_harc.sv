// tb_pc_harc: checks that the hart context counter rotates 0,1,2,0,... one
// step per cycle, that each hart's PC starts at the boot address and grows
// by 4 per fetch of that hart, and that a redirect from execute replaces the
// PC seen by that hart's next fetch without touching the other harts.
`timescale 1ns/1ps
module tb_pc_harc;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       fetch_valid, redir;
  logic [1:0] harc_if, redir_harc;
  logic [31:0] pc_if, redir_pc;
  int checks = 0, failures = 0;
  logic [31:0] exp_pc [3];
  int exp_h;

  pc_harc #(.HARTS(3), .BOOT_ADDR(32'h80)) dut (.*);

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    redir = 0; redir_harc = 0; redir_pc = 0;
    for (int h = 0; h < 3; h++) exp_pc[h] = 32'h80;
    exp_h = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    @(posedge clk);
    #1;
    for (int c = 0; c < 60; c++) begin
      chk("valid", {31'd0, fetch_valid}, 1);
      chk("harc", {30'd0, harc_if}, exp_h);
      chk("pc", pc_if, exp_pc[exp_h]);
      exp_pc[exp_h] = exp_pc[exp_h] + 4;
      // redirect the hart that was fetched two cycles ago (it is in execute)
      redir = (c % 5 == 2);
      redir_harc = 2'((exp_h + 1) % 3);
      redir_pc = 32'h1000 + c * 16;
      if (redir) exp_pc[(exp_h + 1) % 3] = redir_pc;
      exp_h = (exp_h + 1) % 3;
      @(posedge clk);
      #1;
      redir = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
