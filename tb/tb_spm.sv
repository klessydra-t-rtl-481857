// tb_spm: random reads and writes with independent line addresses per bank
// and random byte enables on a small SPM (D = 2, 16 words), compared with a
// reference array; read data is checked one cycle after the read enable.
`timescale 1ns/1ps
module tb_spm;
  localparam int D = 2, LINES = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic re;
  logic [D-1:0][2:0] raddr, waddr, ra_q;
  logic [D-1:0][31:0] rdata, wdata;
  logic [D-1:0] we;
  logic [D-1:0][3:0] wbe;
  logic [31:0] refm [D][LINES];
  logic [D-1:0][31:0] exp_q;
  logic chk_q;
  int checks = 0, failures = 0;

  spm #(.D(D), .SPM_BYTES(64)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    re = 0; we = '0; chk_q = 0;
    // fill
    for (int l = 0; l < LINES; l++) begin
      for (int b = 0; b < D; b++) begin
        waddr[b] = 3'(l); wdata[b] = $urandom; wbe[b] = 4'hF; we[b] = 1;
        refm[b][l] = wdata[b];
      end
      @(posedge clk); #1;
    end
    for (int i = 0; i < 500; i++) begin
      re = 1'($urandom);
      for (int b = 0; b < D; b++) begin
        raddr[b] = 3'($urandom); waddr[b] = 3'($urandom);
        wdata[b] = $urandom; wbe[b] = 4'($urandom); we[b] = 1'($urandom);
        exp_q[b] = refm[b][raddr[b]];
      end
      @(posedge clk); #1;
      if (re) begin
        checks++;
        if (rdata !== exp_q) begin failures++; $display("FAIL read %h exp %h", rdata, exp_q); end
      end
      for (int b = 0; b < D; b++)
        if (we[b]) for (int k = 0; k < 4; k++)
          if (wbe[b][k]) refm[b][waddr[b]][8*k +: 8] = wdata[b][8*k +: 8];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
