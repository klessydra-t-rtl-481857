// tb_spmi: small SPMI (N = 2 SPMs, D = 4 banks, 32 words each). Fills both
// SPMs through the LSU word port (bank interleaver), reads D-word windows
// at every start offset through ports A and B (read rotator), writes D-word
// windows with byte enables at random offsets through the MFU write port
// (write rotator), reads words back through the LSU port, and checks the
// claim / release / busy ownership flag. A reference array is the model.
`timescale 1ns/1ps
module tb_spmi;
  localparam int N = 2, D = 4, WORDS = 32, AW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic claim, claim_lsu, release_i, busy, owner_lsu;
  logic lsu_re, lsu_we, a_re, b_re, w_en;
  logic [AW-1:0] lsu_word, a_word, b_word, w_word;
  logic [31:0] lsu_wdata, lsu_rdata;
  logic [3:0] lsu_be;
  logic [D-1:0][31:0] a_rdata, b_rdata, w_data;
  logic [D-1:0][3:0] w_be;
  logic [31:0] refm [N*WORDS];
  int checks = 0, failures = 0;

  spmi #(.N(N), .D(D), .SPM_BYTES(WORDS*4)) dut (.*);

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    claim = 0; claim_lsu = 0; release_i = 0; lsu_re = 0; lsu_we = 0; a_re = 0; b_re = 0; w_en = 0;
    lsu_word = 0; a_word = 0; b_word = 0; w_word = 0; lsu_wdata = 0; lsu_be = 0; w_data = '0; w_be = '0;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    // ownership
    chk("idle", busy, 0);
    claim = 1; claim_lsu = 1; @(posedge clk); #1; claim = 0;
    chk("busy", busy, 1); chk("owner", owner_lsu, 1);
    // fill through the LSU port
    for (int w = 0; w < N * WORDS; w++) begin
      lsu_we = 1; lsu_word = AW'(w); lsu_wdata = $urandom; lsu_be = 4'hF;
      refm[w] = lsu_wdata;
      @(posedge clk); #1;
    end
    lsu_we = 0;
    release_i = 1; @(posedge clk); #1; release_i = 0;
    chk("released", busy, 0);
    claim = 1; claim_lsu = 0; @(posedge clk); #1; claim = 0;
    chk("owner mfu", owner_lsu, 0);
    // rotated reads: A from SPM0, B from SPM1, every offset
    for (int s = 0; s + D <= WORDS; s++) begin
      a_re = 1; a_word = AW'(s); b_re = 1; b_word = AW'(WORDS + (WORDS - D - s));
      @(posedge clk); #1;
      for (int k = 0; k < D; k++) begin
        chk("rotA", a_rdata[k], refm[s + k]);
        chk("rotB", b_rdata[k], refm[WORDS + (WORDS - D - s) + k]);
      end
    end
    a_re = 0; b_re = 0;
    // rotated writes with byte enables
    for (int i = 0; i < 60; i++) begin
      int s;
      s = $urandom_range(0, 1) * WORDS + $urandom_range(0, WORDS - D);
      w_en = 1; w_word = AW'(s);
      for (int k = 0; k < D; k++) begin
        w_data[k] = $urandom; w_be[k] = 4'($urandom);
        for (int j = 0; j < 4; j++) if (w_be[k][j]) refm[s + k][8*j +: 8] = w_data[k][8*j +: 8];
      end
      @(posedge clk); #1;
    end
    w_en = 0;
    // read back through the LSU port (interleaver)
    for (int w = 0; w < N * WORDS; w++) begin
      lsu_re = 1; lsu_word = AW'(w);
      @(posedge clk); #1;
      chk("lsu read", lsu_rdata, refm[w]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
