// tb_mfu: the MFU in the heterogeneous-MIMD configuration (M = 3
// controllers, F = 1 shared FU set, D = 2) with three real SPMIs. Checks the
// FU contention handler: a second kaddv is refused while the adder is owned,
// a kvmul on another SPMI is granted at the same time and runs in parallel,
// a kdotp (multiplier + accumulator) is refused until the kvmul is done, a
// request to a busy controller is refused. Results in all three SPMIs are
// compared with a reference model.
`timescale 1ns/1ps
module tb_mfu;
  import kl_pkg::*;
  localparam int M = 3, F = 1, N = 2, D = 2, WORDS = 64, AW = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req, gnt;
  logic [1:0] req_spmi;
  vop_e req_op;
  logic [31:0] req_a, req_b, req_d, req_scalar, req_size;
  sew_e req_sew;
  logic [4:0] req_sc;
  logic [M-1:0] ctrl_busy, done, a_re, b_re, w_en;
  logic [F-1:0][NU-1:0] unit_busy;
  logic [M-1:0][AW-1:0] a_word, b_word, w_word;
  logic [M-1:0][D-1:0][31:0] a_rdata, b_rdata, w_data;
  logic [M-1:0][D-1:0][3:0] w_be;
  logic [M-1:0] lsu_re, lsu_we, sbusy, sown;
  logic [AW-1:0] lsu_word;
  logic [31:0] lsu_wdata;
  logic [M-1:0][31:0] lsu_rdata;
  logic [31:0] refm [M][N*WORDS];
  int checks = 0, failures = 0, n_par = 0;

  mfu #(.M(M), .F(F), .N(N), .D(D), .SPM_BYTES(WORDS*4)) dut (.*);

  for (genvar s = 0; s < M; s++) begin : g_s
    spmi #(.N(N), .D(D), .SPM_BYTES(WORDS*4)) u_spmi (
      .clk, .rst_n, .claim(1'b0), .claim_lsu(1'b0), .release_i(1'b0), .busy(sbusy[s]), .owner_lsu(sown[s]),
      .lsu_re(lsu_re[s]), .lsu_we(lsu_we[s]), .lsu_word, .lsu_wdata, .lsu_be(4'hF), .lsu_rdata(lsu_rdata[s]),
      .a_re(a_re[s]), .a_word(a_word[s]), .a_rdata(a_rdata[s]), .b_re(b_re[s]), .b_word(b_word[s]),
      .b_rdata(b_rdata[s]), .w_en(w_en[s]), .w_word(w_word[s]), .w_data(w_data[s]), .w_be(w_be[s]));
  end

  always @(posedge clk) if (ctrl_busy[0] && ctrl_busy[1]) n_par++;

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  // present a request for one cycle, return the grant
  task automatic request(int s, vop_e op, int a, int b, int d, int size, output logic g);
    req = 1; req_spmi = 2'(s); req_op = op; req_a = a; req_b = b; req_d = d; req_size = size;
    #1; g = gnt;
    @(posedge clk); #1; req = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic g;
    logic [31:0] acc;
    req = 0; req_spmi = 0; req_op = KADDV; req_a = 0; req_b = 0; req_d = 0; req_scalar = 0;
    req_size = 0; req_sew = SEW32; req_sc = 0; lsu_re = 0; lsu_we = 0; lsu_word = 0; lsu_wdata = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    for (int s = 0; s < M; s++)
      for (int i = 0; i < N * WORDS; i++) begin
        lsu_we = '0; lsu_we[s] = 1; lsu_word = AW'(i); lsu_wdata = $urandom; refm[s][i] = lsu_wdata;
        @(posedge clk); #1;
      end
    lsu_we = 0;
    // 32 words each: long enough to overlap
    request(0, KADDV, 0, 4 * WORDS, 4 * (WORDS + 32), 128, g);  chk("add0 granted", g, 1);
    chk("adder owned", unit_busy[0][U_ADD], 1);
    request(1, KADDV, 0, 4 * WORDS, 4 * (WORDS + 32), 128, g);  chk("add1 refused", g, 0);
    request(1, KVMUL, 0, 4 * WORDS, 4 * (WORDS + 32), 128, g);  chk("mul1 granted", g, 1);
    request(1, KSUBV, 0, 4 * WORDS, 4 * (WORDS + 32), 128, g);  chk("busy ctrl refused", g, 0);
    request(2, KDOTP, 0, 4 * WORDS, 4 * 60, 128, g);            chk("dot2 refused", g, 0);
    chk("ctrl0 and ctrl1 busy", ctrl_busy[1:0], 2'b11);
    while (ctrl_busy[1]) @(posedge clk);
    #1;
    request(2, KDOTP, 0, 4 * WORDS, 4 * 60, 128, g);            chk("dot2 granted", g, 1);
    while (ctrl_busy != 0) @(posedge clk);
    #1;
    chk("units free", unit_busy[0], 0);
    for (int i = 0; i < 32; i++) begin
      refm[0][WORDS + 32 + i] = refm[0][i] + refm[0][WORDS + i];
      refm[1][WORDS + 32 + i] = refm[1][i] * refm[1][WORDS + i];
    end
    acc = 0;
    for (int i = 0; i < 32; i++) acc += refm[2][i] * refm[2][WORDS + i];
    refm[2][60] = acc;
    for (int s = 0; s < M; s++)
      for (int i = 0; i < N * WORDS; i++) begin
        lsu_re = '0; lsu_re[s] = 1; lsu_word = AW'(i);
        @(posedge clk); #1;
        chk($sformatf("spmi%0d word %0d", s, i), lsu_rdata[s], refm[s][i]);
      end
    checks++; if (n_par < 10) begin failures++; $display("FAIL parallel cycles %0d", n_par); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
