// tb_mfu_ctrl: one controller driving a real SPMI (N = 2, D = 2, 64 words
// per SPM) and one FU set. The scratchpads are filled through the LSU port;
// then vector instructions run with unaligned sources and destinations, a
// partial last word, both sources in one SPM, a scalar from the scratchpad,
// 16-bit elements and a reduction. Every SPM word is read back and compared
// with a reference model (words outside the destination must be unchanged).
// Timing checks: first write three cycles after the start cycle (4th cycle),
// busy for n/D + 2 cycles (2n/D + 2 with both sources in one SPM, + 2 more
// for a scratchpad scalar).
`timescale 1ns/1ps
module tb_mfu_ctrl;
  import kl_pkg::*;
  localparam int N = 2, D = 2, WORDS = 64, AW = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  vop_e s_op;
  logic [31:0] s_a, s_b, s_d, s_scalar, s_size;
  sew_e s_sew;
  logic [4:0] s_sc;
  logic a_re, b_re, w_en;
  logic [AW-1:0] a_word, b_word, w_word;
  logic [D-1:0][31:0] a_rdata, b_rdata, w_data, fu_a, fu_b, fu_y;
  logic [D-1:0][3:0] w_be;
  vop_e fu_op; sew_e fu_sew; logic [4:0] fu_sc; logic [31:0] fu_acc;
  logic lsu_re, lsu_we, sbusy, sowner;
  logic [AW-1:0] lsu_word;
  logic [31:0] lsu_wdata, lsu_rdata;
  logic [D-1:0][31:0] add_y, shf_y, mul_y, cmp_y;
  vop_e uop [NU]; sew_e usew [NU]; logic [4:0] usc [NU];
  logic [31:0] refm [N*WORDS];
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  mfu_ctrl #(.N(N), .D(D), .SPM_BYTES(WORDS*4)) dut (.*);

  spmi #(.N(N), .D(D), .SPM_BYTES(WORDS*4)) u_spmi (
    .clk, .rst_n, .claim(1'b0), .claim_lsu(1'b0), .release_i(1'b0), .busy(sbusy), .owner_lsu(sowner),
    .lsu_re, .lsu_we, .lsu_word, .lsu_wdata, .lsu_be(4'hF), .lsu_rdata,
    .a_re, .a_word, .a_rdata, .b_re, .b_word, .b_rdata, .w_en, .w_word, .w_data, .w_be);

  always_comb for (int u = 0; u < NU; u++) begin uop[u] = fu_op; usew[u] = fu_sew; usc[u] = fu_sc; end
  mfu_fu #(.D(D)) u_fu (.u_a({NU{fu_a}}), .u_b({NU{fu_b}}), .u_op(uop), .u_sew(usew), .u_sc(usc),
                        .add_y, .shf_y, .mul_y, .cmp_y, .acc_y(fu_acc));
  always_comb
    case (fu_op)
      KSRLV, KSRAV: fu_y = shf_y;
      KVMUL, KSVMULSC, KSVMULRF: fu_y = mul_y;
      KRELU, KVSLT, KSVSLT: fu_y = cmp_y;
      default: fu_y = add_y;
    endcase

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  // run one instruction; returns busy cycles and cycles from start to first write
  task automatic run(vop_e op, int a, int b, int d, logic [31:0] sc, int size, sew_e sew, int scl,
                     output int nbusy, output int first);
    int c0;
    s_op = op; s_a = a; s_b = b; s_d = d; s_scalar = sc; s_size = size; s_sew = sew; s_sc = 5'(scl);
    start = 1; c0 = cyc;
    @(posedge clk); #1; start = 0;
    nbusy = 0; first = -1;
    while (busy) begin
      if (w_en && first < 0) first = cyc - c0;
      nbusy++;
      @(posedge clk); #1;
    end
  endtask

  task automatic compare(string w);
    for (int i = 0; i < N * WORDS; i++) begin
      lsu_re = 1; lsu_word = AW'(i);
      @(posedge clk); #1;
      chk($sformatf("%s word %0d", w, i), lsu_rdata, refm[i]);
    end
    lsu_re = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nb, fw;
    logic [31:0] acc;
    start = 0; lsu_re = 0; lsu_we = 0; lsu_word = 0; lsu_wdata = 0;
    s_op = KADDV; s_a = 0; s_b = 0; s_d = 0; s_scalar = 0; s_size = 0; s_sew = SEW32; s_sc = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    for (int i = 0; i < N * WORDS; i++) begin
      lsu_we = 1; lsu_word = AW'(i); lsu_wdata = $urandom; refm[i] = lsu_wdata;
      @(posedge clk); #1;
    end
    lsu_we = 0;

    // 1) kaddv: A = SPM0 words 1.., B = SPM1 words 3.., D = SPM1 words 40..,
    //    54 bytes = 13 full words + 2 bytes
    run(KADDV, 4 * 1, 4 * (WORDS + 3), 4 * (WORDS + 40), 0, 54, SEW32, 0, nb, fw);
    for (int i = 0; i < 14; i++) begin
      logic [31:0] s;
      s = refm[1 + i] + refm[WORDS + 3 + i];
      if (i < 13) refm[WORDS + 40 + i] = s;
      else refm[WORDS + 40 + i][15:0] = s[15:0];
    end
    compare("kaddv");
    chk("kaddv first write", fw, 3);
    chk("kaddv busy", nb, 7 + 2);

    // 2) kvmul with both sources in SPM0 (two cycles per beat)
    run(KVMUL, 4 * 2, 4 * 30, 4 * 50, 0, 4 * 8, SEW32, 0, nb, fw);
    for (int i = 0; i < 8; i++) refm[50 + i] = refm[2 + i] * refm[30 + i];
    compare("kvmul");
    chk("kvmul busy", nb, 2 * 4 + 2);

    // 3) ksvmulsc: scalar read from SPM1 word 60
    run(KSVMULSC, 4 * 5, 4 * (WORDS + 60), 4 * (WORDS + 10), 0, 4 * 6, SEW32, 0, nb, fw);
    for (int i = 0; i < 6; i++) refm[WORDS + 10 + i] = refm[5 + i] * refm[WORDS + 60];
    compare("ksvmulsc");
    chk("ksvmulsc busy", nb, 3 + 2 + 2);

    // 4) kdotp on 16-bit elements, 5 words = 10 elements, result to SPM0 word 63
    run(KDOTP, 4 * 11, 4 * (WORDS + 20), 4 * 63, 0, 20, SEW16, 0, nb, fw);
    acc = 0;
    for (int i = 0; i < 5; i++)
      for (int e = 0; e < 2; e++)
        acc += 32'($signed(refm[11 + i][16*e +: 16]) * $signed(refm[WORDS + 20 + i][16*e +: 16]));
    refm[63] = acc;
    compare("kdotp16");

    // 5) ksrlv by register scalar 3
    run(KSRLV, 4 * 0, 0, 4 * (WORDS + 1), 3, 4 * 4, SEW32, 0, nb, fw);
    for (int i = 0; i < 4; i++) refm[WORDS + 1 + i] = refm[i] >> 3;
    compare("ksrlv");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
