// tb_klessydra_t13: end-to-end test of the core at its default parameters
// (three harts, heterogeneous MIMD coprocessor, M = 3, F = 1, D = 2, N = 4).
//
// The testbench holds a program memory and a data memory (both synchronous,
// one-cycle read), assembles one program that all three harts run, and
// fills each hart's input vectors A and B with different data. Each hart
//   * runs scalar code: mul/div/rem, a counted branch loop, byte loads and
//     stores;
//   * loads A and B into its scratchpads (kmemld), runs kaddv, kdotp,
//     kdotpps, kvred, kvcp, kvmul with both operands in one SPM, ksvaddrf,
//     ksrav, krelu, kvslt, ksvmulsc, and an 8-bit subword ksubv, and stores
//     the results back (kmemstr);
//   * increments shared counters with amoadd.w and an LR/SC retry loop;
//   * takes an ecall and a scratchpad-range trap through a handler.
// Results in data memory are compared with values computed here from A and
// B. Because the three harts reach the same vector instructions a cycle
// apart, they contend for the LSU and the shared functional units; the
// testbench counts each mechanism (retry on busy LSU, retry on busy unit,
// two vector instructions in flight, two-cycle beats for operands in one
// SPM, traps, taken branches, SC failures, subword operations) and fails a
// mechanism that never occurred. It also checks the MFU timing: the first
// result is written 4 to 8 cycles after the grant, and a kaddv / kvmul of
// n words keeps its controller busy n/D + 2 / 2n/D + 2 cycles.
`timescale 1ns/1ps
module tb_klessydra_t13;
  import kl_pkg::*;

  localparam int unsigned HARTS = 3;
  localparam int unsigned VW    = 16;   // vector length in words

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        instr_req, data_req, data_we;
  logic [31:0] instr_addr, instr_rdata, data_addr, data_wdata, data_rdata;
  logic [3:0]  data_be;

  klessydra_t13 dut (.*);

  // ---------------------------------------------------------------- memories
  logic [31:0] imem [1024];
  logic [31:0] dmem [4096];

  // Requests count only once reset has been applied: before the first clock
  // edge the core's registers still hold their power-up values.
  always_ff @(posedge clk) begin
    if (rst_n && instr_req) instr_rdata <= imem[instr_addr[11:2]];
    if (rst_n && data_req) begin
      if (data_we) begin
        for (int i = 0; i < 4; i++)
          if (data_be[i]) dmem[data_addr[13:2]][8*i +: 8] <= data_wdata[8*i +: 8];
      end else data_rdata <= dmem[data_addr[13:2]];
    end
  end

  // --------------------------------------------------------------- assembler
  int unsigned apc;
  task automatic put(logic [31:0] ins);
    imem[apc >> 2] = ins;
    apc += 4;
  endtask
  function automatic logic [31:0] r_t(logic [6:0] f7, int rs2, int rs1, logic [2:0] f3, int rd, logic [6:0] opc);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), opc};
  endfunction
  function automatic logic [31:0] i_t(int imm, int rs1, logic [2:0] f3, int rd, logic [6:0] opc);
    return {12'(imm), 5'(rs1), f3, 5'(rd), opc};
  endfunction
  function automatic logic [31:0] s_t(int imm, int rs2, int rs1, logic [2:0] f3);
    logic [11:0] m;
    m = 12'(imm);
    return {m[11:5], 5'(rs2), 5'(rs1), f3, m[4:0], OPC_STORE};
  endfunction
  function automatic logic [31:0] b_t(int off, int rs2, int rs1, logic [2:0] f3);
    logic [12:0] m;
    m = 13'(off);
    return {m[12], m[10:5], 5'(rs2), 5'(rs1), f3, m[4:1], m[11], OPC_BRANCH};
  endfunction
  function automatic logic [31:0] j_t(int off, int rd);
    logic [20:0] m;
    m = 21'(off);
    return {m[20], m[10:1], m[11], m[19:12], 5'(rd), OPC_JAL};
  endfunction
  function automatic logic [31:0] lui(int rd, int imm20);
    return {20'(imm20), 5'(rd), OPC_LUI};
  endfunction
  function automatic logic [31:0] addi(int rd, int rs1, int imm);
    return i_t(imm, rs1, 3'b000, rd, OPC_OPIMM);
  endfunction
  function automatic logic [31:0] csrrw(int rd, logic [11:0] csr, int rs1);
    return {csr, 5'(rs1), 3'b001, 5'(rd), OPC_SYSTEM};
  endfunction
  function automatic logic [31:0] csrrs(int rd, logic [11:0] csr, int rs1);
    return {csr, 5'(rs1), 3'b010, 5'(rd), OPC_SYSTEM};
  endfunction
  function automatic logic [31:0] kv(vop_e op, int rd, int rs1, int rs2);
    return r_t(7'(op), rs2, rs1, 3'b000, rd, OPC_CUSTOM0);
  endfunction
  function automatic logic [31:0] sw(int rs2, int off, int rs1);
    return s_t(off, rs2, rs1, 3'b010);
  endfunction

  // ------------------------------------------------------------------ data
  function automatic logic [31:0] va(int h, int i); return 32'(i * 3 - 20 + h * 5); endfunction
  function automatic logic [31:0] vb(int h, int i); return 32'(11 - i * 2 + h * 7); endfunction
  function automatic int unsigned rbase(int h); return 32'h2000 + h * 32'h400; endfunction

  // ----------------------------------------------------------------- checks
  int checks = 0, failures = 0;
  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08h expected %08h", what, got, exp);
    end
  endtask

  // ------------------------------------------------------------- mechanisms
  int n_lsu_retry = 0, n_unit_retry = 0, n_par = 0, n_twophase = 0, n_trap = 0;
  int n_branch = 0, n_sc_fail = 0, n_subword = 0, n_spmsc = 0;
  int cycle = 0;
  int gnt_cycle [3];
  vop_e gnt_op [3];
  logic first_w [3];
  int busy_len [3];

  always_ff @(posedge clk) begin
    if (rst_n) begin
      cycle <= cycle + 1;
      if (dut.replay && (dut.d.unit == UN_LSU || dut.d.unit == UN_VLSU)) n_lsu_retry <= n_lsu_retry + 1;
      if (dut.spmu_req && !dut.spmu_gnt) n_unit_retry <= n_unit_retry + 1;
      if ($countones(dut.mfu_ctrl_busy) >= 2) n_par <= n_par + 1;
      if (dut.trap) n_trap <= n_trap + 1;
      if (dut.redir && !dut.replay && !dut.trap && dut.d.unit == UN_BR && !dut.d.jal) n_branch <= n_branch + 1;
      if (dut.u_lsu.accept && dut.d.unit == UN_LSU && dut.d.ls_kind == LS_SC && !dut.u_lsu.sc_ok)
        n_sc_fail <= n_sc_fail + 1;
      if (dut.spmu_req && dut.spmu_gnt && dut.mvtype[dut.idex.harc] != SEW32) n_subword <= n_subword + 1;
      if (dut.spmu_req && dut.spmu_gnt && b_source(dut.d.vop) == B_SPMSC) n_spmsc <= n_spmsc + 1;
      if (dut.u_mfu.g_ctrl[0].u_ctrl.s1.cap_a || dut.u_mfu.g_ctrl[1].u_ctrl.s1.cap_a ||
          dut.u_mfu.g_ctrl[2].u_ctrl.s1.cap_a) n_twophase <= n_twophase + 1;
    end
  end

  // MFU timing per controller
  for (genvar m = 0; m < 3; m++) begin : g_tm
    always_ff @(posedge clk) begin
      if (rst_n) begin
        if (dut.spmu_req && dut.spmu_gnt && dut.ex_spmi == m) begin
          gnt_cycle[m] <= cycle;
          gnt_op[m]    <= dut.d.vop;
          first_w[m]   <= 1'b1;
          busy_len[m]  <= 0;
        end
        if (dut.mfu_ctrl_busy[m]) busy_len[m] <= busy_len[m] + 1;
        if (dut.m_w_en[m] && first_w[m] && !scalar_result(gnt_op[m])) begin
          first_w[m] <= 1'b0;
          checks++;
          if (cycle - gnt_cycle[m] + 1 < 4 || cycle - gnt_cycle[m] + 1 > 8) begin
            failures++;
            $display("FAIL first-result latency %0d", cycle - gnt_cycle[m] + 1);
          end
        end
        if (dut.mfu_done[m] && gnt_op[m] == KADDV) begin
          checks++;
          if (busy_len[m] + 1 != VW / 2 + 2) begin
            failures++; $display("FAIL kaddv busy %0d", busy_len[m] + 1);
          end
        end
        if (dut.mfu_done[m] && gnt_op[m] == KVMUL) begin
          checks++;
          if (busy_len[m] + 1 != 2 * (VW / 2) + 2) begin
            failures++; $display("FAIL kvmul busy %0d", busy_len[m] + 1);
          end
        end
      end
    end
  end

  // watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ----------------------------------------------------------------- program
  // x2 = per-hart data region, x3..x6 = SPM0..SPM3, x7 = vector bytes
  initial begin
    int L;
    for (int i = 0; i < 1024; i++) imem[i] = 32'h0000_0013;  // nop
    for (int i = 0; i < 4096; i++) dmem[i] = '0;
    for (int h = 0; h < HARTS; h++)
      for (int i = 0; i < VW; i++) begin
        dmem[(rbase(h) >> 2) + i]      = va(h, i);
        dmem[(rbase(h) >> 2) + 16 + i] = vb(h, i);
      end

    apc = 0;     put(j_t(32'h200, 0));
    apc = 32'h100;                        // trap handler (mtvec reset value)
    put(csrrs(9, CSR_MCAUSE, 0));
    put(sw(9, 32'h3C0, 2));
    put(csrrs(9, CSR_MEPC, 0));
    put(addi(9, 9, 4));
    put(csrrw(0, CSR_MEPC, 9));
    put(32'h3020_0073);                   // mret

    apc = 32'h200;
    put(csrrs(1, CSR_MHARTID, 0));
    put(i_t(10, 1, 3'b001, 2, OPC_OPIMM));          // slli x2, x1, 10
    put(lui(8, 2));                                  // x8 = 0x2000
    put(r_t(0, 8, 2, 3'b000, 2, OPC_OP));            // x2 += x8
    put(lui(3, 32'h10000));
    put(lui(4, 32'h10001));
    put(lui(5, 32'h10002));
    put(lui(6, 32'h10003));
    put(addi(7, 0, VW * 4));
    put(csrrw(0, CSR_MVSIZE, 7));
    put(addi(8, 0, 2));
    put(csrrw(0, CSR_MVTYPE, 8));
    // scalar part
    put(addi(9, 0, -5));
    put(addi(10, 0, 7));
    put(r_t(1, 10, 9, 3'b000, 11, OPC_OP));          // mul x11 = -35
    put(r_t(1, 10, 11, 3'b100, 12, OPC_OP));         // div x12 = -5
    put(r_t(1, 12, 10, 3'b110, 13, OPC_OP));         // rem x13 = 7 % -5 = 2
    put(sw(11, 32'h100, 2));
    put(sw(12, 32'h104, 2));
    put(sw(13, 32'h10C, 2));
    put(addi(14, 0, 0));
    put(addi(15, 0, 10));
    L = apc;
    put(r_t(0, 15, 14, 3'b000, 14, OPC_OP));         // add x14, x14, x15
    put(addi(15, 15, -1));
    put(b_t(L - int'(apc), 0, 15, 3'b001));          // bne x15, x0, L
    put(sw(14, 32'h108, 2));                         // 55
    put(addi(16, 0, -2));
    put(s_t(32'h111, 16, 2, 3'b000));                // sb
    put(i_t(32'h111, 2, 3'b100, 17, OPC_LOAD));      // lbu
    put(i_t(32'h111, 2, 3'b000, 18, OPC_LOAD));      // lb
    put(sw(17, 32'h114, 2));
    put(sw(18, 32'h118, 2));
    // vector part
    put(kv(KMEMLD, 3, 2, 7));                        // SPM0 <- A
    put(addi(19, 2, 64));
    put(kv(KMEMLD, 4, 19, 7));                       // SPM1 <- B
    put(kv(KADDV, 5, 3, 4));                         // SPM2 = A + B
    put(addi(20, 2, 32'h180));
    put(kv(KMEMSTR, 20, 5, 7));
    put(kv(KDOTP, 6, 3, 4));                         // SPM3[0] = A.B
    put(addi(8, 0, 1));
    put(csrrw(0, CSR_MPSCLFAC, 8));
    put(addi(21, 6, 4));
    put(kv(KDOTPPS, 21, 3, 4));                      // SPM3[1]
    put(addi(21, 6, 8));
    put(kv(KVRED, 21, 3, 0));                        // SPM3[2] = sum A
    put(addi(21, 2, 32'h1C0));
    put(addi(22, 0, 12));
    put(kv(KMEMSTR, 21, 6, 22));
    put(addi(23, 3, 32'h100));
    put(kv(KVCP, 23, 4, 0));                         // SPM0+0x100 <- B
    put(addi(24, 5, 32'h100));
    put(kv(KVMUL, 24, 3, 23));                       // both sources in SPM0
    put(addi(25, 2, 32'h200));
    put(kv(KMEMSTR, 25, 24, 7));
    put(addi(24, 5, 32'h200));
    put(kv(KSVADDRF, 24, 3, 10));                    // A + 7
    put(addi(25, 2, 32'h240));
    put(kv(KMEMSTR, 25, 24, 7));
    put(addi(26, 0, 2));
    put(addi(24, 5, 32'h300));
    put(kv(KSRAV, 24, 3, 26));                       // A >>> 2
    put(addi(25, 2, 32'h280));
    put(kv(KMEMSTR, 25, 24, 7));
    put(addi(24, 5, 32'h400));
    put(kv(KRELU, 24, 3, 0));
    put(addi(25, 2, 32'h2C0));
    put(kv(KMEMSTR, 25, 24, 7));
    put(addi(24, 5, 32'h500));
    put(kv(KVSLT, 24, 3, 4));
    put(addi(25, 2, 32'h300));
    put(kv(KMEMSTR, 25, 24, 7));
    put(addi(24, 5, 32'h600));
    put(kv(KSVMULSC, 24, 3, 4));                     // A * B[0]
    put(addi(25, 2, 32'h340));
    put(kv(KMEMSTR, 25, 24, 7));
    put(addi(8, 0, 0));
    put(csrrw(0, CSR_MVTYPE, 8));                    // 8-bit elements
    put(addi(24, 5, 32'h700));
    put(kv(KSUBV, 24, 3, 4));
    put(addi(25, 2, 32'h380));
    put(kv(KMEMSTR, 25, 24, 7));
    put(addi(8, 0, 2));
    put(csrrw(0, CSR_MVTYPE, 8));
    // atomics on shared counters at 0x3000 / 0x3004
    put(lui(27, 3));
    put(addi(28, 0, 1));
    put(r_t({5'b00000, 2'b00}, 28, 27, 3'b010, 29, OPC_AMO));   // amoadd.w
    put(addi(31, 27, 4));
    L = apc;
    put(r_t({5'b00010, 2'b00}, 0, 31, 3'b010, 30, OPC_AMO));    // lr.w
    put(addi(30, 30, 1));
    put(r_t({5'b00011, 2'b00}, 30, 31, 3'b010, 29, OPC_AMO));   // sc.w
    put(b_t(L - int'(apc), 0, 29, 3'b001));
    // traps
    put(32'h0000_0073);                              // ecall
    put(i_t(32'h3C0, 2, 3'b010, 9, OPC_LOAD));
    put(sw(9, 32'h3C4, 2));
    put(kv(KADDV, 0, 3, 4));                         // rd = x0: outside SPM
    // done
    put(addi(9, 0, 1));
    put(sw(9, 32'h3FC, 2));
    put(j_t(0, 0));

    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (dmem[(rbase(0) + 32'h3FC) >> 2] == 1 && dmem[(rbase(1) + 32'h3FC) >> 2] == 1 &&
          dmem[(rbase(2) + 32'h3FC) >> 2] == 1);
    repeat (5) @(posedge clk);

    for (int h = 0; h < HARTS; h++) begin
      int unsigned r;
      logic [31:0] dot, dotps, red;
      r = rbase(h) >> 2;
      chk("mul", dmem[r + 32'h40], -32'sd35);
      chk("div", dmem[r + 32'h41], -32'sd5);
      chk("loop", dmem[r + 32'h42], 32'd55);
      chk("rem", dmem[r + 32'h43], 32'd2);
      chk("lbu", dmem[r + 32'h45], 32'h0000_00FE);
      chk("lb", dmem[r + 32'h46], 32'hFFFF_FFFE);
      dot = 0; dotps = 0; red = 0;
      for (int i = 0; i < VW; i++) begin
        logic signed [63:0] p;
        logic [31:0] a, b, e;
        a = va(h, i); b = vb(h, i);
        p = 64'($signed(a)) * 64'($signed(b));
        dot   += 32'(p);
        dotps += 32'(p >>> 1);
        red   += a;
        chk("kaddv",    dmem[r + 32'h60 + i], a + b);
        chk("kvmul",    dmem[r + 32'h80 + i], a * b);
        chk("ksvaddrf", dmem[r + 32'h90 + i], a + 7);
        chk("ksrav",    dmem[r + 32'hA0 + i], 32'($signed(a) >>> 2));
        chk("krelu",    dmem[r + 32'hB0 + i], $signed(a) < 0 ? 0 : a);
        chk("kvslt",    dmem[r + 32'hC0 + i], {31'd0, $signed(a) < $signed(b)});
        chk("ksvmulsc", dmem[r + 32'hD0 + i], a * vb(h, 0));
        for (int k = 0; k < 4; k++) e[8*k +: 8] = a[8*k +: 8] - b[8*k +: 8];
        chk("ksubv8",   dmem[r + 32'hE0 + i], e);
      end
      chk("kdotp",   dmem[r + 32'h70], dot);
      chk("kdotpps", dmem[r + 32'h71], dotps);
      chk("kvred",   dmem[r + 32'h72], red);
      chk("ecall cause", dmem[r + 32'hF1], CAUSE_ECALL_M);
      chk("spm range cause", dmem[r + 32'hF0], CAUSE_SPM_RANGE);
    end
    chk("amoadd counter", dmem[32'h3000 >> 2], 32'd3);
    chk("lr/sc counter",  dmem[32'h3004 >> 2], 32'd3);

    $display("mechanisms: lsu_retry=%0d unit_retry=%0d parallel=%0d twophase=%0d trap=%0d branch=%0d sc_fail=%0d subword=%0d spm_scalar=%0d cycles=%0d",
             n_lsu_retry, n_unit_retry, n_par, n_twophase, n_trap, n_branch, n_sc_fail, n_subword, n_spmsc, cycle);
    checks++; if (n_lsu_retry == 0)  begin failures++; $display("FAIL no LSU retry");  end
    checks++; if (n_unit_retry == 0) begin failures++; $display("FAIL no FU contention retry"); end
    checks++; if (n_par == 0)        begin failures++; $display("FAIL no parallel vector ops"); end
    checks++; if (n_twophase == 0)   begin failures++; $display("FAIL no same-SPM beats"); end
    checks++; if (n_trap != 6)       begin failures++; $display("FAIL traps %0d", n_trap); end
    checks++; if (n_branch == 0)     begin failures++; $display("FAIL no taken branch"); end
    checks++; if (n_subword == 0)    begin failures++; $display("FAIL no subword op"); end
    checks++; if (n_spmsc == 0)      begin failures++; $display("FAIL no SPM scalar"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
