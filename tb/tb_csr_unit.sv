// tb_csr_unit: checks per-hart CSR read/write/set/clear (including the
// vector CSRs MVSIZE, MVTYPE, MPSCLFAC), mhartid, illegal accesses (unknown
// CSR, write to a read-only CSR), the trap entry (mepc, mcause, MIE->MPIE,
// handler address) and mret, the per-hart instret count and mcycle.
`timescale 1ns/1ps
module tb_csr_unit;
  import kl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic op_valid, op_src_nz, op_illegal, trap, mret, retire;
  logic [1:0] op_harc, trap_harc, mret_harc, retire_harc;
  logic [11:0] op_addr;
  logic [2:0] op_funct3;
  logic [31:0] op_src, op_rdata, trap_cause, trap_pc, trap_tval, tvec, epc;
  logic [2:0][31:0] mvsize;
  sew_e mvtype [3];
  logic [2:0][4:0] mpsclfac;
  int checks = 0, failures = 0;

  csr_unit #(.HARTS(3), .MTVEC_RESET(32'h100)) dut (.*);

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask
  task automatic acc(int h, logic [11:0] a, logic [2:0] f3, logic [31:0] src, output logic [31:0] rd);
    op_valid = 1; op_harc = 2'(h); op_addr = a; op_funct3 = f3; op_src = src; op_src_nz = src != 0;
    #1; rd = op_rdata;
    @(posedge clk); #1; op_valid = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    op_valid = 0; trap = 0; mret = 0; retire = 0; op_harc = 0; op_addr = 0; op_funct3 = 1;
    op_src = 0; op_src_nz = 0; trap_harc = 0; mret_harc = 0; retire_harc = 0;
    trap_cause = 0; trap_pc = 0; trap_tval = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int h = 0; h < 3; h++) begin
      acc(h, CSR_MHARTID, 3'b010, 0, r); chk("mhartid", r, h);
      acc(h, CSR_MSCRATCH, 3'b001, 32'h1234_0000 + h, r);
      acc(h, CSR_MVSIZE, 3'b001, 64 * (h + 1), r);
      acc(h, CSR_MVTYPE, 3'b001, h, r);
      acc(h, CSR_MPSCLFAC, 3'b101, 3 + h, r);
    end
    for (int h = 0; h < 3; h++) begin
      acc(h, CSR_MSCRATCH, 3'b010, 32'h0000_00F0, r); chk("mscratch old", r, 32'h1234_0000 + h);
      acc(h, CSR_MSCRATCH, 3'b011, 32'h1200_0000, r); chk("mscratch set", r, 32'h1234_00F0 + h);
      acc(h, CSR_MSCRATCH, 3'b010, 0, r);             chk("mscratch clr", r, 32'h0034_00F0 + h);
      chk("mvsize", mvsize[h], 64 * (h + 1));
      chk("mvtype", mvtype[h], h);
      chk("mpsclfac", mpsclfac[h], 3 + h);
    end
    // illegal: unknown CSR, write to read-only
    op_valid = 1; op_harc = 0; op_addr = 12'h7C0; op_funct3 = 3'b010; op_src = 0; op_src_nz = 0; #1;
    chk("unknown illegal", op_illegal, 1);
    op_addr = CSR_MHARTID; op_funct3 = 3'b001; op_src = 5; #1;
    chk("ro write illegal", op_illegal, 1);
    op_funct3 = 3'b010; op_src = 0; op_src_nz = 0; #1;
    chk("ro read legal", op_illegal, 0);
    op_valid = 0;
    // trap and mret on hart 1
    acc(1, CSR_MTVEC, 3'b001, 32'h0000_0400, r);
    acc(1, CSR_MSTATUS, 3'b001, 32'h8, r);
    trap = 1; trap_harc = 1; trap_cause = 11; trap_pc = 32'h0000_0ABC; trap_tval = 0; #1;
    chk("tvec", tvec, 32'h400);
    @(posedge clk); #1; trap = 0;
    acc(1, CSR_MEPC, 3'b010, 0, r);    chk("mepc", r, 32'h0ABC);
    acc(1, CSR_MCAUSE, 3'b010, 0, r);  chk("mcause", r, 11);
    acc(1, CSR_MSTATUS, 3'b010, 0, r); chk("mstatus trap", r & 32'h88, 32'h80);
    acc(0, CSR_MEPC, 3'b010, 0, r);    chk("mepc hart0", r, 0);
    mret = 1; mret_harc = 1; #1; chk("epc", epc, 32'h0ABC);
    @(posedge clk); #1; mret = 0;
    acc(1, CSR_MSTATUS, 3'b010, 0, r); chk("mstatus mret", r & 32'h88, 32'h88);
    // instret
    retire = 1; retire_harc = 2; repeat (7) @(posedge clk); #1; retire = 0;
    acc(2, CSR_MINSTRET, 3'b010, 0, r); chk("instret", r, 7);
    acc(0, CSR_MINSTRET, 3'b010, 0, r); chk("instret other", r, 0);
    acc(0, CSR_MCYCLE, 3'b010, 0, r);
    checks++; if (r < 30) begin failures++; $display("FAIL mcycle %0d", r); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
