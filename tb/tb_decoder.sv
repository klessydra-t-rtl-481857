// tb_decoder: decodes a set of hand-encoded instructions (RV32I, M, A,
// system, CSR and every custom vector instruction) and compares unit,
// operation, immediate, register fields and rd write enable with the
// expected values; also checks that undefined encodings are illegal.
`timescale 1ns/1ps
module tb_decoder;
  import kl_pkg::*;
  logic [31:0] instr;
  dec_t dec;
  int checks = 0, failures = 0;

  decoder dut (.*);

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // addi x5, x6, -3
    instr = {12'hFFD, 5'd6, 3'b000, 5'd5, OPC_OPIMM}; #1;
    chk("addi unit", dec.unit, UN_ALU); chk("addi op", dec.alu_op, ALU_ADD);
    chk("addi imm", dec.imm, -32'sd3); chk("addi rd", dec.rd, 5); chk("addi rs1", dec.rs1, 6);
    chk("addi we", dec.rd_we, 1); chk("addi useimm", dec.use_imm, 1);
    // sub x1, x2, x3
    instr = {7'b0100000, 5'd3, 5'd2, 3'b000, 5'd1, OPC_OP}; #1;
    chk("sub op", dec.alu_op, ALU_SUB); chk("sub useimm", dec.use_imm, 0); chk("sub rs2", dec.rs2, 3);
    // sra
    instr = {7'b0100000, 5'd3, 5'd2, 3'b101, 5'd1, OPC_OP}; #1;
    chk("sra", dec.alu_op, ALU_SRA);
    // srai x1, x2, 7
    instr = {7'b0100000, 5'd7, 5'd2, 3'b101, 5'd1, OPC_OPIMM}; #1;
    chk("srai", dec.alu_op, ALU_SRA); chk("srai sh", dec.imm[4:0], 7);
    // mulhu
    instr = {7'b0000001, 5'd3, 5'd2, 3'b011, 5'd1, OPC_OP}; #1;
    chk("mul unit", dec.unit, UN_MD); chk("mul f3", dec.funct3, 3);
    // lui
    instr = {20'hABCDE, 5'd9, OPC_LUI}; #1;
    chk("lui imm", dec.imm, 32'hABCDE000); chk("lui op", dec.alu_op, ALU_LUI);
    // sw x7, -8(x2)
    instr = {7'h7F, 5'd7, 5'd2, 3'b010, 5'b11000, OPC_STORE}; #1;
    chk("sw unit", dec.unit, UN_LSU); chk("sw kind", dec.ls_kind, LS_STORE);
    chk("sw imm", dec.imm, -32'sd8); chk("sw we", dec.rd_we, 0);
    // lhu
    instr = {12'd6, 5'd2, 3'b101, 5'd4, OPC_LOAD}; #1;
    chk("lhu kind", dec.ls_kind, LS_LOAD); chk("lhu we", dec.rd_we, 1); chk("lhu imm", dec.imm, 6);
    // beq offset -16
    instr = {1'b1, 6'b111111, 5'd2, 5'd1, 3'b000, 4'b1000, 1'b1, OPC_BRANCH}; #1;
    chk("beq unit", dec.unit, UN_BR); chk("beq imm", dec.imm, -32'sd16); chk("beq we", dec.rd_we, 0);
    // jal x1, +2048
    instr = {1'b0, 10'd0, 1'b1, 8'd0, 5'd1, OPC_JAL}; #1;
    chk("jal", dec.jal, 1); chk("jal imm", dec.imm, 2048);
    // jalr
    instr = {12'd4, 5'd1, 3'b000, 5'd0, OPC_JALR}; #1;
    chk("jalr", dec.jalr, 1);
    // csrrs x1, mhartid, x0
    instr = {CSR_MHARTID, 5'd0, 3'b010, 5'd1, OPC_SYSTEM}; #1;
    chk("csr unit", dec.unit, UN_CSR); chk("csr addr", dec.csr, CSR_MHARTID);
    // ecall, ebreak, mret, wfi
    instr = 32'h0000_0073; #1; chk("ecall", dec.sys_op, SYS_ECALL);
    instr = 32'h0010_0073; #1; chk("ebreak", dec.sys_op, SYS_EBREAK);
    instr = 32'h3020_0073; #1; chk("mret", dec.sys_op, SYS_MRET);
    instr = 32'h1050_0073; #1; chk("wfi", dec.sys_op, SYS_NOP); chk("wfi unit", dec.unit, UN_SYS);
    // amoswap, lr, sc
    instr = {5'b00001, 2'b00, 5'd3, 5'd2, 3'b010, 5'd1, OPC_AMO}; #1;
    chk("amo kind", dec.ls_kind, LS_AMO); chk("amo f5", dec.funct5, 1);
    instr = {5'b00010, 2'b00, 5'd0, 5'd2, 3'b010, 5'd1, OPC_AMO}; #1;
    chk("lr kind", dec.ls_kind, LS_LR);
    instr = {5'b00011, 2'b00, 5'd3, 5'd2, 3'b010, 5'd1, OPC_AMO}; #1;
    chk("sc kind", dec.ls_kind, LS_SC);
    // every vector instruction
    for (int f = 0; f <= 17; f++) begin
      instr = {7'(f), 5'd12, 5'd11, 3'b000, 5'd10, OPC_CUSTOM0}; #1;
      chk("vop", dec.vop, f);
      chk("vunit", dec.unit, f <= 1 ? UN_VLSU : UN_MFU);
      chk("v rd we", dec.rd_we, 0);
      chk("v regs", {dec.rd, dec.rs1, dec.rs2}, {5'd10, 5'd11, 5'd12});
    end
    // illegal encodings
    instr = {7'd18, 5'd1, 5'd1, 3'b000, 5'd1, OPC_CUSTOM0}; #1; chk("ill vop", dec.unit, UN_ILL);
    instr = 32'hFFFF_FFFF; #1; chk("ill all ones", dec.unit, UN_ILL);
    instr = {12'd0, 5'd1, 3'b011, 5'd1, OPC_LOAD}; #1; chk("ill ld", dec.unit, UN_ILL);
    instr = {7'b0100000, 5'd3, 5'd2, 3'b111, 5'd1, OPC_OP}; #1; chk("ill op", dec.unit, UN_ILL);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
