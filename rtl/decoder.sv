// decoder: instruction decoder of the decode stage.
//
// Combinationally turns a 32-bit instruction into kl_pkg::dec_t: which unit
// executes it (scalar ALU, branch, multiply/divide, load/store unit, CSR,
// system, vector load/store, MFU), the ALU operation, immediate, register
// indices and whether rd is written. It covers RV32I, the M and A extensions
// and the custom vector instructions of the paper (encoded here on the
// custom-0 opcode with funct3 = 000 and funct7 selecting the operation; the
// encoding is this design's own). FENCE, FENCE.I and WFI decode as no-ops.
// Anything else is marked illegal (unit UN_ILL) and trapped in execute.
module decoder
  import kl_pkg::*;
(
  input  logic [31:0] instr,
  output dec_t        dec
);

  logic [6:0] opc;
  logic [2:0] f3;
  logic [6:0] f7;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  always_comb begin
    opc   = instr[6:0];
    f3    = instr[14:12];
    f7    = instr[31:25];
    imm_i = {{20{instr[31]}}, instr[31:20]};
    imm_s = {{20{instr[31]}}, instr[31:25], instr[11:7]};
    imm_b = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
    imm_u = {instr[31:12], 12'd0};
    imm_j = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};

    dec         = '0;
    dec.unit    = UN_ILL;
    dec.alu_op  = ALU_ADD;
    dec.ls_kind = LS_LOAD;
    dec.sys_op  = SYS_NOP;
    dec.vop     = KADDV;
    dec.rd      = instr[11:7];
    dec.rs1     = instr[19:15];
    dec.rs2     = instr[24:20];
    dec.funct3  = f3;
    dec.funct5  = instr[31:27];
    dec.csr     = instr[31:20];
    dec.imm     = imm_i;

    unique case (opc)
      OPC_LUI:   begin dec.unit = UN_ALU; dec.alu_op = ALU_LUI;   dec.imm = imm_u; dec.use_imm = 1'b1; dec.rd_we = 1'b1; end
      OPC_AUIPC: begin dec.unit = UN_ALU; dec.alu_op = ALU_AUIPC; dec.imm = imm_u; dec.use_imm = 1'b1; dec.rd_we = 1'b1; end
      OPC_JAL:   begin dec.unit = UN_BR;  dec.jal = 1'b1; dec.imm = imm_j; dec.rd_we = 1'b1; end
      OPC_JALR:  if (f3 == 3'b000) begin dec.unit = UN_BR; dec.jalr = 1'b1; dec.imm = imm_i; dec.rd_we = 1'b1; end
      OPC_BRANCH: if (f3 != 3'b010 && f3 != 3'b011) begin dec.unit = UN_BR; dec.imm = imm_b; end
      OPC_LOAD:  if (f3 == 3'b000 || f3 == 3'b001 || f3 == 3'b010 || f3 == 3'b100 || f3 == 3'b101) begin
                   dec.unit = UN_LSU; dec.ls_kind = LS_LOAD; dec.imm = imm_i; dec.rd_we = 1'b1;
                 end
      OPC_STORE: if (f3 == 3'b000 || f3 == 3'b001 || f3 == 3'b010) begin
                   dec.unit = UN_LSU; dec.ls_kind = LS_STORE; dec.imm = imm_s;
                 end
      OPC_OPIMM: begin
        dec.unit = UN_ALU; dec.use_imm = 1'b1; dec.rd_we = 1'b1;
        unique case (f3)
          3'b000: dec.alu_op = ALU_ADD;
          3'b010: dec.alu_op = ALU_SLT;
          3'b011: dec.alu_op = ALU_SLTU;
          3'b100: dec.alu_op = ALU_XOR;
          3'b110: dec.alu_op = ALU_OR;
          3'b111: dec.alu_op = ALU_AND;
          3'b001: if (f7 == 7'd0) dec.alu_op = ALU_SLL; else dec.unit = UN_ILL;
          3'b101: if (f7 == 7'd0) dec.alu_op = ALU_SRL;
                  else if (f7 == 7'b0100000) dec.alu_op = ALU_SRA;
                  else dec.unit = UN_ILL;
          default: dec.unit = UN_ILL;
        endcase
      end
      OPC_OP: begin
        dec.rd_we = 1'b1;
        if (f7 == 7'b0000001) dec.unit = UN_MD;
        else if (f7 == 7'd0 || (f7 == 7'b0100000 && (f3 == 3'b000 || f3 == 3'b101))) begin
          dec.unit = UN_ALU;
          unique case (f3)
            3'b000: dec.alu_op = f7[5] ? ALU_SUB : ALU_ADD;
            3'b001: dec.alu_op = ALU_SLL;
            3'b010: dec.alu_op = ALU_SLT;
            3'b011: dec.alu_op = ALU_SLTU;
            3'b100: dec.alu_op = ALU_XOR;
            3'b101: dec.alu_op = f7[5] ? ALU_SRA : ALU_SRL;
            3'b110: dec.alu_op = ALU_OR;
            default: dec.alu_op = ALU_AND;
          endcase
        end else dec.rd_we = 1'b0;
      end
      OPC_FENCE: begin dec.unit = UN_SYS; dec.sys_op = SYS_NOP; end
      OPC_SYSTEM: begin
        if (f3 == 3'b000) begin
          dec.unit = UN_SYS;
          unique case (instr[31:7])
            25'h0000000:                    dec.sys_op = SYS_ECALL;
            25'h0002000:                    dec.sys_op = SYS_EBREAK;
            {12'h302, 13'h0}:               dec.sys_op = SYS_MRET;
            {12'h105, 13'h0}:               dec.sys_op = SYS_NOP;   // wfi
            default:                        dec.unit   = UN_ILL;
          endcase
        end else if (f3 != 3'b100) begin
          dec.unit = UN_CSR; dec.rd_we = 1'b1;
        end
      end
      OPC_AMO: if (f3 == 3'b010) begin
        dec.unit = UN_LSU; dec.rd_we = 1'b1; dec.imm = '0;
        unique case (instr[31:27])
          5'b00010: if (instr[24:20] == 5'd0) dec.ls_kind = LS_LR; else dec.unit = UN_ILL;
          5'b00011: dec.ls_kind = LS_SC;
          5'b00001, 5'b00000, 5'b00100, 5'b01100, 5'b01000,
          5'b10000, 5'b10100, 5'b11000, 5'b11100: dec.ls_kind = LS_AMO;
          default: dec.unit = UN_ILL;
        endcase
      end
      OPC_CUSTOM0: if (f3 == 3'b000 && f7 <= 7'd17) begin
        dec.vop  = vop_e'(f7);
        dec.unit = (f7 <= 7'd1) ? UN_VLSU : UN_MFU;
      end
      default: dec.unit = UN_ILL;
    endcase
  end

endmodule
