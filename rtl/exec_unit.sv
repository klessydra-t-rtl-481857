// exec_unit: scalar execution unit (EXEC) of the execute stage.
//
// Combinational. Computes, for the instruction in execute:
//  * the RV32I ALU result (operand B is rs2 or the immediate; LUI / AUIPC),
//  * the RV32M result (MUL, MULH, MULHSU, MULHU, DIV, DIVU, REM, REMU, with
//    the RISC-V results for division by zero and overflow),
//  * for branches and jumps: whether control transfers and where to, and
//    the link value pc + 4 written to rd by JAL / JALR.
// The paper only says the core runs RV32IMA and has a scalar execution unit;
// the single-cycle multiplier and divider are this design's choice (a
// multi-cycle divider would need the same retry mechanism the coprocessor
// uses).
module exec_unit
  import kl_pkg::*;
(
  input  dec_t        dec,
  input  logic [31:0] pc,
  input  logic [31:0] rs1v,
  input  logic [31:0] rs2v,
  output logic [31:0] result,
  output logic        jump,      // control transfer taken
  output logic [31:0] target
);

  logic [31:0] b, alu;
  logic [63:0] prod;
  logic [31:0] md;
  logic        take;

  always_comb begin
    b = dec.use_imm ? dec.imm : rs2v;
    unique case (dec.alu_op)
      ALU_ADD:   alu = rs1v + b;
      ALU_SUB:   alu = rs1v - b;
      ALU_SLL:   alu = rs1v << b[4:0];
      ALU_SLT:   alu = {31'd0, $signed(rs1v) < $signed(b)};
      ALU_SLTU:  alu = {31'd0, rs1v < b};
      ALU_XOR:   alu = rs1v ^ b;
      ALU_SRL:   alu = rs1v >> b[4:0];
      ALU_SRA:   alu = 32'($signed(rs1v) >>> b[4:0]);
      ALU_OR:    alu = rs1v | b;
      ALU_AND:   alu = rs1v & b;
      ALU_LUI:   alu = dec.imm;
      ALU_AUIPC: alu = pc + dec.imm;
      default:   alu = '0;
    endcase

    prod = '0;
    md   = '0;
    unique case (dec.funct3)
      3'b000: md = rs1v * rs2v;
      3'b001: begin prod = 64'($signed({{32{rs1v[31]}}, rs1v}) * $signed({{32{rs2v[31]}}, rs2v})); md = prod[63:32]; end
      3'b010: begin prod = 64'($signed({{32{rs1v[31]}}, rs1v}) * $signed({32'd0, rs2v}));          md = prod[63:32]; end
      3'b011: begin prod = {32'd0, rs1v} * {32'd0, rs2v};                                            md = prod[63:32]; end
      3'b100: md = (rs2v == 0) ? 32'hFFFF_FFFF :
                   (rs1v == 32'h8000_0000 && rs2v == 32'hFFFF_FFFF) ? rs1v :
                   32'($signed(rs1v) / $signed(rs2v));
      3'b101: md = (rs2v == 0) ? 32'hFFFF_FFFF : rs1v / rs2v;
      3'b110: md = (rs2v == 0) ? rs1v :
                   (rs1v == 32'h8000_0000 && rs2v == 32'hFFFF_FFFF) ? 32'd0 :
                   32'($signed(rs1v) % $signed(rs2v));
      default: md = (rs2v == 0) ? rs1v : rs1v % rs2v;
    endcase

    unique case (dec.funct3)
      3'b000:  take = (rs1v == rs2v);
      3'b001:  take = (rs1v != rs2v);
      3'b100:  take = $signed(rs1v) <  $signed(rs2v);
      3'b101:  take = $signed(rs1v) >= $signed(rs2v);
      3'b110:  take = rs1v <  rs2v;
      3'b111:  take = rs1v >= rs2v;
      default: take = 1'b0;
    endcase

    jump   = 1'b0;
    target = pc + dec.imm;
    result = alu;
    unique case (dec.unit)
      UN_MD: result = md;
      UN_BR: begin
        result = pc + 32'd4;
        if (dec.jal)       jump = 1'b1;
        else if (dec.jalr) begin jump = 1'b1; target = (rs1v + dec.imm) & ~32'd1; end
        else               jump = take;
      end
      default: ;
    endcase
  end

endmodule
