// kl_pkg: types, encodings and element-wise helper functions shared by the
// Klessydra-T13 style interleaved-multithreading core and its vector
// coprocessor (MFU + SPMI).
//
// What follows the paper: the RV32IMA base ISA, the list of custom vector
// instructions (kmemld ... kvcp), the five internal functional units of the
// MFU (add/sub, shift, multiply, accumulate, compare) and the 8/16/32-bit
// subword-SIMD element widths.
// What is this design's own choice: the binary encoding of the custom
// instructions (custom-0 opcode, funct7 selects the operation), the CSR
// numbers of the vector configuration registers, the exception cause used
// for a bad scratchpad address, and the exact semantics of the element
// functions (wrap-around arithmetic, low half of products, signed compares).
package kl_pkg;

  localparam int unsigned XLEN = 32;

  // ---------------------------------------------------------------- opcodes
  localparam logic [6:0] OPC_LUI    = 7'b0110111;
  localparam logic [6:0] OPC_AUIPC  = 7'b0010111;
  localparam logic [6:0] OPC_JAL    = 7'b1101111;
  localparam logic [6:0] OPC_JALR   = 7'b1100111;
  localparam logic [6:0] OPC_BRANCH = 7'b1100011;
  localparam logic [6:0] OPC_LOAD   = 7'b0000011;
  localparam logic [6:0] OPC_STORE  = 7'b0100011;
  localparam logic [6:0] OPC_OPIMM  = 7'b0010011;
  localparam logic [6:0] OPC_OP     = 7'b0110011;
  localparam logic [6:0] OPC_FENCE  = 7'b0001111;
  localparam logic [6:0] OPC_SYSTEM = 7'b1110011;
  localparam logic [6:0] OPC_AMO    = 7'b0101111;
  localparam logic [6:0] OPC_CUSTOM0 = 7'b0001011;  // vector extension

  // Custom vector instructions: R-type, opcode custom-0, funct3 = 000,
  // funct7 = the code below. rd, rs1, rs2 hold scratchpad / memory addresses
  // or a scalar, as listed per instruction.
  typedef enum logic [6:0] {
    KMEMLD   = 7'd0,   // (rd)=SPM dst, (rs1)=mem src, rs2=bytes
    KMEMSTR  = 7'd1,   // (rd)=mem dst, (rs1)=SPM src, rs2=bytes
    KADDV    = 7'd2,
    KSUBV    = 7'd3,
    KVMUL    = 7'd4,
    KVRED    = 7'd5,   // (rd) <- sum (rs1)
    KDOTP    = 7'd6,   // (rd) <- sum (rs1)*(rs2)
    KSVADDSC = 7'd7,   // scalar read from SPM at (rs2)
    KSVADDRF = 7'd8,   // scalar taken from register rs2
    KSVMULSC = 7'd9,
    KSVMULRF = 7'd10,
    KDOTPPS  = 7'd11,  // products shifted right by MPSCLFAC before the sum
    KSRLV    = 7'd12,
    KSRAV    = 7'd13,
    KRELU    = 7'd14,
    KVSLT    = 7'd15,
    KSVSLT   = 7'd16,
    KVCP     = 7'd17
  } vop_e;

  // Element width (CSR MVTYPE)
  typedef enum logic [1:0] { SEW8 = 2'd0, SEW16 = 2'd1, SEW32 = 2'd2 } sew_e;

  // MFU internal functional units
  localparam int unsigned NU    = 5;
  localparam int unsigned U_ADD = 0;
  localparam int unsigned U_SHF = 1;
  localparam int unsigned U_MUL = 2;
  localparam int unsigned U_ACC = 3;
  localparam int unsigned U_CMP = 4;

  // Source of operand B of a vector instruction
  typedef enum logic [1:0] { B_NONE, B_VEC, B_SPMSC, B_REG } bsrc_e;

  // ------------------------------------------------------------------ CSRs
  localparam logic [11:0] CSR_MSTATUS  = 12'h300;
  localparam logic [11:0] CSR_MISA     = 12'h301;
  localparam logic [11:0] CSR_MTVEC    = 12'h305;
  localparam logic [11:0] CSR_MSCRATCH = 12'h340;
  localparam logic [11:0] CSR_MEPC     = 12'h341;
  localparam logic [11:0] CSR_MCAUSE   = 12'h342;
  localparam logic [11:0] CSR_MTVAL    = 12'h343;
  localparam logic [11:0] CSR_MCYCLE   = 12'hB00;
  localparam logic [11:0] CSR_MINSTRET = 12'hB02;
  localparam logic [11:0] CSR_MCYCLEH  = 12'hB80;
  localparam logic [11:0] CSR_MINSTRETH= 12'hB82;
  localparam logic [11:0] CSR_CYCLE    = 12'hC00;
  localparam logic [11:0] CSR_INSTRET  = 12'hC02;
  localparam logic [11:0] CSR_MHARTID  = 12'hF14;
  localparam logic [11:0] CSR_MVSIZE   = 12'hBF0;  // vector length in bytes
  localparam logic [11:0] CSR_MVTYPE   = 12'hBF8;  // element width, sew_e
  localparam logic [11:0] CSR_MPSCLFAC = 12'hBE0;  // post-scaling shift

  // Exception causes
  localparam logic [31:0] CAUSE_ILLEGAL   = 32'd2;
  localparam logic [31:0] CAUSE_EBREAK    = 32'd3;
  localparam logic [31:0] CAUSE_LD_MISAL  = 32'd4;
  localparam logic [31:0] CAUSE_ST_MISAL  = 32'd6;
  localparam logic [31:0] CAUSE_ECALL_M   = 32'd11;
  localparam logic [31:0] CAUSE_SPM_RANGE = 32'd24;  // custom cause

  // ------------------------------------------------------ decoded instruction
  typedef enum logic [3:0] {
    UN_NONE, UN_ALU, UN_BR, UN_MD, UN_LSU, UN_CSR, UN_SYS, UN_VLSU, UN_MFU, UN_ILL
  } unit_e;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR, ALU_SRL, ALU_SRA,
    ALU_OR, ALU_AND, ALU_LUI, ALU_AUIPC
  } alu_op_e;

  typedef enum logic [2:0] { SYS_ECALL, SYS_EBREAK, SYS_MRET, SYS_NOP } sys_op_e;

  typedef enum logic [2:0] { LS_LOAD, LS_STORE, LS_LR, LS_SC, LS_AMO } ls_kind_e;

  typedef struct packed {
    unit_e       unit;
    alu_op_e     alu_op;
    logic        use_imm;     // ALU operand B is the immediate
    logic [2:0]  funct3;      // branch / mul-div / load-store size / csr op
    logic [4:0]  funct5;      // AMO operation
    ls_kind_e    ls_kind;
    sys_op_e     sys_op;
    vop_e        vop;
    logic [4:0]  rd;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic        rd_we;       // writes the integer register rd
    logic [31:0] imm;
    logic [11:0] csr;
    logic        jal;
    logic        jalr;
  } dec_t;

  // ------------------------------------------------- vector-op properties
  function automatic logic [NU-1:0] fu_mask(vop_e op);
    logic [NU-1:0] m;
    m = '0;
    unique case (op)
      KADDV, KSUBV, KSVADDSC, KSVADDRF, KVCP: m[U_ADD] = 1'b1;
      KVMUL, KSVMULSC, KSVMULRF:              m[U_MUL] = 1'b1;
      KVRED:                                  m[U_ACC] = 1'b1;
      KDOTP, KDOTPPS:                         begin m[U_MUL] = 1'b1; m[U_ACC] = 1'b1; end
      KSRLV, KSRAV:                           m[U_SHF] = 1'b1;
      KRELU, KVSLT, KSVSLT:                   m[U_CMP] = 1'b1;
      default:                                m = '0;
    endcase
    return m;
  endfunction

  function automatic bsrc_e b_source(vop_e op);
    unique case (op)
      KADDV, KSUBV, KVMUL, KDOTP, KDOTPPS, KVSLT: return B_VEC;
      KSVADDSC, KSVMULSC:                         return B_SPMSC;
      KSVADDRF, KSVMULRF, KSRLV, KSRAV, KSVSLT:   return B_REG;
      default:                                    return B_NONE;
    endcase
  endfunction

  function automatic logic scalar_result(vop_e op);
    return (op == KVRED) || (op == KDOTP) || (op == KDOTPPS);
  endfunction

  // ------------------------------------------------ subword element helpers
  // A 32-bit word holds 4, 2 or 1 elements. Every helper works element by
  // element; carries never cross an element boundary.

  // Replicate the low element of s over the whole word.
  function automatic logic [31:0] v_rep(logic [31:0] s, sew_e sew);
    unique case (sew)
      SEW8:    return {4{s[7:0]}};
      SEW16:   return {2{s[15:0]}};
      default: return s;
    endcase
  endfunction

  function automatic logic [31:0] v_addsub(logic [31:0] a, logic [31:0] b, logic sub, sew_e sew);
    logic [31:0] y;
    logic [31:0] bb;
    bb = sub ? ~b : b;
    unique case (sew)
      SEW8:    for (int e = 0; e < 4; e++) y[8*e +: 8]   = a[8*e +: 8]   + bb[8*e +: 8]   + {7'd0, sub};
      SEW16:   for (int e = 0; e < 2; e++) y[16*e +: 16] = a[16*e +: 16] + bb[16*e +: 16] + {15'd0, sub};
      default: y = a + bb + {31'd0, sub};
    endcase
    return y;
  endfunction

  // Element-wise product, low SEW bits kept.
  function automatic logic [31:0] v_mul(logic [31:0] a, logic [31:0] b, sew_e sew);
    logic [31:0] y;
    unique case (sew)
      SEW8:    for (int e = 0; e < 4; e++) y[8*e +: 8]   = a[8*e +: 8]   * b[8*e +: 8];
      SEW16:   for (int e = 0; e < 2; e++) y[16*e +: 16] = a[16*e +: 16] * b[16*e +: 16];
      default: y = a * b;
    endcase
    return y;
  endfunction

  // Sum over the elements of a word of the signed full products, each
  // arithmetically shifted right by sc (post-scaling), wrapped to 32 bits.
  function automatic logic [31:0] v_dot(logic [31:0] a, logic [31:0] b, sew_e sew, logic [4:0] sc);
    logic signed [63:0] p;
    logic [31:0] s;
    s = '0;
    unique case (sew)
      SEW8: for (int e = 0; e < 4; e++) begin
        p = 64'($signed(a[8*e +: 8])) * 64'($signed(b[8*e +: 8]));
        s = s + 32'(p >>> sc);
      end
      SEW16: for (int e = 0; e < 2; e++) begin
        p = 64'($signed(a[16*e +: 16])) * 64'($signed(b[16*e +: 16]));
        s = s + 32'(p >>> sc);
      end
      default: begin
        p = 64'($signed(a)) * 64'($signed(b));
        s = 32'(p >>> sc);
      end
    endcase
    return s;
  endfunction

  // Sum of the signed elements of a word.
  function automatic logic [31:0] v_hsum(logic [31:0] a, sew_e sew);
    logic [31:0] s;
    s = '0;
    unique case (sew)
      SEW8:    for (int e = 0; e < 4; e++) s = s + 32'($signed(a[8*e +: 8]));
      SEW16:   for (int e = 0; e < 2; e++) s = s + 32'($signed(a[16*e +: 16]));
      default: s = a;
    endcase
    return s;
  endfunction

  // Element-wise shift right, logical or arithmetic, by sh mod SEW.
  function automatic logic [31:0] v_shr(logic [31:0] a, logic [4:0] sh, logic arith, sew_e sew);
    logic [31:0] y;
    unique case (sew)
      SEW8: for (int e = 0; e < 4; e++)
        y[8*e +: 8] = arith ? 8'($signed(a[8*e +: 8]) >>> sh[2:0]) : a[8*e +: 8] >> sh[2:0];
      SEW16: for (int e = 0; e < 2; e++)
        y[16*e +: 16] = arith ? 16'($signed(a[16*e +: 16]) >>> sh[3:0]) : a[16*e +: 16] >> sh[3:0];
      default: y = arith ? 32'($signed(a) >>> sh) : a >> sh;
    endcase
    return y;
  endfunction

  // Element-wise signed a < b, giving 1 or 0 per element (mask vector).
  function automatic logic [31:0] v_slt(logic [31:0] a, logic [31:0] b, sew_e sew);
    logic [31:0] y;
    y = '0;
    unique case (sew)
      SEW8:    for (int e = 0; e < 4; e++) y[8*e]  = $signed(a[8*e +: 8])   < $signed(b[8*e +: 8]);
      SEW16:   for (int e = 0; e < 2; e++) y[16*e] = $signed(a[16*e +: 16]) < $signed(b[16*e +: 16]);
      default: y[0] = $signed(a) < $signed(b);
    endcase
    return y;
  endfunction

  // Element-wise ReLU: negative elements become zero.
  function automatic logic [31:0] v_relu(logic [31:0] a, sew_e sew);
    logic [31:0] y;
    unique case (sew)
      SEW8:    for (int e = 0; e < 4; e++) y[8*e +: 8]   = a[8*e+7]   ? 8'd0  : a[8*e +: 8];
      SEW16:   for (int e = 0; e < 2; e++) y[16*e +: 16] = a[16*e+15] ? 16'd0 : a[16*e +: 16];
      default: y = a[31] ? 32'd0 : a;
    endcase
    return y;
  endfunction

  // Keep only the bytes whose enable bit is set.
  function automatic logic [31:0] byte_mask(logic [31:0] a, logic [3:0] be);
    logic [31:0] y;
    for (int i = 0; i < 4; i++) y[8*i +: 8] = be[i] ? a[8*i +: 8] : 8'd0;
    return y;
  endfunction

endpackage
