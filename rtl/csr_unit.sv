// csr_unit: machine-mode control and status registers, one set per hart.
//
// Per hart: mstatus (MIE, MPIE; MPP reads as machine mode), mtvec, mepc,
// mcause, mtval, mscratch, minstret, plus three vector-configuration CSRs
// read by the coprocessor: MVSIZE (vector length in bytes), MVTYPE (element
// width: 0 = 8, 1 = 16, 2 = 32 bit) and MPSCLFAC (post-scaling shift of
// kdotpps). mcycle is common to all harts; misa and mhartid are read-only.
//
// Access port: the execute stage presents a CSR instruction (funct3 of
// CSRRW/S/C and their immediate forms, the source value and whether the
// rs1/zimm field is non-zero); rdata and illegal are combinational, the
// write happens at the clock edge. Trap port: on trap the hart's mepc,
// mcause and mtval are written, MIE is saved into MPIE and cleared, and
// mtvec (direct mode) gives the handler address. mret restores MIE and
// returns mepc. retire counts instructions per hart.
// The paper only says the CSR unit is replicated per hart and that the core
// runs bare-metal in machine mode; the CSR set, the numbers of the vector
// CSRs and the reset values are this design's choices.
module csr_unit
  import kl_pkg::*;
#(
  parameter int unsigned HARTS       = 3,
  parameter logic [31:0] MTVEC_RESET = 32'h0000_0100,
  localparam int unsigned HW = (HARTS > 1) ? $clog2(HARTS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // CSR instruction
  input  logic                  op_valid,
  input  logic [HW-1:0]         op_harc,
  input  logic [11:0]           op_addr,
  input  logic [2:0]            op_funct3,
  input  logic [31:0]           op_src,     // rs1 value or zero-extended zimm
  input  logic                  op_src_nz,  // rs1 / zimm field is not zero
  output logic [31:0]           op_rdata,
  output logic                  op_illegal,
  // traps
  input  logic                  trap,
  input  logic [HW-1:0]         trap_harc,
  input  logic [31:0]           trap_cause,
  input  logic [31:0]           trap_pc,
  input  logic [31:0]           trap_tval,
  output logic [31:0]           tvec,       // handler of trap_harc
  input  logic                  mret,
  input  logic [HW-1:0]         mret_harc,
  output logic [31:0]           epc,        // mepc of mret_harc
  input  logic                  retire,
  input  logic [HW-1:0]         retire_harc,
  // vector configuration, per hart
  output logic [HARTS-1:0][31:0] mvsize,
  output sew_e                  mvtype   [HARTS],
  output logic [HARTS-1:0][4:0] mpsclfac
);

  logic [HARTS-1:0]       mie, mpie;
  logic [HARTS-1:0][31:0] mtvec, mepc, mcause, mtval, mscratch;
  logic [HARTS-1:0][63:0] minstret;
  logic [63:0]            mcycle;
  logic [HARTS-1:0][1:0]  vtype_q;

  for (genvar h = 0; h < HARTS; h++) begin : g_vt
    assign mvtype[h] = (vtype_q[h] == 2'd0) ? SEW8 : (vtype_q[h] == 2'd1) ? SEW16 : SEW32;
  end

  assign tvec = mtvec[trap_harc];
  assign epc  = mepc[mret_harc];

  logic        wr_en, ro;
  logic [31:0] wval;

  always_comb begin
    op_rdata   = '0;
    op_illegal = 1'b0;
    ro         = (op_addr[11:10] == 2'b11);
    unique case (op_addr)
      CSR_MSTATUS:   op_rdata = {19'd0, 2'b11, 3'd0, mpie[op_harc], 3'd0, mie[op_harc], 3'd0};
      CSR_MISA:      op_rdata = 32'h4000_1101;  // RV32 I, M, A
      CSR_MTVEC:     op_rdata = mtvec[op_harc];
      CSR_MSCRATCH:  op_rdata = mscratch[op_harc];
      CSR_MEPC:      op_rdata = mepc[op_harc];
      CSR_MCAUSE:    op_rdata = mcause[op_harc];
      CSR_MTVAL:     op_rdata = mtval[op_harc];
      CSR_MCYCLE, CSR_CYCLE:       op_rdata = mcycle[31:0];
      CSR_MCYCLEH:   op_rdata = mcycle[63:32];
      CSR_MINSTRET, CSR_INSTRET:   op_rdata = minstret[op_harc][31:0];
      CSR_MINSTRETH: op_rdata = minstret[op_harc][63:32];
      CSR_MHARTID:   op_rdata = 32'(op_harc);
      CSR_MVSIZE:    op_rdata = mvsize[op_harc];
      CSR_MVTYPE:    op_rdata = {30'd0, vtype_q[op_harc]};
      CSR_MPSCLFAC:  op_rdata = {27'd0, mpsclfac[op_harc]};
      default:       op_illegal = 1'b1;
    endcase
    // CSRRW/CSRRWI always write; set/clear only with a non-zero source
    wr_en = op_valid && (op_funct3[1:0] == 2'b01 || op_src_nz);
    if (wr_en && ro) op_illegal = 1'b1;
    unique case (op_funct3[1:0])
      2'b01:   wval = op_src;
      2'b10:   wval = op_rdata | op_src;
      default: wval = op_rdata & ~op_src;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mie      <= '0;
      mpie     <= '0;
      mtvec    <= {HARTS{MTVEC_RESET}};
      mepc     <= '0;
      mcause   <= '0;
      mtval    <= '0;
      mscratch <= '0;
      minstret <= '0;
      mcycle   <= '0;
      mvsize   <= '0;
      vtype_q  <= {HARTS{2'd2}};
      mpsclfac <= '0;
    end else begin
      mcycle <= mcycle + 64'd1;
      if (retire) minstret[retire_harc] <= minstret[retire_harc] + 64'd1;
      if (wr_en && !op_illegal) begin
        unique case (op_addr)
          CSR_MSTATUS:   begin mie[op_harc] <= wval[3]; mpie[op_harc] <= wval[7]; end
          CSR_MTVEC:     mtvec[op_harc]    <= {wval[31:2], 2'b00};
          CSR_MSCRATCH:  mscratch[op_harc] <= wval;
          CSR_MEPC:      mepc[op_harc]     <= {wval[31:2], 2'b00};
          CSR_MCAUSE:    mcause[op_harc]   <= wval;
          CSR_MTVAL:     mtval[op_harc]    <= wval;
          CSR_MCYCLE:    mcycle[31:0]      <= wval;
          CSR_MCYCLEH:   mcycle[63:32]     <= wval;
          CSR_MINSTRET:  minstret[op_harc][31:0]  <= wval;
          CSR_MINSTRETH: minstret[op_harc][63:32] <= wval;
          CSR_MVSIZE:    mvsize[op_harc]   <= wval;
          CSR_MVTYPE:    vtype_q[op_harc]  <= (wval[1:0] == 2'd3) ? 2'd2 : wval[1:0];
          CSR_MPSCLFAC:  mpsclfac[op_harc] <= wval[4:0];
          default: ;
        endcase
      end
      if (trap) begin
        mepc[trap_harc]   <= trap_pc;
        mcause[trap_harc] <= trap_cause;
        mtval[trap_harc]  <= trap_tval;
        mpie[trap_harc]   <= mie[trap_harc];
        mie[trap_harc]    <= 1'b0;
      end
      if (mret) begin
        mie[mret_harc]  <= mpie[mret_harc];
        mpie[mret_harc] <= 1'b1;
      end
    end
  end

endmodule
