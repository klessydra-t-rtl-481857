// klessydra_t13: an interleaved-multithreading (IMT) RV32IMA core with a
// vector coprocessor working out of scratchpad memories.
//
// Pipeline (four stages, one instruction per cycle, no hazard logic):
//   IF  pc_harc picks the next hart in rotation and sends its PC to the
//       program memory (synchronous, one cycle)
//   ID  the instruction arrives, is decoded and reads the hart's registers
//       (rs1, rs2 and rd, which the vector instructions use as an address)
//   EX  the scalar unit (exec_unit), the CSRs, the LSU and the coprocessor
//       (MFU + SPMIs) act; branches, jumps, traps and mret redirect the
//       hart's PC
//   WB  the result is written to the hart's register file
// With three harts in four stages consecutive instructions of one hart are
// three cycles apart, so a result is written before the next instruction of
// the same hart reads it and a redirect reaches that hart's next fetch.
//
// Coprocessor: harts use SPMI harc % M; the MFU has M controllers sharing F
// functional-unit sets. A vector instruction whose SPMI is busy, whose MFU
// units are taken, or which needs the busy LSU, is not executed: the hart's
// PC is set back to the instruction itself (self-referencing jump), so it is
// fetched again three cycles later while the other harts continue. Vector
// operands are addresses in the scratchpad space starting at SPM_BASE; each
// hart sees its own SPMI at the same addresses when M = HARTS. A vector
// instruction whose operands fall outside the space, are not word aligned or
// straddle two SPMs traps with cause 24. A zero length is a no-op.
//
// Default parameters: heterogeneous MIMD + SIMD, M = 3, F = 1, D = 2, with
// N = 4 SPMs; this is the configuration the paper finds the best trade-off.
// SPM capacity, address map, instruction encoding and reset addresses are
// this design's choices (the paper leaves them open).
module klessydra_t13
  import kl_pkg::*;
#(
  parameter int unsigned HARTS       = 3,
  parameter int unsigned M           = 3,        // SPMIs
  parameter int unsigned F           = 1,        // MFU functional-unit sets
  parameter int unsigned D           = 2,        // lanes = SPM banks
  parameter int unsigned N           = 4,        // SPMs per SPMI
  parameter int unsigned SPM_BYTES   = 4096,     // capacity of one SPM
  parameter logic [31:0] BOOT_ADDR   = 32'h0000_0000,
  parameter logic [31:0] MTVEC_RESET = 32'h0000_0100,
  parameter logic [31:0] SPM_BASE    = 32'h1000_0000,
  localparam int unsigned HW    = (HARTS > 1) ? $clog2(HARTS) : 1,
  localparam int unsigned MW    = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned WORDS = SPM_BYTES / 4,
  localparam int unsigned AW    = $clog2(N * WORDS),
  localparam logic [31:0] SPMI_BYTES = 32'(N * SPM_BYTES)
) (
  input  logic        clk,
  input  logic        rst_n,
  // program memory
  output logic        instr_req,
  output logic [31:0] instr_addr,
  input  logic [31:0] instr_rdata,   // the cycle after instr_req
  // data memory
  output logic        data_req,
  output logic        data_we,
  output logic [3:0]  data_be,
  output logic [31:0] data_addr,
  output logic [31:0] data_wdata,
  input  logic [31:0] data_rdata     // the cycle after a read request
);

  // ===================================================================== IF
  logic          fetch_valid;
  logic [HW-1:0] harc_if;
  logic [31:0]   pc_if;
  logic          redir;
  logic [HW-1:0] redir_harc;
  logic [31:0]   redir_pc;

  pc_harc #(.HARTS(HARTS), .BOOT_ADDR(BOOT_ADDR)) u_pc (
    .clk, .rst_n, .fetch_valid, .harc_if, .pc_if, .redir, .redir_harc, .redir_pc
  );

  assign instr_req  = fetch_valid;
  assign instr_addr = pc_if;

  typedef struct packed {
    logic          valid;
    logic [HW-1:0] harc;
    logic [31:0]   pc;
  } ifid_t;

  typedef struct packed {
    logic          valid;
    logic [HW-1:0] harc;
    logic [31:0]   pc;
    dec_t          dec;
    logic [31:0]   rs1v;
    logic [31:0]   rs2v;
    logic [31:0]   rdv;
  } idex_t;

  typedef struct packed {
    logic          valid;
    logic [HW-1:0] harc;
    logic [4:0]    rd;
    logic          rd_we;
    logic [1:0]    sel;
    logic [2:0]    funct3;
    logic [1:0]    addr_lo;
    logic [31:0]   res;
  } exwb_t;

  ifid_t ifid;
  idex_t idex;
  exwb_t exwb;

  // ===================================================================== ID
  dec_t        id_dec;
  logic [31:0] id_rs1v, id_rs2v, id_rdv;
  logic          rf_we;
  logic [HW-1:0] rf_harc;
  logic [4:0]    rf_addr;
  logic [31:0]   rf_wdata;

  decoder u_dec (.instr(instr_rdata), .dec(id_dec));

  regfile #(.HARTS(HARTS)) u_rf (
    .clk   (clk),
    .rharc (ifid.harc),
    .ra1   (id_dec.rs1),
    .ra2   (id_dec.rs2),
    .ra3   (id_dec.rd),
    .rd1   (id_rs1v),
    .rd2   (id_rs2v),
    .rd3   (id_rdv),
    .we    (rf_we),
    .wharc (rf_harc),
    .wa    (rf_addr),
    .wd    (rf_wdata)
  );

  // ===================================================================== EX
  dec_t        d;
  logic [31:0] ex_res, ex_target;
  logic        ex_jump;

  assign d = idex.dec;

  exec_unit u_exec (
    .dec(d), .pc(idex.pc), .rs1v(idex.rs1v), .rs2v(idex.rs2v),
    .result(ex_res), .jump(ex_jump), .target(ex_target)
  );

  // CSRs
  logic [31:0]            csr_rdata, tvec, epc;
  logic                   csr_illegal;
  logic                   trap, mret, retire;
  logic [31:0]            trap_cause, trap_tval;
  logic [HARTS-1:0][31:0] mvsize;
  sew_e                   mvtype [HARTS];
  logic [HARTS-1:0][4:0]  mpsclfac;

  csr_unit #(.HARTS(HARTS), .MTVEC_RESET(MTVEC_RESET)) u_csr (
    .clk, .rst_n,
    .op_valid    (idex.valid && d.unit == UN_CSR),
    .op_harc     (idex.harc),
    .op_addr     (d.csr),
    .op_funct3   (d.funct3),
    .op_src      (d.funct3[2] ? {27'd0, d.rs1} : idex.rs1v),
    .op_src_nz   (d.rs1 != 5'd0),
    .op_rdata    (csr_rdata),
    .op_illegal  (csr_illegal),
    .trap        (trap),
    .trap_harc   (idex.harc),
    .trap_cause  (trap_cause),
    .trap_pc     (idex.pc),
    .trap_tval   (trap_tval),
    .tvec        (tvec),
    .mret        (mret),
    .mret_harc   (idex.harc),
    .epc         (epc),
    .retire      (retire),
    .retire_harc (idex.harc),
    .mvsize      (mvsize),
    .mvtype      (mvtype),
    .mpsclfac    (mpsclfac)
  );

  // scratchpad operand check: inside the space, word aligned, in one SPM
  function automatic logic spm_ok(logic [31:0] a, logic [31:0] len);
    logic [31:0] off;
    off = a - SPM_BASE;
    if (len == 0) return 1'b1;
    return (a >= SPM_BASE) && (off < SPMI_BYTES) && (off[1:0] == 2'b00) &&
           (len <= SPMI_BYTES) &&
           ((off + len - 1) / SPM_BYTES == off / SPM_BYTES);
  endfunction

  logic [MW-1:0]     ex_spmi;
  logic [31:0]       v_size;
  logic [31:0]       ls_addr;
  logic              exc;
  logic              replay;
  logic              lsu_req, lsu_busy, lsu_sc_fail, lsu_v_done;
  logic              spmu_req, spmu_gnt;     // MFU request / grant
  logic [M-1:0]      spmu_busy;              // per-SPMI busy
  logic [M-1:0]      spmi_owner_lsu;
  logic [M-1:0]      claim, release_s;
  logic [M-1:0]      mfu_done, mfu_ctrl_busy;
  logic [F-1:0][NU-1:0] mfu_unit_busy;
  bsrc_e             ex_bsrc;

  assign ex_spmi = MW'(int'(idex.harc) % M);
  assign ex_bsrc = b_source(d.vop);

  always_comb begin
    v_size     = (d.unit == UN_VLSU) ? idex.rs2v : mvsize[idex.harc];
    ls_addr    = (d.ls_kind == LS_LOAD || d.ls_kind == LS_STORE) ? idex.rs1v + d.imm : idex.rs1v;
    exc        = 1'b0;
    trap_cause = '0;
    trap_tval  = '0;
    mret       = 1'b0;
    unique case (d.unit)
      UN_ILL: begin exc = 1'b1; trap_cause = CAUSE_ILLEGAL; end
      UN_CSR: if (csr_illegal) begin exc = 1'b1; trap_cause = CAUSE_ILLEGAL; end
      UN_SYS: unique case (d.sys_op)
        SYS_ECALL:  begin exc = 1'b1; trap_cause = CAUSE_ECALL_M; end
        SYS_EBREAK: begin exc = 1'b1; trap_cause = CAUSE_EBREAK; trap_tval = idex.pc; end
        SYS_MRET:   mret = 1'b1;
        default: ;
      endcase
      UN_LSU: begin
        if ((d.funct3[1:0] == 2'b01 && ls_addr[0]) ||
            (d.funct3[1:0] == 2'b10 && ls_addr[1:0] != 2'b00)) begin
          exc        = 1'b1;
          trap_cause = (d.ls_kind == LS_LOAD || d.ls_kind == LS_LR) ? CAUSE_LD_MISAL : CAUSE_ST_MISAL;
          trap_tval  = ls_addr;
        end
      end
      UN_VLSU: begin
        if (d.vop == KMEMLD) exc = !spm_ok(idex.rdv, v_size) || (idex.rs1v[1:0] != 2'b00);
        else                 exc = !spm_ok(idex.rs1v, v_size) || (idex.rdv[1:0] != 2'b00);
        trap_cause = CAUSE_SPM_RANGE;
      end
      UN_MFU: begin
        exc = !spm_ok(idex.rs1v, v_size) ||
              (ex_bsrc == B_VEC   && !spm_ok(idex.rs2v, v_size)) ||
              (ex_bsrc == B_SPMSC && !spm_ok(idex.rs2v, 32'd4)) ||
              !spm_ok(idex.rdv, scalar_result(d.vop) ? 32'd4 : v_size);
        trap_cause = CAUSE_SPM_RANGE;
      end
      default: ;
    endcase
    if (!idex.valid) begin
      exc  = 1'b0;
      mret = 1'b0;
    end

    // issue to the LSU / coprocessor, or retry (self-referencing jump)
    lsu_req  = idex.valid && !exc &&
               ((d.unit == UN_LSU) ||
                (d.unit == UN_VLSU && v_size != 0 && !spmu_busy[ex_spmi]));
    spmu_req = idex.valid && !exc && d.unit == UN_MFU && v_size != 0 && !spmu_busy[ex_spmi];
  end

  always_comb begin
    replay   = 1'b0;
    if (idex.valid && !exc) begin
      unique case (d.unit)
        UN_LSU:  replay = lsu_busy;
        UN_VLSU: replay = (v_size != 0) && (lsu_busy || spmu_busy[ex_spmi]);
        UN_MFU:  replay = (v_size != 0) && (spmu_busy[ex_spmi] || !spmu_gnt);
        default: ;
      endcase
    end

    trap   = idex.valid && exc;
    retire = idex.valid && !exc && !replay;

    redir      = idex.valid && (exc || mret || replay || (d.unit == UN_BR && ex_jump));
    redir_harc = idex.harc;
    redir_pc   = exc ? tvec : mret ? epc : replay ? idex.pc : ex_target;

    claim = '0;
    if (spmu_req && spmu_gnt) claim[ex_spmi] = 1'b1;
    if (lsu_req && !lsu_busy && d.unit == UN_VLSU) claim[ex_spmi] = 1'b1;
  end

  // ---------------------------------------------------------------- LSU
  logic          lsu_s_re, lsu_s_we;
  logic [MW-1:0] lsu_s_sel;
  logic [AW-1:0] lsu_s_word;
  logic [31:0]   lsu_s_wdata, lsu_s_rdata;
  logic [3:0]    lsu_s_be;
  logic [M-1:0][31:0] spmi_lsu_rdata;

  lsu #(.HARTS(HARTS), .M(M), .AW(AW)) u_lsu (
    .clk, .rst_n,
    .req        (lsu_req),
    .harc       (idex.harc),
    .unit       (d.unit),
    .kind       (d.ls_kind),
    .vop        (d.vop),
    .funct3     (d.funct3),
    .funct5     (d.funct5),
    .addr       ((d.unit == UN_VLSU) ? ((d.vop == KMEMLD) ? idex.rs1v : idex.rdv) : ls_addr),
    .wdata      (idex.rs2v),
    .v_spm      (AW'((((d.vop == KMEMLD) ? idex.rdv : idex.rs1v) - SPM_BASE) >> 2)),
    .v_spmi     (ex_spmi),
    .v_size     (v_size),
    .busy       (lsu_busy),
    .sc_fail    (lsu_sc_fail),
    .data_req, .data_we, .data_be, .data_addr, .data_wdata, .data_rdata,
    .s_re       (lsu_s_re),
    .s_we       (lsu_s_we),
    .s_sel      (lsu_s_sel),
    .s_word     (lsu_s_word),
    .s_wdata    (lsu_s_wdata),
    .s_be       (lsu_s_be),
    .s_rdata    (lsu_s_rdata),
    .v_done     (lsu_v_done)
  );

  assign lsu_s_rdata = spmi_lsu_rdata[lsu_s_sel];

  always_comb begin
    for (int s = 0; s < M; s++)
      release_s[s] = mfu_done[s] || (lsu_v_done && lsu_s_sel == MW'(s));
  end

  // ---------------------------------------------------------------- MFU
  logic [M-1:0]              m_a_re, m_b_re, m_w_en;
  logic [M-1:0][AW-1:0]      m_a_word, m_b_word, m_w_word;
  logic [M-1:0][D-1:0][31:0] m_a_rdata, m_b_rdata, m_w_data;
  logic [M-1:0][D-1:0][3:0]  m_w_be;

  mfu #(.M(M), .F(F), .N(N), .D(D), .SPM_BYTES(SPM_BYTES)) u_mfu (
    .clk, .rst_n,
    .req        (spmu_req),
    .req_spmi   (ex_spmi),
    .req_op     (d.vop),
    .req_a      (idex.rs1v - SPM_BASE),
    .req_b      (idex.rs2v - SPM_BASE),
    .req_d      (idex.rdv - SPM_BASE),
    .req_scalar (idex.rs2v),
    .req_size   (v_size),
    .req_sew    (mvtype[idex.harc]),
    .req_sc     (mpsclfac[idex.harc]),
    .gnt        (spmu_gnt),
    .ctrl_busy  (mfu_ctrl_busy),
    .done       (mfu_done),
    .unit_busy  (mfu_unit_busy),
    .a_re       (m_a_re),
    .a_word     (m_a_word),
    .a_rdata    (m_a_rdata),
    .b_re       (m_b_re),
    .b_word     (m_b_word),
    .b_rdata    (m_b_rdata),
    .w_en       (m_w_en),
    .w_word     (m_w_word),
    .w_data     (m_w_data),
    .w_be       (m_w_be)
  );

  // --------------------------------------------------------------- SPMIs
  for (genvar s = 0; s < M; s++) begin : g_spmi
    spmi #(.N(N), .D(D), .SPM_BYTES(SPM_BYTES)) u_spmi (
      .clk, .rst_n,
      .claim      (claim[s]),
      .claim_lsu  (d.unit == UN_VLSU),
      .release_i  (release_s[s]),
      .busy       (spmu_busy[s]),
      .owner_lsu  (spmi_owner_lsu[s]),
      .lsu_re     (lsu_s_re && lsu_s_sel == MW'(s)),
      .lsu_we     (lsu_s_we && lsu_s_sel == MW'(s)),
      .lsu_word   (lsu_s_word),
      .lsu_wdata  (lsu_s_wdata),
      .lsu_be     (lsu_s_be),
      .lsu_rdata  (spmi_lsu_rdata[s]),
      .a_re       (m_a_re[s]),
      .a_word     (m_a_word[s]),
      .a_rdata    (m_a_rdata[s]),
      .b_re       (m_b_re[s]),
      .b_word     (m_b_word[s]),
      .b_rdata    (m_b_rdata[s]),
      .w_en       (m_w_en[s]),
      .w_word     (m_w_word[s]),
      .w_data     (m_w_data[s]),
      .w_be       (m_w_be[s])
    );
  end

  // ========================================================= pipeline regs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ifid <= '0;
      idex <= '0;
      exwb <= '0;
    end else begin
      ifid.valid <= fetch_valid;
      ifid.harc  <= harc_if;
      ifid.pc    <= pc_if;

      idex.valid <= ifid.valid;
      idex.harc  <= ifid.harc;
      idex.pc    <= ifid.pc;
      idex.dec   <= id_dec;
      idex.rs1v  <= id_rs1v;
      idex.rs2v  <= id_rs2v;
      idex.rdv   <= id_rdv;

      exwb.valid   <= idex.valid && !exc && !replay;
      exwb.harc    <= idex.harc;
      exwb.rd      <= d.rd;
      exwb.rd_we   <= d.rd_we && (d.unit != UN_VLSU) && (d.unit != UN_MFU);
      exwb.funct3  <= d.funct3;
      exwb.addr_lo <= ls_addr[1:0];
      exwb.res     <= (d.unit == UN_CSR) ? csr_rdata : ex_res;
      exwb.sel     <= 2'd0;
      if (d.unit == UN_LSU)
        unique case (d.ls_kind)
          LS_LOAD, LS_LR: exwb.sel <= 2'd1;
          LS_AMO:         exwb.sel <= 2'd2;
          LS_SC:          exwb.sel <= 2'd3;
          default:        exwb.sel <= 2'd0;
        endcase
    end
  end

  // ===================================================================== WB
  writeback #(.HARTS(HARTS)) u_wb (
    .valid     (exwb.valid),
    .harc      (exwb.harc),
    .rd        (exwb.rd),
    .rd_we     (exwb.rd_we),
    .sel       (exwb.sel),
    .funct3    (exwb.funct3),
    .addr_lo   (exwb.addr_lo),
    .exec_res  (exwb.res),
    .mem_rdata (data_rdata),
    .sc_fail   (lsu_sc_fail),
    .rf_we     (rf_we),
    .rf_harc   (rf_harc),
    .rf_addr   (rf_addr),
    .rf_wdata  (rf_wdata)
  );

endmodule
