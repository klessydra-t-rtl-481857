// tb_matmul_workload: 64 x 64 matrix multiplication, 32-bit elements, run
// on the whole core at its default parameters (three harts, M = 3, F = 1,
// D = 2, N = 4), each hart multiplying its own pair of matrices.
//
// The three operands take 48 KiB, three times one hart's scratchpad space,
// so the program streams them through three SPMs (as many as the original
// design's MatMul runs use; the fourth stays idle):
//   * B is kept transposed in data memory, so a column of B is a row of B^T;
//   * for each half of B^T (32 rows, 8 KiB): kmemld it into SPM1 and SPM2;
//     then for each row i of A: kmemld the row (256 B) into SPM0, compute
//     the 32 elements C[i][j] with kdotp (one 32-bit word each, written into
//     SPM0 just after the A row), and kmemstr those 128 bytes to C;
//   * finally wait for the last transfer and set a flag word.
// A and B^T sit in different SPMs, so every kdotp reads both operands at the
// full rate of D words per cycle. The three harts contend for the one
// multiplier and accumulator (kdotp needs both) and for the LSU; cycles and
// retries are printed. Every element of C is compared with a product
// computed here (32-bit wrap-around arithmetic).
`timescale 1ns/1ps
module tb_matmul_workload;
  import kl_pkg::*;

  localparam int unsigned HARTS = 3;
  localparam int unsigned NM    = 64;   // matrix dimension
  localparam logic [31:0] SPM0 = 32'h1000_0000;
  localparam int unsigned SPMB = 4096;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        instr_req, data_req, data_we;
  logic [31:0] instr_addr, instr_rdata, data_addr, data_wdata, data_rdata;
  logic [3:0]  data_be;

  klessydra_t13 dut (.*);

  // ---------------------------------------------------------------- memories
  logic [31:0] imem [32768];
  logic [31:0] dmem [65536];

  // Requests count only once reset has been applied: before the first clock
  // edge the core's registers still hold their power-up values.
  always_ff @(posedge clk) begin
    if (rst_n && instr_req) instr_rdata <= imem[instr_addr[16:2]];
    if (rst_n && data_req) begin
      if (data_we) begin
        for (int i = 0; i < 4; i++)
          if (data_be[i]) dmem[data_addr[17:2]][8*i +: 8] <= data_wdata[8*i +: 8];
      end else data_rdata <= dmem[data_addr[17:2]];
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
  function automatic logic [31:0] addi(int rd, int rs1, int imm);
    return i_t(imm, rs1, 3'b000, rd, OPC_OPIMM);
  endfunction
  function automatic logic [31:0] lw(int rd, int off, int rs1);
    return i_t(off, rs1, 3'b010, rd, OPC_LOAD);
  endfunction
  function automatic logic [31:0] sw(int rs2, int off, int rs1);
    logic [11:0] m;
    m = 12'(off);
    return {m[11:5], 5'(rs2), 5'(rs1), 3'b010, m[4:0], OPC_STORE};
  endfunction
  function automatic logic [31:0] kv(vop_e op, int rd, int rs1, int rs2);
    return r_t(7'(op), rs2, rs1, 3'b000, rd, OPC_CUSTOM0);
  endfunction
  task automatic li(int rd, logic [31:0] v);
    logic [31:0] hi;
    hi = (v + 32'h800) >> 12;
    put({hi[19:0], 5'(rd), OPC_LUI});
    put(addi(rd, rd, int'(v - (hi << 12))));
  endtask

  // ------------------------------------------------------------ data layout
  // Hart h owns data memory from fbase(h): A at +0, B^T at +0x4000, C at
  // +0x8000. Flags at word 0..2.
  function automatic int unsigned fbase(int h); return 32'h1000 + h * 32'hC000; endfunction
  function automatic int ea(int h, int i, int k); return (i * 3 + k * 5 + h * 7) % 19 - 9; endfunction
  function automatic int eb(int h, int k, int j); return (k * 11 + j * 2 + h * 3) % 17 - 8; endfunction

  // ----------------------------------------------------------------- checks
  int checks = 0, failures = 0;
  int cycle = 0, n_unit_retry = 0, n_lsu_retry = 0, n_par = 0;

  always_ff @(posedge clk) begin
    if (rst_n) begin
      cycle <= cycle + 1;
      if (dut.spmu_req && !dut.spmu_gnt) n_unit_retry <= n_unit_retry + 1;
      if (dut.replay && (dut.d.unit == UN_LSU || dut.d.unit == UN_VLSU)) n_lsu_retry <= n_lsu_retry + 1;
      if ($countones(dut.mfu_ctrl_busy) >= 2) n_par <= n_par + 1;
    end
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // rd = x2 + off
  task automatic la(int rd, logic [31:0] off);
    li(rd, off);
    put(r_t(7'b0000000, 2, rd, 3'b000, rd, OPC_OP));
  endtask

  task automatic build();
    for (int i = 0; i < 32768; i++) imem[i] = 32'h0000_0013;
    apc = 0;
    put({12'hF14, 5'd0, 3'b010, 5'd1, OPC_SYSTEM});     // csrrs x1, mhartid
    li(5, 32'hC000);
    put(r_t(7'b0000001, 5, 1, 3'b000, 2, OPC_OP));      // mul x2, x1, x5
    li(5, 32'h1000);
    put(r_t(7'b0000000, 5, 2, 3'b000, 2, OPC_OP));      // add x2, x2, x5
    li(7, 32'(4 * NM));
    put({CSR_MVSIZE, 5'd7, 3'b001, 5'd0, OPC_SYSTEM});  // csrw mvsize, x7
    for (int hb = 0; hb < 2; hb++) begin
      li(24, SPMB);
      li(20, SPM0 + SPMB);
      la(8, 32'h4000 + 32'(hb * 2 * SPMB));
      put(kv(KMEMLD, 20, 8, 24));
      li(20, SPM0 + 2 * SPMB);
      la(8, 32'h4000 + 32'(hb * 2 * SPMB + SPMB));
      put(kv(KMEMLD, 20, 8, 24));
      for (int i = 0; i < NM; i++) begin
        li(20, SPM0);
        la(8, 32'(i * 4 * NM));
        put(kv(KMEMLD, 20, 8, 7));
        for (int j = 0; j < NM / 2; j++) begin
          li(21, SPM0 + 32'(4 * NM + 4 * j));
          li(22, SPM0 + SPMB + 32'(j * 4 * NM));
          put(kv(KDOTP, 21, 20, 22));
        end
        li(21, SPM0 + 32'(4 * NM));
        la(23, 32'h8000 + 32'(i * 4 * NM + hb * 2 * NM));
        li(24, 32'(2 * NM));
        put(kv(KMEMSTR, 23, 21, 24));
      end
    end
    li(24, 4);
    li(20, SPM0);
    put(kv(KMEMLD, 20, 2, 24));                         // waits for kmemstr
    put(addi(9, 0, 1));
    put(r_t(7'b0000000, 2, 1, 3'b001, 11, OPC_OPIMM));  // slli x11, x1, 2
    put(sw(9, 0, 11));
    put({1'b0, 10'd0, 1'b0, 8'd0, 5'd0, OPC_JAL});     // j .
  endtask

  initial begin
    int bad;
    logic [31:0] exp, got;
    for (int i = 0; i < 65536; i++) dmem[i] = '0;
    for (int h = 0; h < HARTS; h++)
      for (int i = 0; i < NM; i++)
        for (int k = 0; k < NM; k++) begin
          dmem[(fbase(h) >> 2) + i * NM + k] = 32'(ea(h, i, k));
          dmem[((fbase(h) + 32'h4000) >> 2) + i * NM + k] = 32'(eb(h, k, i));  // B^T[i][k] = B[k][i]
        end
    build();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (!(dmem[0] == 1 && dmem[1] == 1 && dmem[2] == 1)) @(posedge clk);
    $display("matmul %0dx%0d: %0d cycles for three harts, unit retries %0d, LSU retries %0d, cycles with two or more vector instructions in flight %0d",
             NM, NM, cycle, n_unit_retry, n_lsu_retry, n_par);
    for (int h = 0; h < HARTS; h++) begin
      bad = 0;
      for (int i = 0; i < NM; i++)
        for (int j = 0; j < NM; j++) begin
          exp = '0;
          for (int k = 0; k < NM; k++) exp += 32'(ea(h, i, k)) * 32'(eb(h, k, j));
          got = dmem[((fbase(h) + 32'h8000) >> 2) + i * NM + j];
          checks++;
          if (got !== exp) begin
            failures++;
            if (bad++ < 4) $display("FAIL hart %0d C[%0d][%0d]: got %0d expected %0d", h, i, j, $signed(got), $signed(exp));
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
