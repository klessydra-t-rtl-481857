// tb_conv_workload: 2D convolution kernels run on the whole core at its
// default parameters (three harts, M = 3, F = 1, D = 2, N = 4).
//
// Cases, run one after another with a reset in between:
//   3x3 filter on 4x4, 8x8, 16x16 and 32x32 images, and 5x5, 7x7, 9x9 and
//   11x11 filters on a 32x32 image; 32-bit elements.
// All three harts run the same program, each on its own image and filter
// (a homogeneous workload). The program, generated here for each case, is
// the usual vector formulation of a convolution with a zero-padded image:
//   * kmemld every padded row (P = S + K - 1 words) into the scratchpad,
//     placed so that no row crosses from one SPM into the next (SPM0, SPM1);
//   * for every output row r and filter tap (i, j):
//       tmp  = in_row(r + i)[j ...] * w[i][j]      (ksvmulrf, into SPM3)
//       outr = outr + tmp                          (kaddv, in SPM2)
//     the first tap writes outr directly;
//   * kmemstr the S x S result (in SPM2) back to data memory, wait for it
//     with a one-word kmemld on the same SPMI, and set a flag word.
// The harts contend for the shared multiplier and adder and for the LSU; the
// number of retries and the cycles per case are printed. Every output
// element is compared with a convolution computed here (32-bit wrap-around
// arithmetic).
`timescale 1ns/1ps
module tb_conv_workload;
  import kl_pkg::*;

  localparam int unsigned HARTS = 3;
  localparam int unsigned NCASE = 8;
  localparam int          SZ [NCASE] = '{4, 8, 16, 32, 32, 32, 32, 32};
  localparam int          KS [NCASE] = '{3, 3, 3, 3, 5, 7, 9, 11};
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
  logic [31:0] dmem [16384];

  // Requests count only once reset has been applied: before the first clock
  // edge the core's registers still hold their power-up values.
  always_ff @(posedge clk) begin
    if (rst_n && instr_req) instr_rdata <= imem[instr_addr[16:2]];
    if (rst_n && data_req) begin
      if (data_we) begin
        for (int i = 0; i < 4; i++)
          if (data_be[i]) dmem[data_addr[15:2]][8*i +: 8] <= data_wdata[8*i +: 8];
      end else data_rdata <= dmem[data_addr[15:2]];
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
  // Hart h owns data memory from fbase(h): filter at +0, padded image at
  // +0x200, result at +0x2000. Flags at word 0..2.
  function automatic int unsigned fbase(int h); return 32'h1000 + h * 32'h4000; endfunction
  function automatic int pix(int h, int r, int c); return (r * 7 + c * 3 + h * 11) % 23 - 11; endfunction
  function automatic int wgt(int h, int i, int j); return (i * 5 + j * 2 + h) % 9 - 4; endfunction

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
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scratchpad address of padded row r (rows never cross an SPM boundary)
  function automatic logic [31:0] row_addr(int r, int p);
    int rps;
    rps = SPMB / (4 * p);
    return SPM0 + 32'((r / rps) * SPMB + (r % rps) * 4 * p);
  endfunction

  task automatic build(int s, int k);
    int p;
    p = s + k - 1;
    for (int i = 0; i < 32768; i++) imem[i] = 32'h0000_0013;
    apc = 0;
    put({12'hF14, 5'd0, 3'b010, 5'd1, OPC_SYSTEM});     // csrrs x1, mhartid
    li(5, 32'h4000);
    put(r_t(7'b0000001, 5, 1, 3'b000, 2, OPC_OP));      // mul x2, x1, x5
    li(5, 32'h1000);
    put(r_t(7'b0000000, 5, 2, 3'b000, 2, OPC_OP));      // add x2, x2, x5
    li(6, 32'(4 * p));                                  // padded row bytes
    li(7, 32'(4 * s));                                  // vector bytes
    put({CSR_MVSIZE, 5'd7, 3'b001, 5'd0, OPC_SYSTEM});  // csrw mvsize, x7
    put(addi(8, 2, 32'h200));
    for (int r = 0; r < p; r++) begin
      li(20, row_addr(r, p));
      put(kv(KMEMLD, 20, 8, 6));
      put(r_t(7'b0000000, 6, 8, 3'b000, 8, OPC_OP));    // add x8, x8, x6
    end
    for (int r = 0; r < s; r++) begin
      li(21, SPM0 + 2 * SPMB + 32'(r * 4 * s));
      li(22, SPM0 + 3 * SPMB);
      for (int i = 0; i < k; i++)
        for (int j = 0; j < k; j++) begin
          put(lw(10, 4 * (i * k + j), 2));
          li(20, row_addr(r + i, p) + 32'(4 * j));
          if (i == 0 && j == 0) put(kv(KSVMULRF, 21, 20, 10));
          else begin
            put(kv(KSVMULRF, 22, 20, 10));
            put(kv(KADDV, 21, 21, 22));
          end
        end
    end
    li(20, SPM0 + 2 * SPMB);
    li(23, 32'h2000);
    put(r_t(7'b0000000, 2, 23, 3'b000, 23, OPC_OP));    // add x23, x23, x2
    li(24, 32'(4 * s * s));
    put(kv(KMEMSTR, 23, 20, 24));
    li(24, 4);
    put(kv(KMEMLD, 20, 2, 24));                         // waits for kmemstr
    put(addi(9, 0, 1));
    put(r_t(7'b0000000, 2, 1, 3'b001, 11, OPC_OPIMM));  // slli x11, x1, 2
    put(sw(9, 0, 11));
    put({1'b0, 10'd0, 1'b0, 8'd0, 5'd0, OPC_JAL});     // j .
  endtask

  task automatic load_data(int s, int k);
    int p;
    p = s + k - 1;
    for (int i = 0; i < 16384; i++) dmem[i] = '0;
    for (int h = 0; h < HARTS; h++) begin
      for (int i = 0; i < k; i++)
        for (int j = 0; j < k; j++)
          dmem[(fbase(h) >> 2) + i * k + j] = 32'(wgt(h, i, j));
      for (int r = 0; r < s; r++)
        for (int c = 0; c < s; c++)
          dmem[((fbase(h) + 32'h200) >> 2) + (r + k / 2) * p + c + k / 2] = 32'(pix(h, r, c));
    end
  endtask

  task automatic check_case(int s, int k);
    int p, bad;
    logic [31:0] exp, got;
    p = s + k - 1;
    for (int h = 0; h < HARTS; h++) begin
      bad = 0;
      for (int r = 0; r < s; r++)
        for (int c = 0; c < s; c++) begin
          exp = '0;
          for (int i = 0; i < k; i++)
            for (int j = 0; j < k; j++)
              exp += dmem[((fbase(h) + 32'h200) >> 2) + (r + i) * p + c + j] * 32'(wgt(h, i, j));
          got = dmem[((fbase(h) + 32'h2000) >> 2) + r * s + c];
          checks++;
          if (got !== exp) begin
            failures++;
            if (bad++ < 4) $display("FAIL %0dx%0d k%0d hart %0d out[%0d][%0d]: got %0d expected %0d",
                                    s, s, k, h, r, c, $signed(got), $signed(exp));
          end
        end
    end
  endtask

  initial begin
    int c0, u0, l0, p0;
    for (int t = 0; t < NCASE; t++) begin
      rst_n = 0;
      build(SZ[t], KS[t]);
      load_data(SZ[t], KS[t]);
      repeat (3) @(posedge clk);
      @(negedge clk) rst_n = 1;
      c0 = cycle; u0 = n_unit_retry; l0 = n_lsu_retry; p0 = n_par;
      while (!(dmem[0] == 1 && dmem[1] == 1 && dmem[2] == 1)) @(posedge clk);
      $display("conv %0dx%0d filter %0dx%0d: %0d cycles for three harts, unit retries %0d, LSU retries %0d, cycles with two or more vector instructions in flight %0d",
               SZ[t], SZ[t], KS[t], KS[t], cycle - c0, n_unit_retry - u0, n_lsu_retry - l0, n_par - p0);
      check_case(SZ[t], KS[t]);
      checks++;
      if (n_par == p0) begin
        failures++;
        $display("FAIL no parallel vector execution in this case");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
