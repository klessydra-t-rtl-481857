// tb_composite_workload: the composite workload, three different kernels on
// the three harts at once, on the whole core at its default parameters
// (M = 3, F = 1, D = 2, N = 4):
//   hart 0: 2D convolution, 32 x 32 image, 3 x 3 filter
//   hart 1: 256-point radix-2 FFT, 32-bit fixed point (Q14 twiddles)
//   hart 2: 64 x 64 matrix multiplication, streamed through the scratchpad
// The kernels are the ones of the single-kernel workload tests (same
// program generators, same scratchpad layouts), here with fixed data bases
// in data memory: convolution at 0x1000, FFT at 0x4000, MatMul at 0x8000.
// A short prologue reads mhartid and jumps to the hart's kernel; each kernel
// ends by waiting for its last transfer and setting flag word mhartid.
// The harts now contend for different unit mixes: the convolution uses the
// multiplier and adder, the FFT multiplier, shifter and adder, MatMul the
// multiplier and accumulator. Every result is compared with a reference
// computed here; cycles and retries are printed.
`timescale 1ns/1ps
module tb_composite_workload;
  import kl_pkg::*;

  localparam int unsigned HARTS = 3;
  localparam int unsigned CS = 32, CK = 3;       // convolution: image, filter
  localparam int unsigned NF = 256, LG = 8, Q = 14; // FFT points, log2, fraction bits
  localparam int unsigned NM = 64;                  // matrix dimension
  localparam int unsigned CB = 32'h1000, FB = 32'h4000, MB = 32'h8000;  // data bases
  localparam logic [31:0] SPM0 = 32'h1000_0000;
  localparam int unsigned SPMB = 4096;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        instr_req, data_req, data_we;
  logic [31:0] instr_addr, instr_rdata, data_addr, data_wdata, data_rdata;
  logic [3:0]  data_be;

  klessydra_t13 dut (.*);

  // ---------------------------------------------------------------- memories
  logic [31:0] imem [65536];
  logic [31:0] dmem [32768];

  // Requests count only once reset has been applied: before the first clock
  // edge the core's registers still hold their power-up values.
  always_ff @(posedge clk) begin
    if (rst_n && instr_req) instr_rdata <= imem[instr_addr[17:2]];
    if (rst_n && data_req) begin
      if (data_we) begin
        for (int i = 0; i < 4; i++)
          if (data_be[i]) dmem[data_addr[16:2]][8*i +: 8] <= data_wdata[8*i +: 8];
      end else data_rdata <= dmem[data_addr[16:2]];
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

  // ------------------------------------------------------------ data
  function automatic int pix(int r, int c); return (r * 7 + c * 3) % 23 - 11; endfunction
  function automatic int wgt(int i, int j); return (i * 5 + j * 2) % 9 - 4; endfunction
  function automatic int sig_re(int n);
    return $rtoi(60.0 * $cos(2.0 * 3.14159265358979 * 3 * n / NF)) + ((n * 7) % 13) - 6;
  endfunction
  function automatic int sig_im(int n);
    return $rtoi(40.0 * $sin(2.0 * 3.14159265358979 * 5 * n / NF)) + ((n * 5) % 11) - 5;
  endfunction
  function automatic int ea(int i, int k); return (i * 3 + k * 5) % 19 - 9; endfunction
  function automatic int eb(int k, int j); return (k * 11 + j * 2) % 17 - 8; endfunction
  function automatic int rev(int i);
    int r;
    r = 0;
    for (int b = 0; b < LG; b++) if ((i & (1 << b)) != 0) r |= 1 << (LG - 1 - b);
    return r;
  endfunction
  int tw_re [NF - 1], tw_im [NF - 1];   // stage h: entries h-1 ... 2h-2

  // ----------------------------------------------------------------- checks
  int checks = 0, failures = 0;
  int cycle = 0, n_unit_retry = 0, n_lsu_retry = 0, n_par = 0;
  int done_cycle [3];

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

  function automatic logic [31:0] row_addr(int r, int p);
    int rps;
    rps = SPMB / (4 * p);
    return SPM0 + 32'((r / rps) * SPMB + (r % rps) * 4 * p);
  endfunction

  function automatic logic [31:0] jal0(int off);
    logic [20:0] m;
    m = 21'(off);
    return {m[20], m[10:1], m[11], m[19:12], 5'd0, OPC_JAL};
  endfunction
  function automatic logic [31:0] bne(int off, int rs2, int rs1);
    logic [12:0] m;
    m = 13'(off);
    return {m[12], m[10:5], 5'(rs2), 5'(rs1), 3'b001, m[4:1], m[11], OPC_BRANCH};
  endfunction

  // rd = x2 + off
  task automatic la(int rd, logic [31:0] off);
    li(rd, off);
    put(r_t(7'b0000000, 2, rd, 3'b000, rd, OPC_OP));
  endtask

  task automatic conv_code(int s, int k);
    int p;
    p = s + k - 1;
    li(2, CB);
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

  localparam logic [31:0] XR = SPM0, XI = SPM0 + SPMB, WR = SPM0 + 2 * SPMB,
                          WI = SPM0 + 2 * SPMB + 1024, PB = SPM0 + 3 * SPMB;

  // one vector instruction with all three addresses loaded first
  task automatic vop3(vop_e op, logic [31:0] d, logic [31:0] a, logic [31:0] b);
    li(21, d); li(20, a); li(22, b);
    put(kv(op, 21, 20, 22));
  endtask

  task automatic fft_code();
    li(2, FB);
    li(24, 4);
    for (int i = 0; i < NF; i++) begin
      li(20, XR + 32'(4 * i)); la(8, 32'(4 * rev(i)));         put(kv(KMEMLD, 20, 8, 24));
      li(20, XI + 32'(4 * i)); la(8, 32'h400 + 32'(4 * rev(i))); put(kv(KMEMLD, 20, 8, 24));
    end
    li(24, 32'(4 * (NF - 1)));
    li(20, WR); la(8, 32'h800); put(kv(KMEMLD, 20, 8, 24));
    li(20, WI); la(8, 32'hC00); put(kv(KMEMLD, 20, 8, 24));
    li(25, Q);
    for (int h = 1; h < NF; h *= 2) begin
      logic [31:0] wr, wi, p1, p2, p3, p4, tr, ti;
      li(7, 32'(4 * h));
      put({CSR_MVSIZE, 5'd7, 3'b001, 5'd0, OPC_SYSTEM});
      wr = WR + 32'(4 * (h - 1)); wi = WI + 32'(4 * (h - 1));
      p1 = PB; p2 = PB + 512; p3 = PB + 1024; p4 = PB + 1536; tr = PB + 2048; ti = PB + 2560;
      for (int g = 0; g < NF; g += 2 * h) begin
        logic [31:0] x0r, x0i, x1r, x1i;
        x0r = XR + 32'(4 * g); x1r = x0r + 32'(4 * h);
        x0i = XI + 32'(4 * g); x1i = x0i + 32'(4 * h);
        vop3(KVMUL, p1, x1r, wr);
        vop3(KVMUL, p2, x1i, wi);
        vop3(KVMUL, p3, x1r, wi);
        vop3(KVMUL, p4, x1i, wr);
        li(21, p1); put(kv(KSRAV, 21, 21, 25));
        li(21, p2); put(kv(KSRAV, 21, 21, 25));
        li(21, p3); put(kv(KSRAV, 21, 21, 25));
        li(21, p4); put(kv(KSRAV, 21, 21, 25));
        vop3(KSUBV, tr, p1, p2);
        vop3(KADDV, ti, p3, p4);
        vop3(KSUBV, x1r, x0r, tr);
        vop3(KADDV, x0r, x0r, tr);
        vop3(KSUBV, x1i, x0i, ti);
        vop3(KADDV, x0i, x0i, ti);
      end
    end
    li(24, 32'(4 * NF));
    li(20, XR); la(23, 32'h1000); put(kv(KMEMSTR, 23, 20, 24));
    li(20, XI); la(23, 32'h1400); put(kv(KMEMSTR, 23, 20, 24));
    li(24, 4);
    li(20, PB);
    put(kv(KMEMLD, 20, 2, 24));                         // waits for kmemstr
    put(addi(9, 0, 1));
    put(r_t(7'b0000000, 2, 1, 3'b001, 11, OPC_OPIMM));  // slli x11, x1, 2
    put(sw(9, 0, 11));
    put({1'b0, 10'd0, 1'b0, 8'd0, 5'd0, OPC_JAL});     // j .
  endtask

  task automatic mm_code();
    li(2, MB);
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
    int bad, p;
    int xr [NF], xi [NF];
    real er, ei, ang, worst;
    int unsigned a_conv, a_fft, a_mm;
    logic [31:0] exp, got;
    // ---- data
    for (int h = 1; h < NF; h *= 2)
      for (int k = 0; k < h; k++) begin
        ang = -3.14159265358979 * k / h;
        tw_re[h - 1 + k] = $rtoi($floor($cos(ang) * (1 << Q) + 0.5));
        tw_im[h - 1 + k] = $rtoi($floor($sin(ang) * (1 << Q) + 0.5));
      end
    for (int i = 0; i < 32768; i++) dmem[i] = '0;
    p = CS + CK - 1;
    for (int i = 0; i < CK; i++)
      for (int j = 0; j < CK; j++) dmem[(CB >> 2) + i * CK + j] = 32'(wgt(i, j));
    for (int r = 0; r < CS; r++)
      for (int c = 0; c < CS; c++)
        dmem[((CB + 32'h200) >> 2) + (r + CK / 2) * p + c + CK / 2] = 32'(pix(r, c));
    for (int n = 0; n < NF; n++) begin
      dmem[(FB >> 2) + n]            = 32'(sig_re(n));
      dmem[((FB + 32'h400) >> 2) + n] = 32'(sig_im(n));
    end
    for (int k = 0; k < NF - 1; k++) begin
      dmem[((FB + 32'h800) >> 2) + k] = 32'(tw_re[k]);
      dmem[((FB + 32'hC00) >> 2) + k] = 32'(tw_im[k]);
    end
    for (int i = 0; i < NM; i++)
      for (int k = 0; k < NM; k++) begin
        dmem[(MB >> 2) + i * NM + k]            = 32'(ea(i, k));
        dmem[((MB + 32'h4000) >> 2) + i * NM + k] = 32'(eb(k, i));
      end
    // ---- program: prologue, then the three kernels
    for (int i = 0; i < 65536; i++) imem[i] = 32'h0000_0013;
    apc = 32'h40;   a_conv = apc; conv_code(CS, CK);
    a_fft = apc;    fft_code();
    a_mm = apc;     mm_code();
    apc = 0;
    put({12'hF14, 5'd0, 3'b010, 5'd1, OPC_SYSTEM});     // 0x00 csrrs x1, mhartid
    put(addi(5, 0, 1));                                 // 0x04
    put(bne(8, 0, 1));                                  // 0x08 hart 0 falls through
    put(jal0(int'(a_conv) - 12));                       // 0x0C
    put(bne(8, 5, 1));                                  // 0x10
    put(jal0(int'(a_fft) - 20));                        // 0x14
    put(jal0(int'(a_mm) - 24));                         // 0x18
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    done_cycle = '{0, 0, 0};
    while (!(dmem[0] == 1 && dmem[1] == 1 && dmem[2] == 1)) begin
      @(posedge clk);
      for (int h = 0; h < 3; h++) if (dmem[h] == 1 && done_cycle[h] == 0) done_cycle[h] = cycle;
    end
    $display("composite: convolution done at cycle %0d, FFT at %0d, MatMul at %0d", done_cycle[0], done_cycle[1], done_cycle[2]);
    $display("unit retries %0d, LSU retries %0d, cycles with two or more vector instructions in flight %0d",
             n_unit_retry, n_lsu_retry, n_par);
    // ---- convolution
    bad = 0;
    for (int r = 0; r < CS; r++)
      for (int c = 0; c < CS; c++) begin
        exp = '0;
        for (int i = 0; i < CK; i++)
          for (int j = 0; j < CK; j++)
            exp += dmem[((CB + 32'h200) >> 2) + (r + i) * p + c + j] * 32'(wgt(i, j));
        got = dmem[((CB + 32'h2000) >> 2) + r * CS + c];
        checks++;
        if (got !== exp) begin
          failures++;
          if (bad++ < 4) $display("FAIL conv out[%0d][%0d]: got %0d expected %0d", r, c, $signed(got), $signed(exp));
        end
      end
    // ---- FFT, bit-exact reference
    for (int i = 0; i < NF; i++) begin
      xr[i] = sig_re(rev(i));
      xi[i] = sig_im(rev(i));
    end
    for (int hs = 1; hs < NF; hs *= 2)
      for (int g = 0; g < NF; g += 2 * hs)
        for (int k = 0; k < hs; k++) begin
          int a, b, tr, ti;
          a = g + k; b = g + k + hs;
          tr = ((xr[b] * tw_re[hs - 1 + k]) >>> Q) - ((xi[b] * tw_im[hs - 1 + k]) >>> Q);
          ti = ((xr[b] * tw_im[hs - 1 + k]) >>> Q) + ((xi[b] * tw_re[hs - 1 + k]) >>> Q);
          xr[b] = xr[a] - tr; xi[b] = xi[a] - ti;
          xr[a] = xr[a] + tr; xi[a] = xi[a] + ti;
        end
    bad = 0;
    for (int k = 0; k < NF; k++) begin
      checks++;
      if (dmem[((FB + 32'h1000) >> 2) + k] !== 32'(xr[k]) || dmem[((FB + 32'h1400) >> 2) + k] !== 32'(xi[k])) begin
        failures++;
        if (bad++ < 4) $display("FAIL fft X[%0d]", k);
      end
    end
    // ---- FFT against a floating-point DFT
    worst = 0.0;
    for (int k = 0; k < NF; k++) begin
      er = 0.0; ei = 0.0;
      for (int n = 0; n < NF; n++) begin
        ang = -2.0 * 3.14159265358979 * ((k * n) % NF) / NF;
        er += sig_re(n) * $cos(ang) - sig_im(n) * $sin(ang);
        ei += sig_re(n) * $sin(ang) + sig_im(n) * $cos(ang);
      end
      er = er - $itor($signed(dmem[((FB + 32'h1000) >> 2) + k]));
      ei = ei - $itor($signed(dmem[((FB + 32'h1400) >> 2) + k]));
      if (er < 0) er = -er;
      if (ei < 0) ei = -ei;
      if (er > worst) worst = er;
      if (ei > worst) worst = ei;
    end
    checks++;
    if (worst > real'(NF / 2)) begin
      failures++;
      $display("FAIL fft off the floating-point DFT by %0.2f", worst);
    end
    // ---- MatMul
    bad = 0;
    for (int i = 0; i < NM; i++)
      for (int j = 0; j < NM; j++) begin
        exp = '0;
        for (int k = 0; k < NM; k++) exp += 32'(ea(i, k)) * 32'(eb(k, j));
        got = dmem[((MB + 32'h8000) >> 2) + i * NM + j];
        checks++;
        if (got !== exp) begin
          failures++;
          if (bad++ < 4) $display("FAIL matmul C[%0d][%0d]: got %0d expected %0d", i, j, $signed(got), $signed(exp));
        end
      end
    checks++;
    if (n_par == 0) begin
      failures++;
      $display("FAIL no parallel vector execution");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
