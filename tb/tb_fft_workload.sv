// tb_fft_workload: 256-point radix-2 FFT in 32-bit fixed point, run on the
// whole core at its default parameters (three harts, M = 3, F = 1, D = 2,
// N = 4), each hart transforming its own signal.
//
// Data: real and imaginary parts in separate arrays. Twiddle factors
// W(h, k) = exp(-i*pi*k/h), k < h, for every stage h = 1, 2, 4 ... 128, are
// stored per stage, contiguous, with Q = 14 fraction bits (255 complex
// entries). Scratchpad map: X real in SPM0, X imaginary in SPM1, twiddles in
// SPM2 (real at +0, imaginary at +1 KiB), products and T in SPM3.
// Program, generated here:
//   * bit-reversal permutation done by the core while loading: 2 x 256
//     one-word kmemld, element rev(i) of the input to scratchpad word i;
//   * kmemld of the twiddle tables;
//   * for each stage h (MVSIZE = 4h bytes) and each group of 2h points,
//     with X0 = first h points and X1 = next h points:
//       P1 = X1r*Wr, P2 = X1i*Wi, P3 = X1r*Wi, P4 = X1i*Wr   (kvmul)
//       Pn = Pn >>> 14                                      (ksrav)
//       Tr = P1 - P2, Ti = P3 + P4                           (ksubv, kaddv)
//       X1 = X0 - T, then X0 = X0 + T                        (ksubv, kaddv)
//   * kmemstr of both arrays, wait, set a flag word.
// Checks: every output is compared bit for bit with the same fixed-point
// algorithm computed here, and with a floating-point DFT of the input
// within NF/2 = 128: each stage truncates the products (>>> 14), an error of
// up to one unit that the later stages can double, so at most about 2^8 / 2
// in total; the largest bins are near 7700.
`timescale 1ns/1ps
module tb_fft_workload;
  import kl_pkg::*;

  localparam int unsigned HARTS = 3;
  localparam int unsigned NF    = 256;  // FFT points
  localparam int unsigned LG    = 8;    // log2(NF)
  localparam int unsigned Q     = 14;   // twiddle fraction bits
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
  // Hart h owns data memory from fbase(h): x real at +0, x imaginary at
  // +0x400, twiddles real at +0x800, imaginary at +0xC00, result real at
  // +0x1000, imaginary at +0x1400. Flags at word 0..2.
  function automatic int unsigned fbase(int h); return 32'h1000 + h * 32'h2000; endfunction
  function automatic int sig_re(int h, int n);
    return $rtoi(60.0 * $cos(2.0 * 3.14159265358979 * (h + 3) * n / NF)) + ((n * 7 + h) % 13) - 6;
  endfunction
  function automatic int sig_im(int h, int n);
    return $rtoi(40.0 * $sin(2.0 * 3.14159265358979 * (2 * h + 5) * n / NF)) + ((n * 5 + 3 * h) % 11) - 5;
  endfunction
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

  localparam logic [31:0] XR = SPM0, XI = SPM0 + SPMB, WR = SPM0 + 2 * SPMB,
                          WI = SPM0 + 2 * SPMB + 1024, PB = SPM0 + 3 * SPMB;

  // one vector instruction with all three addresses loaded first
  task automatic vop3(vop_e op, logic [31:0] d, logic [31:0] a, logic [31:0] b);
    li(21, d); li(20, a); li(22, b);
    put(kv(op, 21, 20, 22));
  endtask

  task automatic build();
    for (int i = 0; i < 32768; i++) imem[i] = 32'h0000_0013;
    apc = 0;
    put({12'hF14, 5'd0, 3'b010, 5'd1, OPC_SYSTEM});     // csrrs x1, mhartid
    li(5, 32'h2000);
    put(r_t(7'b0000001, 5, 1, 3'b000, 2, OPC_OP));      // mul x2, x1, x5
    li(5, 32'h1000);
    put(r_t(7'b0000000, 5, 2, 3'b000, 2, OPC_OP));      // add x2, x2, x5
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

  initial begin
    int bad;
    int xr [NF], xi [NF];
    real er, ei, ang, worst;
    for (int h = 1; h < NF; h *= 2)
      for (int k = 0; k < h; k++) begin
        ang = -3.14159265358979 * k / h;
        tw_re[h - 1 + k] = $rtoi($floor($cos(ang) * (1 << Q) + 0.5));
        tw_im[h - 1 + k] = $rtoi($floor($sin(ang) * (1 << Q) + 0.5));
      end
    for (int i = 0; i < 16384; i++) dmem[i] = '0;
    for (int h = 0; h < HARTS; h++) begin
      for (int n = 0; n < NF; n++) begin
        dmem[(fbase(h) >> 2) + n]         = 32'(sig_re(h, n));
        dmem[((fbase(h) + 32'h400) >> 2) + n] = 32'(sig_im(h, n));
      end
      for (int k = 0; k < NF - 1; k++) begin
        dmem[((fbase(h) + 32'h800) >> 2) + k] = 32'(tw_re[k]);
        dmem[((fbase(h) + 32'hC00) >> 2) + k] = 32'(tw_im[k]);
      end
    end
    build();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (!(dmem[0] == 1 && dmem[1] == 1 && dmem[2] == 1)) @(posedge clk);
    $display("fft %0d: %0d cycles for three harts, unit retries %0d, LSU retries %0d, cycles with two or more vector instructions in flight %0d",
             NF, cycle, n_unit_retry, n_lsu_retry, n_par);
    for (int h = 0; h < HARTS; h++) begin
      // reference: the same fixed-point algorithm
      for (int i = 0; i < NF; i++) begin
        xr[i] = sig_re(h, rev(i));
        xi[i] = sig_im(h, rev(i));
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
      worst = 0.0;
      for (int k = 0; k < NF; k++) begin
        checks += 2;
        if (dmem[((fbase(h) + 32'h1000) >> 2) + k] !== 32'(xr[k]) ||
            dmem[((fbase(h) + 32'h1400) >> 2) + k] !== 32'(xi[k])) begin
          failures++;
          if (bad++ < 4) $display("FAIL hart %0d X[%0d]: got (%0d, %0d) expected (%0d, %0d)", h, k,
                                  $signed(dmem[((fbase(h) + 32'h1000) >> 2) + k]),
                                  $signed(dmem[((fbase(h) + 32'h1400) >> 2) + k]), xr[k], xi[k]);
        end
        // floating-point DFT of the input
        er = 0.0; ei = 0.0;
        for (int n = 0; n < NF; n++) begin
          ang = -2.0 * 3.14159265358979 * ((k * n) % NF) / NF;
          er += sig_re(h, n) * $cos(ang) - sig_im(h, n) * $sin(ang);
          ei += sig_re(h, n) * $sin(ang) + sig_im(h, n) * $cos(ang);
        end
        er = er - $itor($signed(dmem[((fbase(h) + 32'h1000) >> 2) + k]));
        ei = ei - $itor($signed(dmem[((fbase(h) + 32'h1400) >> 2) + k]));
        if (er < 0) er = -er;
        if (ei < 0) ei = -ei;
        if (er > worst) worst = er;
        if (ei > worst) worst = ei;
      end
      checks++;
      $display("hart %0d: largest difference from the floating-point DFT %0.2f", h, worst);
      if (worst > real'(NF / 2)) begin
        failures++;
        $display("FAIL hart %0d: fixed-point FFT off by %0.2f", h, worst);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
