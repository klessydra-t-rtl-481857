// tb_mfu_fu: random operands for each unit of one FU set (D = 2) in each
// element width, compared with reference results computed element by
// element here: add, sub, copy, logical and arithmetic shift, multiply
// (low half), compare, ReLU, reduction sum, dot product and post-scaled dot
// product through the accumulator.
`timescale 1ns/1ps
module tb_mfu_fu;
  import kl_pkg::*;
  localparam int D = 2;
  logic [NU-1:0][D-1:0][31:0] u_a, u_b;
  vop_e u_op [NU];
  sew_e u_sew [NU];
  logic [4:0] u_sc [NU];
  logic [D-1:0][31:0] add_y, shf_y, mul_y, cmp_y;
  logic [31:0] acc_y;
  int checks = 0, failures = 0;

  mfu_fu #(.D(D)) dut (.*);

  function automatic longint el(logic [31:0] w, int e, int bits);   // signed element
    longint v;
    v = (w >> (e * bits)) & ((64'd1 << bits) - 1);
    if (v >= (64'sd1 <<< (bits - 1))) v -= (64'sd1 <<< bits);
    return v;
  endfunction
  function automatic logic [31:0] pack(longint v [4], int bits);
    logic [31:0] w;
    w = 0;
    for (int e = 0; e < 32 / bits; e++) w |= 32'((v[e] & ((64'd1 << bits) - 1)) << (e * bits));
    return w;
  endfunction

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      int bits, ne;
      sew_e sw;
      vop_e add_op, shf_op, cmp_op, acc_op;
      longint sumr, sumd;
      sw = sew_e'(it % 3);
      bits = 8 << (it % 3); ne = 32 / bits;
      add_op = (it % 4 == 0) ? KSUBV : (it % 4 == 1) ? KVCP : KADDV;
      shf_op = (it % 2) ? KSRAV : KSRLV;
      cmp_op = (it % 2) ? KRELU : KVSLT;
      acc_op = (it % 3 == 0) ? KVRED : (it % 3 == 1) ? KDOTP : KDOTPPS;
      u_a = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      u_b = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      for (int u = 0; u < NU; u++) begin u_sew[u] = sw; u_sc[u] = 5'($urandom_range(0, 7)); end
      u_op[U_ADD] = add_op; u_op[U_SHF] = shf_op; u_op[U_MUL] = acc_op; u_op[U_CMP] = cmp_op; u_op[U_ACC] = acc_op;
      #1;
      sumr = 0; sumd = 0;
      for (int k = 0; k < D; k++) begin
        longint ea [4], es [4], em [4], ec [4];
        for (int e = 0; e < 4; e++) begin ea[e] = 0; es[e] = 0; em[e] = 0; ec[e] = 0; end
        for (int e = 0; e < ne; e++) begin
          longint a, b, ua, sh;
          a = el(u_a[U_ADD][k], e, bits); b = el(u_b[U_ADD][k], e, bits);
          ea[e] = (add_op == KSUBV) ? a - b : (add_op == KVCP) ? a : a + b;
          a = el(u_a[U_SHF][k], e, bits);
          ua = a & ((64'd1 << bits) - 1);
          sh = u_b[U_SHF][k] & (bits - 1);
          es[e] = (shf_op == KSRAV) ? (a >>> sh) : (ua >> sh);
          a = el(u_a[U_MUL][k], e, bits); b = el(u_b[U_MUL][k], e, bits);
          em[e] = a * b;
          sumd += (a * b) >>> ((acc_op == KDOTPPS) ? u_sc[U_MUL] : 0);
          a = el(u_a[U_CMP][k], e, bits); b = el(u_b[U_CMP][k], e, bits);
          ec[e] = (cmp_op == KRELU) ? ((a < 0) ? 0 : a) : ((a < b) ? 1 : 0);
          sumr += el(u_a[U_ACC][k], e, bits);
        end
        chk("add", add_y[k], pack(ea, bits));
        chk("shf", shf_y[k], pack(es, bits));
        chk("mul", mul_y[k], pack(em, bits));
        chk("cmp", cmp_y[k], pack(ec, bits));
      end
      chk("acc", acc_y, 32'((acc_op == KVRED) ? sumr : sumd));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
