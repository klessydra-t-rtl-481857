// mfu_fu: one functional-unit set (FU) of the multi-purpose functional unit.
//
// The set holds the five internal units named in the paper, each D lanes
// wide: adder/subtractor, shifter, multiplier, comparator and accumulator.
// Every unit has its own operand inputs (input mapping), so that different
// MFU controllers can use different units of one set in the same cycle
// (heterogeneous MIMD). A lane works on one 32-bit word, i.e. on 4, 2 or 1
// elements of 8, 16 or 32 bits (subword SIMD).
//
//   add: a + b, a - b (ksubv), a + 0 (kvcp)
//   shf: a >> b or a >>> b, shift amount from the low bits of b
//   mul: low half of a * b per element; also, per lane, the sum of the full
//        signed products of its elements shifted right by the post-scaling
//        factor (zero unless kdotpps), feeding the accumulator
//   cmp: a < b signed (mask vector of 1/0), or ReLU of a
//   acc: sum over all lanes of either the multiplier's per-lane products
//        (intermediate mapping, kdotp/kdotpps) or the elements of a (kvred)
//
// The set is purely combinational; the controller registers the results.
// The paper names the units and the input/intermediate/output mappings; the
// element semantics listed above are this design's choices.
module mfu_fu
  import kl_pkg::*;
#(
  parameter int unsigned D = 2
) (
  input  logic [NU-1:0][D-1:0][31:0] u_a,   // operand A of each unit
  input  logic [NU-1:0][D-1:0][31:0] u_b,   // operand B of each unit
  input  vop_e                       u_op  [NU],
  input  sew_e                       u_sew [NU],
  input  logic [4:0]                 u_sc  [NU],   // post-scaling factor
  output logic [D-1:0][31:0]         add_y,
  output logic [D-1:0][31:0]         shf_y,
  output logic [D-1:0][31:0]         mul_y,
  output logic [D-1:0][31:0]         cmp_y,
  output logic [31:0]                acc_y
);

  logic [D-1:0][31:0] dp;   // per-lane scaled product sums (to accumulator)

  always_comb begin
    acc_y = '0;
    for (int k = 0; k < D; k++) begin
      add_y[k] = v_addsub(u_a[U_ADD][k], (u_op[U_ADD] == KVCP) ? 32'd0 : u_b[U_ADD][k],
                          u_op[U_ADD] == KSUBV, u_sew[U_ADD]);
      shf_y[k] = v_shr(u_a[U_SHF][k], u_b[U_SHF][k][4:0], u_op[U_SHF] == KSRAV, u_sew[U_SHF]);
      mul_y[k] = v_mul(u_a[U_MUL][k], u_b[U_MUL][k], u_sew[U_MUL]);
      dp[k]    = v_dot(u_a[U_MUL][k], u_b[U_MUL][k], u_sew[U_MUL],
                       (u_op[U_MUL] == KDOTPPS) ? u_sc[U_MUL] : 5'd0);
      cmp_y[k] = (u_op[U_CMP] == KRELU) ? v_relu(u_a[U_CMP][k], u_sew[U_CMP])
                                        : v_slt(u_a[U_CMP][k], u_b[U_CMP][k], u_sew[U_CMP]);
      if (u_op[U_ACC] == KDOTP || u_op[U_ACC] == KDOTPPS)
        acc_y = acc_y + dp[k];
      else
        acc_y = acc_y + v_hsum(u_a[U_ACC][k], u_sew[U_ACC]);
    end
  end

endmodule
