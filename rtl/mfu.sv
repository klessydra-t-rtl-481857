// mfu: multi-purpose functional unit (MFU) of the vector coprocessor.
//
// M controllers (mfu_ctrl), one per SPMI, share F functional-unit sets
// (mfu_fu). Controller m works on SPMI m and uses FU set m % F. The FU
// contention handler keeps, for every unit of every set, which controller
// owns it. A request for controller m is granted (gnt, same cycle) when that
// controller is idle and every unit the operation needs (kl_pkg::fu_mask) is
// free in its set; the units are then owned until the controller's done
// pulse. With M = 3 and F = 1 this gives the paper's heterogeneous MIMD
// scheme: harts run vector instructions in parallel as long as they use
// different units (say one adds while another multiplies). With F = M each
// controller has a set of its own (symmetric MIMD); with M = F = 1 the MFU is
// shared (SISD / pure SIMD). The input mapping routes each unit's operands
// from its owner; the output mapping returns to each controller the result
// of the unit its operation uses.
//
// Interface: the request carries the SPMI index and the decoded operands;
// the core must only raise req when it has already checked that the SPMI is
// free. done[m] pulses when controller m writes its last result. Per-SPMI
// ports are arrays indexed by controller.
// The sharing schemes, parameters M, F, D and the unit-level contention
// follow the paper; the grant rule and the ownership table are this
// design's own.
module mfu
  import kl_pkg::*;
#(
  parameter int unsigned M         = 3,
  parameter int unsigned F         = 1,
  parameter int unsigned N         = 4,
  parameter int unsigned D         = 2,
  parameter int unsigned SPM_BYTES = 4096,
  localparam int unsigned WORDS = SPM_BYTES / 4,
  localparam int unsigned AW    = $clog2(N * WORDS),
  localparam int unsigned MW    = (M > 1) ? $clog2(M) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // request from the execute stage (SPMU_req)
  input  logic               req,
  input  logic [MW-1:0]      req_spmi,
  input  vop_e               req_op,
  input  logic [31:0]        req_a,
  input  logic [31:0]        req_b,
  input  logic [31:0]        req_d,
  input  logic [31:0]        req_scalar,
  input  logic [31:0]        req_size,
  input  sew_e               req_sew,
  input  logic [4:0]         req_sc,
  output logic               gnt,
  output logic [M-1:0]       ctrl_busy,
  output logic [M-1:0]       done,
  output logic [F-1:0][NU-1:0] unit_busy,
  // per-controller SPMI ports
  output logic [M-1:0]              a_re,
  output logic [M-1:0][AW-1:0]      a_word,
  input  logic [M-1:0][D-1:0][31:0] a_rdata,
  output logic [M-1:0]              b_re,
  output logic [M-1:0][AW-1:0]      b_word,
  input  logic [M-1:0][D-1:0][31:0] b_rdata,
  output logic [M-1:0]              w_en,
  output logic [M-1:0][AW-1:0]      w_word,
  output logic [M-1:0][D-1:0][31:0] w_data,
  output logic [M-1:0][D-1:0][3:0]  w_be
);

  // ------------------------------------------------------------ contention
  logic [F-1:0][NU-1:0]         own_v;
  logic [F-1:0][NU-1:0][MW-1:0] own_id;
  logic [NU-1:0]                need;
  int unsigned                  req_set;

  always_comb begin
    need    = fu_mask(req_op);
    req_set = int'(req_spmi) % F;
    gnt     = req && (int'(req_spmi) < M) && !ctrl_busy[req_spmi] &&
              ((own_v[req_set] & need) == '0);
  end

  assign unit_busy = own_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      own_v  <= '0;
      own_id <= '0;
    end else begin
      for (int f = 0; f < F; f++)
        for (int u = 0; u < NU; u++)
          if (own_v[f][u] && done[own_id[f][u]]) own_v[f][u] <= 1'b0;
      if (gnt && req_size != 0) begin
        for (int u = 0; u < NU; u++)
          if (need[u]) begin
            own_v[req_set][u]  <= 1'b1;
            own_id[req_set][u] <= req_spmi;
          end
      end
    end
  end

  // ----------------------------------------------------------- controllers
  logic [M-1:0][D-1:0][31:0] c_a, c_b, c_y;
  vop_e                      c_op  [M];
  sew_e                      c_sew [M];
  logic [4:0]                c_sc  [M];
  logic [M-1:0][31:0]        c_acc;

  for (genvar m = 0; m < M; m++) begin : g_ctrl
    mfu_ctrl #(.N(N), .D(D), .SPM_BYTES(SPM_BYTES)) u_ctrl (
      .clk      (clk),
      .rst_n    (rst_n),
      .start    (gnt && req_spmi == MW'(m)),
      .s_op     (req_op),
      .s_a      (req_a),
      .s_b      (req_b),
      .s_d      (req_d),
      .s_scalar (req_scalar),
      .s_size   (req_size),
      .s_sew    (req_sew),
      .s_sc     (req_sc),
      .busy     (ctrl_busy[m]),
      .done     (done[m]),
      .a_re     (a_re[m]),
      .a_word   (a_word[m]),
      .a_rdata  (a_rdata[m]),
      .b_re     (b_re[m]),
      .b_word   (b_word[m]),
      .b_rdata  (b_rdata[m]),
      .w_en     (w_en[m]),
      .w_word   (w_word[m]),
      .w_data   (w_data[m]),
      .w_be     (w_be[m]),
      .fu_a     (c_a[m]),
      .fu_b     (c_b[m]),
      .fu_op    (c_op[m]),
      .fu_sew   (c_sew[m]),
      .fu_sc    (c_sc[m]),
      .fu_y     (c_y[m]),
      .fu_acc   (c_acc[m])
    );
  end

  // --------------------------------------------- FU sets and their mappings
  logic [F-1:0][D-1:0][31:0] add_y, shf_y, mul_y, cmp_y;
  logic [F-1:0][31:0]        acc_y;

  for (genvar f = 0; f < F; f++) begin : g_fu
    logic [NU-1:0][D-1:0][31:0] ua, ub;
    vop_e                       uop  [NU];
    sew_e                       usew [NU];
    logic [4:0]                 usc  [NU];

    // input mapping: each unit takes the operands of its owner
    always_comb begin
      for (int u = 0; u < NU; u++) begin
        ua[u]   = '0;
        ub[u]   = '0;
        uop[u]  = KADDV;
        usew[u] = SEW32;
        usc[u]  = '0;
        if (own_v[f][u]) begin
          ua[u]   = c_a[own_id[f][u]];
          ub[u]   = c_b[own_id[f][u]];
          uop[u]  = c_op[own_id[f][u]];
          usew[u] = c_sew[own_id[f][u]];
          usc[u]  = c_sc[own_id[f][u]];
        end
      end
    end

    mfu_fu #(.D(D)) u_fu (
      .u_a   (ua),
      .u_b   (ub),
      .u_op  (uop),
      .u_sew (usew),
      .u_sc  (usc),
      .add_y (add_y[f]),
      .shf_y (shf_y[f]),
      .mul_y (mul_y[f]),
      .cmp_y (cmp_y[f]),
      .acc_y (acc_y[f])
    );
  end

  // output mapping: each controller takes the unit its operation uses
  always_comb begin
    for (int m = 0; m < M; m++) begin
      int unsigned f;
      f = m % F;
      unique case (c_op[m])
        KSRLV, KSRAV:               c_y[m] = shf_y[f];
        KVMUL, KSVMULSC, KSVMULRF:  c_y[m] = mul_y[f];
        KRELU, KVSLT, KSVSLT:       c_y[m] = cmp_y[f];
        default:                    c_y[m] = add_y[f];
      endcase
      c_acc[m] = acc_y[f];
    end
  end

  a_spmi_idx: assert property (@(posedge clk) disable iff (!rst_n)
    !(req && int'(req_spmi) >= M)) else $error("mfu: bad SPMI index");

endmodule
