// mfu_ctrl: sequencer of one vector instruction on one SPMI (MFU Ctrl +
// MFU configuration).
//
// On start it latches the instruction: operation, scratchpad byte offsets of
// the sources (a, b) and destination (d), the scalar operand taken from the
// register file, the vector length in bytes, element width and post-scaling
// factor (the hart's vector CSRs). It then streams the vectors through a
// three-step pipeline, D words (one SPM line's worth) per beat:
//   issue : read D words of A (and of B) through the SPMI read rotators
//   exec  : the data come back; operands go to the FU set granted to this
//           controller; the selected unit's result is registered, or, for a
//           reduction (kvred, kdotp, kdotpps), added to the accumulator
//   write : the registered result goes through the write rotator to the SPM
// Each SPM has a single read port, so when A and B are in the same SPM the
// beat takes two cycles (A first into a buffer, then B). A scalar operand held
// in the scratchpad (ksvaddsc, ksvmulsc) is read once before streaming. Bytes
// past the vector length are masked: not written, and zero in reductions. A
// reduction writes one 32-bit word at d after the last beat.
//
// Timing: start in cycle 0, first read in cycle 1, first write in cycle 3, so
// the first result lands four cycles after the instruction reaches the
// coprocessor (the paper gives 4 to 8 cycles); then one beat per cycle (two
// if A and B share an SPM); done pulses with the last write. A start with a
// zero length is ignored (no done pulse).
// The paper describes the controller only by its function (SPM access
// handler, FU enabler); this pipeline is this design's own.
module mfu_ctrl
  import kl_pkg::*;
#(
  parameter int unsigned N         = 4,
  parameter int unsigned D         = 2,
  parameter int unsigned SPM_BYTES = 4096,
  localparam int unsigned WORDS = SPM_BYTES / 4,
  localparam int unsigned AW    = $clog2(N * WORDS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // instruction
  input  logic               start,
  input  vop_e               s_op,
  input  logic [31:0]        s_a,        // byte offsets in the SPMI space
  input  logic [31:0]        s_b,
  input  logic [31:0]        s_d,
  input  logic [31:0]        s_scalar,   // register operand (rs2)
  input  logic [31:0]        s_size,     // vector length in bytes
  input  sew_e               s_sew,
  input  logic [4:0]         s_sc,
  output logic               busy,
  output logic               done,
  // SPMI
  output logic               a_re,
  output logic [AW-1:0]      a_word,
  input  logic [D-1:0][31:0] a_rdata,
  output logic               b_re,
  output logic [AW-1:0]      b_word,
  input  logic [D-1:0][31:0] b_rdata,
  output logic               w_en,
  output logic [AW-1:0]      w_word,
  output logic [D-1:0][31:0] w_data,
  output logic [D-1:0][3:0]  w_be,
  // FU set (through the MFU input / output mapping)
  output logic [D-1:0][31:0] fu_a,
  output logic [D-1:0][31:0] fu_b,
  output vop_e               fu_op,
  output sew_e               fu_sew,
  output logic [4:0]         fu_sc,
  input  logic [D-1:0][31:0] fu_y,       // result of the unit this op uses
  input  logic [31:0]        fu_acc      // accumulator unit result
);

  typedef enum logic [2:0] { S_IDLE, S_SCAL_RD, S_SCAL_WT, S_RUN, S_DRAIN } state_e;

  typedef struct packed {
    logic              valid;     // a full beat: A and B available next cycle
    logic              cap_a;     // first half of a two-cycle beat
    logic              from_buf;  // A comes from the buffer
    logic              last;
    logic [AW-1:0]     idx;       // word index within the vector
    logic [D-1:0][3:0] be;
  } s1_t;

  typedef struct packed {
    logic               valid;
    logic               last;
    logic [AW-1:0]      idx;
    logic [D-1:0][3:0]  be;
    logic [D-1:0][31:0] y;
  } s2_t;

  state_e             state;
  vop_e               op;
  sew_e               sew;
  logic [4:0]         sc;
  logic [AW-1:0]      a_w, b_w, d_w;
  logic [31:0]        nwords;
  logic [3:0]         lastbe;
  logic [31:0]        scalar;
  logic [31:0]        i;          // next word index to issue
  logic               phase;
  logic               twophase;
  bsrc_e              bsrc;
  logic [D-1:0][31:0] abuf;
  logic [31:0]        acc;
  s1_t                s1;
  s2_t                s2;

  // beat being issued
  logic              beat_last;
  logic [D-1:0][3:0] beat_be;
  always_comb begin
    beat_last = (i + D >= nwords);
    for (int k = 0; k < D; k++) begin
      if (i + k < nwords - 1)       beat_be[k] = 4'hF;
      else if (i + k == nwords - 1) beat_be[k] = lastbe;
      else                          beat_be[k] = 4'h0;
    end
  end

  logic issue_a, issue_full;
  always_comb begin
    issue_a    = 1'b0;
    issue_full = 1'b0;
    a_re   = 1'b0;
    b_re   = 1'b0;
    a_word = a_w + AW'(i);
    b_word = b_w + AW'(i);
    unique case (state)
      S_SCAL_RD: begin
        b_re   = 1'b1;
        b_word = b_w;
      end
      S_RUN: begin
        if (twophase && !phase) begin
          issue_a = 1'b1;
          a_re    = 1'b1;
        end else begin
          issue_full = 1'b1;
          a_re       = !twophase;
          b_re       = (bsrc == B_VEC);
        end
      end
      default: ;
    endcase
  end

  // exec step: operands to the FU set
  logic [D-1:0][31:0] opa, opb;
  always_comb begin
    for (int k = 0; k < D; k++) begin
      opa[k] = s1.from_buf ? abuf[k] : a_rdata[k];
      opb[k] = (bsrc == B_VEC) ? b_rdata[k] : scalar;
      opa[k] = byte_mask(opa[k], s1.be[k]);
      opb[k] = byte_mask(opb[k], s1.be[k]);
    end
    fu_a   = s1.valid ? opa : '0;
    fu_b   = s1.valid ? opb : '0;
    fu_op  = op;
    fu_sew = sew;
    fu_sc  = sc;
  end

  // write step
  always_comb begin
    w_en   = 1'b0;
    w_word = d_w + s2.idx;
    w_data = s2.y;
    w_be   = s2.be;
    done   = 1'b0;
    if (s2.valid) begin
      if (scalar_result(op)) begin
        w_word = d_w;
        w_data = '0;
        w_data[0] = acc;
        w_be   = '0;
        w_be[0] = 4'hF;
        w_en   = s2.last;
      end else begin
        w_en = 1'b1;
      end
      done = s2.last;
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      op       <= KADDV;
      sew      <= SEW32;
      sc       <= '0;
      a_w      <= '0;
      b_w      <= '0;
      d_w      <= '0;
      nwords   <= '0;
      lastbe   <= 4'hF;
      scalar   <= '0;
      i        <= '0;
      phase    <= 1'b0;
      twophase <= 1'b0;
      bsrc     <= B_NONE;
      abuf     <= '0;
      acc      <= '0;
      s1       <= '0;
      s2       <= '0;
    end else begin
      // pipeline stages advance every cycle
      s1 <= '0;
      s2 <= '0;
      if (s1.cap_a) abuf <= a_rdata;
      if (s1.valid) begin
        s2.valid <= 1'b1;
        s2.last  <= s1.last;
        s2.idx   <= s1.idx;
        s2.be    <= s1.be;
        s2.y     <= fu_y;
        if (scalar_result(op)) acc <= acc + fu_acc;
      end

      unique case (state)
        S_IDLE: if (start && s_size != 0) begin
          op       <= s_op;
          sew      <= s_sew;
          sc       <= s_sc;
          a_w      <= AW'(s_a >> 2);
          b_w      <= AW'(s_b >> 2);
          d_w      <= AW'(s_d >> 2);
          nwords   <= (s_size + 32'd3) >> 2;
          lastbe   <= (s_size[1:0] == 2'd0) ? 4'hF : (4'hF >> (3'd4 - {1'b0, s_size[1:0]}));
          scalar   <= v_rep(s_scalar, s_sew);
          i        <= '0;
          phase    <= 1'b0;
          acc      <= '0;
          bsrc     <= b_source(s_op);
          twophase <= (b_source(s_op) == B_VEC) &&
                      ((s_a >> 2) / WORDS == (s_b >> 2) / WORDS);
          state    <= (b_source(s_op) == B_SPMSC) ? S_SCAL_RD : S_RUN;
        end
        S_SCAL_RD: state <= S_SCAL_WT;
        S_SCAL_WT: begin
          scalar <= v_rep(b_rdata[0], sew);
          state  <= S_RUN;
        end
        S_RUN: begin
          if (issue_a) begin
            s1.cap_a <= 1'b1;
            phase    <= 1'b1;
          end
          if (issue_full) begin
            s1.valid    <= 1'b1;
            s1.from_buf <= twophase;
            s1.last     <= beat_last;
            s1.idx      <= AW'(i);
            s1.be       <= beat_be;
            phase       <= 1'b0;
            i           <= i + D;
            if (beat_last) state <= S_DRAIN;
          end
        end
        S_DRAIN: if (done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
