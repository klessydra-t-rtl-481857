// spmi: scratchpad-memory interface (SPMI) of the vector coprocessor.
//
// It holds N SPMs (spm) and maps three access paths onto them:
//  * MFU read ports A and B: each reads D consecutive words starting at any
//    word address. The bank read rotator hands word start+k to lane k.
//  * MFU write port: writes D lanes (with byte enables) starting at any word
//    address. The bank write rotator puts lane k into bank (start+k) % D.
//  * LSU word port: one 32-bit word per cycle, read or write. The bank
//    interleaver selects bank word % D, so a burst of consecutive words from
//    the 32-bit data memory port walks across the banks.
// Addresses are word addresses in the SPMI's own space of N*SPM_BYTES/4
// words; SPM n holds words n*SPM_BYTES/4 ... (n+1)*SPM_BYTES/4-1. An operand
// must not straddle two SPMs (the core traps such an instruction).
//
// Contention handling: the SPMI serves one vector instruction at a time. The
// core claims it (claim, with claim_lsu saying whether the LSU or the MFU
// will use it) when it issues a vector instruction, and the unit releases it
// when done; busy tells the core to make a requesting hart retry. Ports A
// and B must not read the same SPM in the same cycle (each SPM has a single
// read port; the MFU controller serialises such reads). Both rules are
// checked by assertions.
//
// Timing: read data appears the cycle after the read enable; writes land at
// the sampling edge. The paper names the rotators, the interleaver, the I/O
// mapping and the contention handler; their exact construction is this
// design's own.
module spmi #(
  parameter int unsigned N         = 4,
  parameter int unsigned D         = 2,
  parameter int unsigned SPM_BYTES = 4096,
  localparam int unsigned WORDS = SPM_BYTES / 4,
  localparam int unsigned LINES = WORDS / D,
  localparam int unsigned LW    = (LINES > 1) ? $clog2(LINES) : 1,
  localparam int unsigned AW    = $clog2(N * WORDS)
) (
  input  logic                clk,
  input  logic                rst_n,
  // ownership
  input  logic                claim,
  input  logic                claim_lsu,
  input  logic                release_i,
  output logic                busy,
  output logic                owner_lsu,
  // LSU word port (bank interleaver)
  input  logic                lsu_re,
  input  logic                lsu_we,
  input  logic [AW-1:0]       lsu_word,
  input  logic [31:0]         lsu_wdata,
  input  logic [3:0]          lsu_be,
  output logic [31:0]         lsu_rdata,
  // MFU line ports (rotators)
  input  logic                a_re,
  input  logic [AW-1:0]       a_word,
  output logic [D-1:0][31:0]  a_rdata,
  input  logic                b_re,
  input  logic [AW-1:0]       b_word,
  output logic [D-1:0][31:0]  b_rdata,
  input  logic                w_en,
  input  logic [AW-1:0]       w_word,
  input  logic [D-1:0][31:0]  w_data,
  input  logic [D-1:0][3:0]   w_be
);

  function automatic int unsigned spm_of(logic [AW-1:0] w);
    return int'(w) / WORDS;
  endfunction
  function automatic int unsigned loc_of(logic [AW-1:0] w);
    return int'(w) % WORDS;
  endfunction

  // ------------------------------------------------------------ ownership
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      owner_lsu <= 1'b0;
    end else if (claim) begin
      busy      <= 1'b1;
      owner_lsu <= claim_lsu;
    end else if (release_i) begin
      busy      <= 1'b0;
    end
  end

  // ------------------------------------------------------- SPM I/O mapping
  logic [D-1:0][31:0]   rd   [N];
  logic                 s_re [N];
  logic [D-1:0][LW-1:0] s_ra [N];
  logic [D-1:0]         s_we [N];
  logic [D-1:0][LW-1:0] s_wa [N];
  logic [D-1:0][31:0]   s_wd [N];
  logic [D-1:0][3:0]    s_wbe[N];

  always_comb begin
    for (int n = 0; n < N; n++) begin
      logic [AW-1:0] rw;
      int unsigned   k, lw;
      s_re[n] = 1'b0;
      rw      = '0;
      if (a_re && spm_of(a_word) == n)        begin s_re[n] = 1'b1; rw = a_word;   end
      else if (b_re && spm_of(b_word) == n)   begin s_re[n] = 1'b1; rw = b_word;   end
      else if (lsu_re && spm_of(lsu_word) == n) begin s_re[n] = 1'b1; rw = lsu_word; end
      // read rotator, address side: bank b serves lane (b - start) mod D
      for (int b = 0; b < D; b++) begin
        k  = (b + D - (loc_of(rw) % D)) % D;
        lw = (loc_of(rw) + k) / D;
        s_ra[n][b] = LW'(lw);
      end
      // write side
      s_we[n] = '0;
      s_wa[n] = '0;
      s_wd[n] = '0;
      s_wbe[n] = '0;
      if (w_en && spm_of(w_word) == n) begin
        for (int b = 0; b < D; b++) begin
          k  = (b + D - (loc_of(w_word) % D)) % D;
          lw = (loc_of(w_word) + k) / D;
          s_wa[n][b]  = LW'(lw);
          s_wd[n][b]  = w_data[k];
          s_wbe[n][b] = w_be[k];
          s_we[n][b]  = |w_be[k];
        end
      end else if (lsu_we && spm_of(lsu_word) == n) begin
        for (int b = 0; b < D; b++) begin
          s_wa[n][b]  = LW'(loc_of(lsu_word) / D);
          s_wd[n][b]  = lsu_wdata;
          s_wbe[n][b] = lsu_be;
          s_we[n][b]  = (b == loc_of(lsu_word) % D);  // bank interleaver
        end
      end
    end
  end

  for (genvar n = 0; n < N; n++) begin : g_spm
    spm #(.D(D), .SPM_BYTES(SPM_BYTES)) u_spm (
      .clk   (clk),
      .re    (s_re[n]),
      .raddr (s_ra[n]),
      .rdata (rd[n]),
      .we    (s_we[n]),
      .waddr (s_wa[n]),
      .wdata (s_wd[n]),
      .wbe   (s_wbe[n])
    );
  end

  // ------------------------------------------------- read rotator, data side
  int unsigned a_spm_q, b_spm_q, l_spm_q;
  int unsigned a_off_q, b_off_q, l_off_q;

  always_ff @(posedge clk) begin
    a_spm_q <= spm_of(a_word);
    a_off_q <= loc_of(a_word) % D;
    b_spm_q <= spm_of(b_word);
    b_off_q <= loc_of(b_word) % D;
    l_spm_q <= spm_of(lsu_word);
    l_off_q <= loc_of(lsu_word) % D;
  end

  always_comb begin
    for (int k = 0; k < D; k++) begin
      a_rdata[k] = rd[a_spm_q % N][(a_off_q + k) % D];
      b_rdata[k] = rd[b_spm_q % N][(b_off_q + k) % D];
    end
    lsu_rdata = rd[l_spm_q % N][l_off_q % D];
  end

  // ------------------------------------------------------------ assertions
  a_one_read: assert property (@(posedge clk) disable iff (!rst_n)
    !(a_re && b_re && spm_of(a_word) == spm_of(b_word)))
    else $error("spmi: ports A and B read the same SPM in one cycle");
  a_one_user: assert property (@(posedge clk) disable iff (!rst_n)
    !((lsu_re || lsu_we) && (a_re || b_re || w_en)))
    else $error("spmi: LSU and MFU access the SPMI in the same cycle");
  a_claim: assert property (@(posedge clk) disable iff (!rst_n) !(claim && busy))
    else $error("spmi: claimed while busy");

endmodule
