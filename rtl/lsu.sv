// lsu: load/store unit, the only unit that drives the data memory port.
//
// Scalar accesses (LB/LH/LW/LBU/LHU, SB/SH/SW) issue their request in the
// execute cycle; load data returns in the write-back cycle, where the
// writeback stage aligns it. LR.W records a per-hart reservation; SC.W
// stores only if the hart still holds a reservation for that word and
// returns 0 (success) or 1; any store to a reserved word cancels the
// reservation. AMOs read in the execute cycle and write the combined value
// in the next cycle (the LSU is busy then); rd gets the old word.
//
// Vector transfers (kmemld, kmemstr) move `size` bytes between the data
// memory (32-bit port) and one SPMI, one word per cycle, pipelined:
//   kmemld : read memory word i, next cycle write it to SPM word spm+i
//   kmemstr: read SPM word i, next cycle write it to memory word mem+i
// The SPMI's bank interleaver spreads the words over the banks. A partial
// last word is written with byte enables. v_done pulses with the last write
// and releases the SPMI. While a transfer or an AMO is in progress busy is
// high and the core makes any hart that wants the LSU retry.
//
// Timing: accept when req && !busy; kmemld / kmemstr of n words take n + 1
// cycles after the accept cycle. The paper says the LSU moves data between
// data memory and SPMs through the 32-bit data port and that the bank
// interleaver switches banks; the pipelining, reservation rules and
// busy/retry are this design's choices.
module lsu
  import kl_pkg::*;
#(
  parameter int unsigned HARTS = 3,
  parameter int unsigned M     = 3,
  parameter int unsigned AW    = 12,   // SPMI word-address width
  localparam int unsigned HW = (HARTS > 1) ? $clog2(HARTS) : 1,
  localparam int unsigned MW = (M > 1) ? $clog2(M) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // request from execute
  input  logic           req,
  input  logic [HW-1:0]  harc,
  input  unit_e          unit,      // UN_LSU or UN_VLSU
  input  ls_kind_e       kind,
  input  vop_e           vop,       // KMEMLD / KMEMSTR
  input  logic [2:0]     funct3,
  input  logic [4:0]     funct5,
  input  logic [31:0]    addr,      // scalar address / vector memory address
  input  logic [31:0]    wdata,     // rs2
  input  logic [AW-1:0]  v_spm,     // vector: SPMI word address
  input  logic [MW-1:0]  v_spmi,    // vector: which SPMI
  input  logic [31:0]    v_size,    // vector: bytes (> 0)
  output logic           busy,
  output logic           sc_fail,   // SC result for write-back (next cycle)
  // data memory
  output logic           data_req,
  output logic           data_we,
  output logic [3:0]     data_be,
  output logic [31:0]    data_addr,
  output logic [31:0]    data_wdata,
  input  logic [31:0]    data_rdata,
  // SPMI word port
  output logic           s_re,
  output logic           s_we,
  output logic [MW-1:0]  s_sel,
  output logic [AW-1:0]  s_word,
  output logic [31:0]    s_wdata,
  output logic [3:0]     s_be,
  input  logic [31:0]    s_rdata,
  output logic           v_done
);

  typedef enum logic [1:0] { L_IDLE, L_AMO, L_VLD, L_VST } lstate_e;

  lstate_e           st;
  logic [31:0]       amo_addr, amo_op;
  logic [4:0]        amo_f5;
  logic [31:0]       v_mem_q;
  logic [AW-1:0]     v_spm_q;
  logic [MW-1:0]     v_spmi_q;
  logic [31:0]       n_words, rd_i, pend_i;
  logic              pend_v;
  logic [3:0]        lastbe;
  logic [HARTS-1:0]  resv_v;
  logic [HARTS-1:0][31:0] resv_a;

  assign busy  = (st != L_IDLE);

  // scalar byte enables and data placement
  logic [3:0]  sbe;
  logic [31:0] swd;
  always_comb begin
    unique case (funct3[1:0])
      2'b00:   begin sbe = 4'b0001 << addr[1:0]; swd = {4{wdata[7:0]}};  end
      2'b01:   begin sbe = 4'b0011 << addr[1:0]; swd = {2{wdata[15:0]}}; end
      default: begin sbe = 4'b1111;              swd = wdata;            end
    endcase
  end

  logic sc_ok;
  assign sc_ok = resv_v[harc] && (resv_a[harc][31:2] == addr[31:2]);

  function automatic logic [31:0] amo_calc(logic [4:0] f, logic [31:0] old, logic [31:0] op);
    unique case (f)
      5'b00001: return op;                                            // swap
      5'b00000: return old + op;                                      // add
      5'b00100: return old ^ op;                                      // xor
      5'b01100: return old & op;                                      // and
      5'b01000: return old | op;                                      // or
      5'b10000: return ($signed(old) < $signed(op)) ? old : op;      // min
      5'b10100: return ($signed(old) > $signed(op)) ? old : op;      // max
      5'b11000: return (old < op) ? old : op;                         // minu
      default:  return (old > op) ? old : op;                         // maxu
    endcase
  endfunction

  logic accept;
  assign accept = req && !busy;

  always_comb begin
    data_req   = 1'b0;
    data_we    = 1'b0;
    data_be    = 4'hF;
    data_addr  = {addr[31:2], 2'b00};
    data_wdata = swd;
    s_re    = 1'b0;
    s_we    = 1'b0;
    s_sel   = v_spmi_q;
    s_word  = v_spm_q + AW'(rd_i);
    s_wdata = data_rdata;
    s_be    = 4'hF;
    v_done  = 1'b0;
    unique case (st)
      L_IDLE: if (accept && unit == UN_LSU) begin
        data_req = (kind != LS_SC) || sc_ok;
        data_we  = (kind == LS_STORE) || (kind == LS_SC);
        data_be  = (kind == LS_STORE) ? sbe : 4'hF;
      end
      L_AMO: begin
        data_req   = 1'b1;
        data_we    = 1'b1;
        data_addr  = amo_addr;
        data_wdata = amo_calc(amo_f5, data_rdata, amo_op);
      end
      L_VLD: begin
        if (rd_i < n_words) begin
          data_req  = 1'b1;
          data_addr = v_mem_q + (rd_i << 2);
        end
        if (pend_v) begin
          s_we    = 1'b1;
          s_word  = v_spm_q + AW'(pend_i);
          s_wdata = data_rdata;
          s_be    = (pend_i == n_words - 1) ? lastbe : 4'hF;
          v_done  = (pend_i == n_words - 1);
        end
      end
      L_VST: begin
        if (rd_i < n_words) begin
          s_re   = 1'b1;
          s_word = v_spm_q + AW'(rd_i);
        end
        if (pend_v) begin
          data_req   = 1'b1;
          data_we    = 1'b1;
          data_addr  = v_mem_q + (pend_i << 2);
          data_wdata = s_rdata;
          data_be    = (pend_i == n_words - 1) ? lastbe : 4'hF;
          v_done     = (pend_i == n_words - 1);
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= L_IDLE;
      amo_addr <= '0;
      amo_op   <= '0;
      amo_f5   <= '0;
      v_mem_q  <= '0;
      v_spm_q  <= '0;
      v_spmi_q <= '0;
      n_words  <= '0;
      rd_i     <= '0;
      pend_i   <= '0;
      pend_v   <= 1'b0;
      lastbe   <= 4'hF;
      resv_v   <= '0;
      resv_a   <= '0;
      sc_fail  <= 1'b0;
    end else begin
      // reservations: any store to a reserved word cancels it
      if (data_req && data_we)
        for (int h = 0; h < HARTS; h++)
          if (resv_a[h][31:2] == data_addr[31:2]) resv_v[h] <= 1'b0;
      unique case (st)
        L_IDLE: if (accept) begin
          if (unit == UN_LSU) begin
            unique case (kind)
              LS_LR:  begin resv_v[harc] <= 1'b1; resv_a[harc] <= addr; end
              LS_SC:  begin resv_v[harc] <= 1'b0; sc_fail <= !sc_ok;   end
              LS_AMO: begin
                st       <= L_AMO;
                amo_addr <= {addr[31:2], 2'b00};
                amo_op   <= wdata;
                amo_f5   <= funct5;
              end
              default: ;
            endcase
          end else begin
            st      <= (vop == KMEMLD) ? L_VLD : L_VST;
            v_mem_q <= {addr[31:2], 2'b00};
            v_spm_q <= v_spm;
            v_spmi_q <= v_spmi;
            n_words <= (v_size + 32'd3) >> 2;
            lastbe  <= (v_size[1:0] == 2'd0) ? 4'hF : (4'hF >> (3'd4 - {1'b0, v_size[1:0]}));
            rd_i    <= '0;
            pend_v  <= 1'b0;
          end
        end
        L_AMO: st <= L_IDLE;
        L_VLD, L_VST: begin
          pend_v <= (rd_i < n_words);
          pend_i <= rd_i;
          if (rd_i < n_words) rd_i <= rd_i + 32'd1;
          if (v_done) st <= L_IDLE;
        end
        default: st <= L_IDLE;
      endcase
    end
  end

endmodule
