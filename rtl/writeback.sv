// writeback: write-back stage (WB).
//
// Chooses what the instruction leaving execute writes to its hart's rd:
//   WB_EXEC : the value computed in execute (ALU, mul/div, link, CSR read)
//   WB_LOAD : the data memory word arriving this cycle, shifted by the low
//             address bits and sign- or zero-extended per funct3 (loads, LR)
//   WB_AMO  : the old memory word (AMOs)
//   WB_SC   : the store-conditional result from the LSU
// and drives the register-file write port. Combinational; the write lands
// at the end of this cycle. The paper only names the stage; the selection
// is this design's.
module writeback
  import kl_pkg::*;
#(
  parameter int unsigned HARTS = 3,
  localparam int unsigned HW = (HARTS > 1) ? $clog2(HARTS) : 1
) (
  input  logic          valid,
  input  logic [HW-1:0] harc,
  input  logic [4:0]    rd,
  input  logic          rd_we,
  input  logic [1:0]    sel,        // 0 exec, 1 load, 2 amo, 3 sc
  input  logic [2:0]    funct3,
  input  logic [1:0]    addr_lo,
  input  logic [31:0]   exec_res,
  input  logic [31:0]   mem_rdata,
  input  logic          sc_fail,
  output logic          rf_we,
  output logic [HW-1:0] rf_harc,
  output logic [4:0]    rf_addr,
  output logic [31:0]   rf_wdata
);

  logic [31:0] sh;

  always_comb begin
    sh = mem_rdata >> {addr_lo, 3'b000};
    unique case (sel)
      2'd1: unique case (funct3)
        3'b000:  rf_wdata = {{24{sh[7]}},  sh[7:0]};
        3'b001:  rf_wdata = {{16{sh[15]}}, sh[15:0]};
        3'b100:  rf_wdata = {24'd0, sh[7:0]};
        3'b101:  rf_wdata = {16'd0, sh[15:0]};
        default: rf_wdata = mem_rdata;
      endcase
      2'd2:    rf_wdata = mem_rdata;
      2'd3:    rf_wdata = {31'd0, sc_fail};
      default: rf_wdata = exec_res;
    endcase
    rf_we   = valid && rd_we && (rd != 5'd0);
    rf_harc = harc;
    rf_addr = rd;
  end

endmodule
