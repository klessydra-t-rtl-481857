// regfile: integer register files of the harts, one 32 x 32-bit bank per
// hart, selected by the hart context of the access.
//
// Three combinational read ports serve the decode stage: rs1, rs2 and rd
// (the vector instructions use rd as a source: it holds the destination
// address). One write port serves the write-back stage. x0 reads as zero
// and is never written. With three harts in a four-stage pipeline a hart's
// write-back always lands before its next instruction reads, so no bypass is
// needed. Registers are not reset (in the paper they sit in LUT-RAM).
// Replication per hart follows the paper; the port count is this design's.
module regfile #(
  parameter int unsigned HARTS = 3,
  localparam int unsigned HW = (HARTS > 1) ? $clog2(HARTS) : 1
) (
  input  logic          clk,
  input  logic [HW-1:0] rharc,
  input  logic [4:0]    ra1,
  input  logic [4:0]    ra2,
  input  logic [4:0]    ra3,
  output logic [31:0]   rd1,
  output logic [31:0]   rd2,
  output logic [31:0]   rd3,
  input  logic          we,
  input  logic [HW-1:0] wharc,
  input  logic [4:0]    wa,
  input  logic [31:0]   wd
);

  logic [31:0] rf [HARTS][32];

  assign rd1 = (ra1 == 5'd0) ? 32'd0 : rf[rharc][ra1];
  assign rd2 = (ra2 == 5'd0) ? 32'd0 : rf[rharc][ra2];
  assign rd3 = (ra3 == 5'd0) ? 32'd0 : rf[rharc][ra3];

  always_ff @(posedge clk) begin
    if (we && wa != 5'd0) rf[wharc][wa] <= wd;
  end

endmodule
