// spm: one scratchpad memory (SPM) of the vector coprocessor.
//
// The SPM is split into D banks of 32-bit words; word w of the SPM lives in
// bank w % D at line w / D, so the D banks side by side form one SPM line of
// D words. It has one read port and one write port, as in the paper. Each
// bank has its own line address on both ports: an access of D consecutive
// words that does not start at bank 0 touches two adjacent lines, which the
// rotators in the interface (spmi) then align. That per-bank addressing and
// the byte write enables are this design's choices; the paper only says that
// the banks are accessed together as one line.
//
// Timing: a read returns its data one cycle after re (synchronous read);
// a write takes effect at the clock edge that samples we. Contents are not
// reset.
module spm #(
  parameter int unsigned D         = 2,     // banks = MFU lanes
  parameter int unsigned SPM_BYTES = 4096,  // capacity of this SPM
  localparam int unsigned WORDS = SPM_BYTES / 4,
  localparam int unsigned LINES = WORDS / D,
  localparam int unsigned LW    = (LINES > 1) ? $clog2(LINES) : 1
) (
  input  logic                 clk,
  // read port
  input  logic                 re,
  input  logic [D-1:0][LW-1:0] raddr,   // line address, per bank
  output logic [D-1:0][31:0]   rdata,   // per bank, valid the cycle after re
  // write port
  input  logic [D-1:0]         we,      // per bank
  input  logic [D-1:0][LW-1:0] waddr,
  input  logic [D-1:0][31:0]   wdata,
  input  logic [D-1:0][3:0]    wbe      // byte enables, per bank
);

  initial begin
    assert (WORDS % D == 0) else $error("spm: SPM words must be a multiple of D");
  end

  for (genvar b = 0; b < D; b++) begin : g_bank
    logic [31:0] mem [LINES];

    always_ff @(posedge clk) begin
      if (re) rdata[b] <= mem[raddr[b]];
    end

    always_ff @(posedge clk) begin
      if (we[b]) begin
        for (int i = 0; i < 4; i++)
          if (wbe[b][i]) mem[waddr[b]][8*i +: 8] <= wdata[b][8*i +: 8];
      end
    end
  end

endmodule
