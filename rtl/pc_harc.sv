// pc_harc: program counters of the harts and the hardware context counter
// (harc) of the fetch stage.
//
// The core keeps one program counter per hart. Every cycle harc moves to
// the next hart in rotation (0, 1, ..., HARTS-1, 0, ...), its PC is sent to
// the program memory and advanced by 4 (PC updater). The execute stage can
// overwrite the PC of the hart it is executing (redir: taken branch, jump,
// trap, mret, or the self-referencing jump of a hart that found the
// coprocessor busy). With HARTS >= 3 and four pipeline stages, a hart's next
// fetch always comes after its previous instruction left execute, so the
// redirect always reaches the next fetch of that hart and no wrong-path
// instruction is ever fetched; the execute-stage write has priority anyway.
//
// Timing: harc_if/pc_if are valid in the cycle they are presented to the
// program memory; redir takes effect at the next clock edge. All PCs reset
// to BOOT_ADDR and harc to 0. Rotation, per-hart PCs and the harc counter
// follow the paper; the reset values are this design's choice.
module pc_harc #(
  parameter int unsigned HARTS     = 3,
  parameter logic [31:0] BOOT_ADDR = 32'h0000_0000,
  localparam int unsigned HW = (HARTS > 1) ? $clog2(HARTS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic          fetch_valid,
  output logic [HW-1:0] harc_if,
  output logic [31:0]   pc_if,
  input  logic          redir,
  input  logic [HW-1:0] redir_harc,
  input  logic [31:0]   redir_pc
);

  logic [31:0] pc [HARTS];

  assign pc_if = pc[harc_if];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      harc_if     <= '0;
      fetch_valid <= 1'b0;
      for (int h = 0; h < HARTS; h++) pc[h] <= BOOT_ADDR;
    end else begin
      fetch_valid <= 1'b1;
      if (fetch_valid) begin
        harc_if <= (int'(harc_if) == HARTS - 1) ? '0 : harc_if + 1'b1;
        pc[harc_if] <= pc[harc_if] + 32'd4;
      end
      if (redir) pc[redir_harc] <= redir_pc;
    end
  end

  initial begin
    assert (HARTS >= 3) else $error("pc_harc: the IMT fence needs at least 3 harts");
  end

endmodule
