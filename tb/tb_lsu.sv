// tb_lsu: the load/store unit against a data memory model and three small
// scratchpad models behind its SPMI word port. Checks byte/halfword/word
// stores (byte enables and lane placement), load requests, amoadd.w and
// amomax.w (old value returned, new value written, busy for one cycle),
// LR/SC success, SC failure without a reservation and after another hart's
// store, and kmemld / kmemstr transfers with a partial last word: data,
// destination SPMI, n + 1 busy cycles and the v_done pulse.
`timescale 1ns/1ps
module tb_lsu;
  import kl_pkg::*;
  localparam int AW = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req, busy, sc_fail, data_req, data_we, s_re, s_we, v_done;
  logic [1:0] harc, v_spmi, s_sel;
  unit_e unit; ls_kind_e kind; vop_e vop;
  logic [2:0] funct3; logic [4:0] funct5;
  logic [31:0] addr, wdata, v_size, data_addr, data_wdata, data_rdata, s_wdata, s_rdata;
  logic [AW-1:0] v_spm, s_word;
  logic [3:0] data_be, s_be;
  logic [31:0] dmem [256];
  logic [31:0] spm [3][128];
  int checks = 0, failures = 0;

  lsu #(.HARTS(3), .M(3), .AW(AW)) dut (.*);

  always_ff @(posedge clk) begin
    if (data_req) begin
      if (data_we) begin
        for (int i = 0; i < 4; i++) if (data_be[i]) dmem[data_addr[9:2]][8*i +: 8] <= data_wdata[8*i +: 8];
      end else data_rdata <= dmem[data_addr[9:2]];
    end
    if (s_re) s_rdata <= spm[s_sel][s_word];
    if (s_we) for (int i = 0; i < 4; i++) if (s_be[i]) spm[s_sel][s_word][8*i +: 8] <= s_wdata[8*i +: 8];
  end

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  task automatic op(int h, unit_e u, ls_kind_e k, logic [2:0] f3, logic [4:0] f5, logic [31:0] a, logic [31:0] wd);
    req = 1; harc = 2'(h); unit = u; kind = k; funct3 = f3; funct5 = f5; addr = a; wdata = wd;
    @(posedge clk); #1; req = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nb;
    req = 0; harc = 0; unit = UN_LSU; kind = LS_LOAD; vop = KMEMLD; funct3 = 2; funct5 = 0;
    addr = 0; wdata = 0; v_spm = 0; v_spmi = 0; v_size = 0;
    for (int i = 0; i < 256; i++) dmem[i] = 32'h1111_1111 * (i % 16);
    for (int s = 0; s < 3; s++) for (int i = 0; i < 128; i++) spm[s][i] = {8'(s), 24'(i)};
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    // stores
    dmem[4] = 0;
    op(0, UN_LSU, LS_STORE, 3'b000, 0, 32'h11, 32'hAB);        // sb to byte 1 of word 4
    op(0, UN_LSU, LS_STORE, 3'b001, 0, 32'h12, 32'hCDEF);      // sh to bytes 2,3
    chk("sb/sh", dmem[4], 32'hCDEF_AB00);
    op(1, UN_LSU, LS_STORE, 3'b010, 0, 32'h20, 32'hDEAD_BEEF);
    chk("sw", dmem[8], 32'hDEAD_BEEF);
    // load request: data arrives next cycle
    req = 1; harc = 0; unit = UN_LSU; kind = LS_LOAD; funct3 = 3'b010; addr = 32'h20; #1;
    chk("load req", {31'd0, data_req && !data_we}, 1);
    @(posedge clk); #1; req = 0;
    chk("load data", data_rdata, 32'hDEAD_BEEF);
    // AMO add
    dmem[10] = 100;
    req = 1; harc = 2; unit = UN_LSU; kind = LS_AMO; funct5 = 5'b00000; addr = 32'h28; wdata = 23;
    @(posedge clk); #1; req = 0;
    chk("amo busy", busy, 1);
    chk("amo old", data_rdata, 100);
    @(posedge clk); #1;
    chk("amo new", dmem[10], 123);
    chk("amo done", busy, 0);
    op(2, UN_LSU, LS_AMO, 3'b010, 5'b10100, 32'h28, -32'sd5);  // amomax
    @(posedge clk); #1;
    chk("amomax", dmem[10], 123);
    // LR/SC
    op(0, UN_LSU, LS_LR, 3'b010, 0, 32'h30, 0);
    op(0, UN_LSU, LS_SC, 3'b010, 0, 32'h30, 77);
    chk("sc ok", sc_fail, 0); chk("sc wrote", dmem[12], 77);
    op(1, UN_LSU, LS_SC, 3'b010, 0, 32'h30, 88);
    chk("sc no resv", sc_fail, 1); chk("sc no write", dmem[12], 77);
    op(0, UN_LSU, LS_LR, 3'b010, 0, 32'h30, 0);
    op(1, UN_LSU, LS_STORE, 3'b010, 0, 32'h30, 99);
    op(0, UN_LSU, LS_SC, 3'b010, 0, 32'h30, 55);
    chk("sc after store", sc_fail, 1); chk("sc kept", dmem[12], 99);
    // kmemld: 22 bytes from mem 0x40 to SPMI 2 word 5
    for (int i = 0; i < 6; i++) dmem[16 + i] = 32'hA000_0000 + i;
    req = 1; harc = 2; unit = UN_VLSU; vop = KMEMLD; addr = 32'h40; v_spm = 5; v_spmi = 2; v_size = 22;
    @(posedge clk); #1; req = 0;
    nb = 0;
    while (busy) begin nb++; @(posedge clk); #1; end
    chk("kmemld cycles", nb, 6 + 1);
    for (int i = 0; i < 5; i++) chk("kmemld data", spm[2][5 + i], 32'hA000_0000 + i);
    chk("kmemld partial", spm[2][10], {8'd2, 24'd10} & 32'hFFFF_0000 | 32'h0000_0005);
    chk("kmemld other spmi", spm[1][5], {8'd1, 24'd5});
    // kmemstr: 5 words from SPMI 1 word 20 to mem 0x80
    req = 1; harc = 1; unit = UN_VLSU; vop = KMEMSTR; addr = 32'h80; v_spm = 20; v_spmi = 1; v_size = 20;
    @(posedge clk); #1; req = 0;
    nb = 0;
    while (busy) begin nb++; @(posedge clk); #1; end
    chk("kmemstr cycles", nb, 5 + 1);
    for (int i = 0; i < 5; i++) chk("kmemstr data", dmem[32 + i], {8'd1, 24'(20 + i)});
    chk("kmemstr bound", dmem[37], 32'h1111_1111 * 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
