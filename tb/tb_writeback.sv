// tb_writeback: checks the register write of every kind of result: execute
// result, byte/halfword/word loads at every byte offset with sign and zero
// extension, the AMO old value and the SC result; and that rd = x0 or an
// invalid stage never writes.
`timescale 1ns/1ps
module tb_writeback;
  logic valid, rd_we, sc_fail, rf_we;
  logic [1:0] harc, sel, addr_lo, rf_harc;
  logic [4:0] rd, rf_addr;
  logic [2:0] funct3;
  logic [31:0] exec_res, mem_rdata, rf_wdata;
  int checks = 0, failures = 0;

  writeback #(.HARTS(3)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      logic [31:0] e;
      logic [7:0] b;
      logic [15:0] h;
      valid = $urandom_range(0, 7) != 0; rd_we = $urandom_range(0, 7) != 0;
      harc = 2'($urandom_range(0, 2)); rd = 5'($urandom);
      sel = 2'($urandom); addr_lo = 2'($urandom);
      funct3 = 3'(i % 6 == 0 ? 0 : i % 6 == 1 ? 1 : i % 6 == 2 ? 2 : i % 6 == 3 ? 4 : 5);
      if (funct3[0]) addr_lo[0] = 0;
      if (funct3 == 2) addr_lo = 0;
      exec_res = $urandom; mem_rdata = $urandom; sc_fail = 1'($urandom);
      b = mem_rdata[8*addr_lo +: 8];
      h = mem_rdata[8*addr_lo +: 16];
      case (sel)
        0: e = exec_res;
        1: case (funct3)
             0: e = {{24{b[7]}}, b};
             1: e = {{16{h[15]}}, h};
             4: e = {24'd0, b};
             5: e = {16'd0, h};
             default: e = mem_rdata;
           endcase
        2: e = mem_rdata;
        default: e = {31'd0, sc_fail};
      endcase
      #1;
      checks += 2;
      if (rf_we !== (valid && rd_we && rd != 0)) begin failures++; $display("FAIL we"); end
      if (rf_we && (rf_wdata !== e || rf_addr !== rd || rf_harc !== harc)) begin
        failures++; $display("FAIL data sel=%0d f3=%0d lo=%0d got %h exp %h", sel, funct3, addr_lo, rf_wdata, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
