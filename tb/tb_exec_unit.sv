// tb_exec_unit: random operands for every ALU operation, every M-extension
// operation (with division by zero and signed overflow cases forced) and
// every branch / jump, compared with reference values computed here.
`timescale 1ns/1ps
module tb_exec_unit;
  import kl_pkg::*;
  dec_t dec;
  logic [31:0] pc, rs1v, rs2v, result, target;
  logic jump;
  int checks = 0, failures = 0;

  exec_unit dut (.*);

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 300; i++) begin
      logic signed [31:0] a, b;
      logic [63:0] p;
      dec = '0;
      pc = $urandom & ~32'd3;
      a = $urandom; b = $urandom;
      if (i % 10 == 0) b = 0;
      if (i % 10 == 1) begin a = 32'h8000_0000; b = -1; end
      if (i % 10 == 2) b = a;
      rs1v = a; rs2v = b;
      dec.imm = $urandom;
      // ALU, register operand
      dec.unit = UN_ALU;
      for (int op = 0; op <= 11; op++) begin
        logic [31:0] e;
        dec.alu_op = alu_op_e'(op);
        case (op)
          0: e = a + b;  1: e = a - b;  2: e = a << b[4:0];
          3: e = (a < b) ? 1 : 0;  4: e = ($unsigned(a) < $unsigned(b)) ? 1 : 0;
          5: e = a ^ b;  6: e = $unsigned(a) >> b[4:0];  7: e = a >>> b[4:0];
          8: e = a | b;  9: e = a & b;  10: e = dec.imm;  default: e = pc + dec.imm;
        endcase
        #1; chk($sformatf("alu %0d", op), result, e);
      end
      dec.use_imm = 1; dec.alu_op = ALU_ADD; #1; chk("addi", result, a + dec.imm);
      dec.use_imm = 0;
      // M extension
      dec.unit = UN_MD;
      for (int f = 0; f < 8; f++) begin
        logic [31:0] e;
        dec.funct3 = 3'(f);
        case (f)
          0: e = a * b;
          1: begin p = 64'(64'(a) * 64'(b)); e = p[63:32]; end
          2: begin p = 64'(64'(a) * $signed({32'd0, b})); e = p[63:32]; end
          3: begin p = {32'd0, a} * {32'd0, b}; e = p[63:32]; end
          4: e = (b == 0) ? -1 : (a == 32'sh8000_0000 && b == -1) ? a : a / b;
          5: e = (b == 0) ? -1 : $unsigned(a) / $unsigned(b);
          6: e = (b == 0) ? a : (a == 32'sh8000_0000 && b == -1) ? 0 : a % b;
          default: e = (b == 0) ? a : $unsigned(a) % $unsigned(b);
        endcase
        #1; chk($sformatf("md %0d", f), result, e);
      end
      // branches
      dec.unit = UN_BR;
      dec.imm = {$urandom_range(0, 4095), 1'b0};
      for (int f = 0; f < 8; f++) begin
        logic t;
        if (f == 2 || f == 3) continue;
        dec.funct3 = 3'(f);
        case (f)
          0: t = a == b; 1: t = a != b; 4: t = a < b; 5: t = a >= b;
          6: t = $unsigned(a) < $unsigned(b); default: t = $unsigned(a) >= $unsigned(b);
        endcase
        #1; chk("br take", {31'd0, jump}, {31'd0, t}); chk("br tgt", target, pc + dec.imm);
      end
      dec.jal = 1; #1; chk("jal", {31'd0, jump}, 1); chk("jal link", result, pc + 4);
      dec.jal = 0; dec.jalr = 1; #1; chk("jalr tgt", target, (a + dec.imm) & ~32'd1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
