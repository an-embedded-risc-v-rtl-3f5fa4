// tb_rvc_expander: self-checking test of the compressed-instruction expander.
// Each compressed instruction is encoded with rv_asm_pkg and must expand to
// the 32-bit instruction the C extension defines as its equivalent (also
// encoded with rv_asm_pkg). Reserved encodings must raise `illegal`.
module tb_rvc_expander;
  import rv_asm_pkg::*;
  logic [15:0] ci;
  logic [31:0] inst;
  logic        illegal;
  rvc_expander dut (.ci, .inst, .illegal);

  int checks = 0, failures = 0;
  task automatic t(input logic [15:0] c, input logic [31:0] exp, input string what);
    ci = c;
    #1;
    checks++;
    if (inst !== exp || illegal) begin
      failures++;
      $display("FAIL %s: %h -> %h, expected %h (illegal=%b)", what, c, inst, exp, illegal);
    end
  endtask
  task automatic t_ill(input logic [15:0] c, input string what);
    ci = c;
    #1;
    checks++;
    if (!illegal) begin
      failures++;
      $display("FAIL %s: %h not flagged illegal", what, c);
    end
  endtask

  initial begin
    #10_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    t(c_li(8, 5),            addi(8, 0, 5),      "c.li");
    t(c_li(3, -7),           addi(3, 0, -7),     "c.li negative");
    t(c_addi(9, -1),         addi(9, 9, -1),     "c.addi");
    t(c_addi(0, 0),          addi(0, 0, 0),      "c.nop");
    t(c_mv(9, 8),            add(9, 0, 8),       "c.mv");
    t(c_add(9, 10),          add(9, 9, 10),      "c.add");
    t(c_slli(5, 7),          slli(5, 5, 7),      "c.slli");
    t(c_jr(1),               jalr(0, 1, 0),      "c.jr");
    t(c_lw(8, 10, 0),        lw(8, 10, 0),       "c.lw");
    t(c_lw(15, 9, 124),      lw(15, 9, 124),     "c.lw max offset");
    t(c_lw(9, 8, 64),        lw(9, 8, 64),       "c.lw offset bit 6");
    t(c_sw(12, 13, 4),       sw(12, 13, 4),      "c.sw offset bit 2");
    t(c_sw(8, 10, 8),        sw(8, 10, 8),       "c.sw");
    t(c_sw(11, 12, 68),      sw(11, 12, 68),     "c.sw offset");
    t(c_sub(8, 10),          sub(8, 8, 10),      "c.sub");
    t(c_bnez(10, -4),        bne(10, 0, -4),     "c.bnez back");
    t(c_bnez(9, 130),        bne(9, 0, 130),     "c.bnez forward");
    t(c_j(-2048),            jal(0, -2048),      "c.j min");
    t(c_j(1234),             jal(0, 1234),       "c.j");
    t(c_lwsp(5, 252),        lw(5, 2, 252),      "c.lwsp");
    t(c_swsp(6, 200),        sw(6, 2, 200),      "c.swsp");
    t(c_addi4spn(9, 1020),   addi(9, 2, 1020),   "c.addi4spn");
    t(c_lui(7, -3),          lui(7, 'hFFFFD),    "c.lui");
    t(c_beqz(12, -256),      beq(12, 0, -256),   "c.beqz min");
    t(c_jal(2046),           jal(1, 2046),       "c.jal");
    t(c_jalr(5),             jalr(1, 5, 0),      "c.jalr");
    t(c_srli(9, 31),         srli(9, 9, 31),     "c.srli");
    t(c_srai(14, 5),         srai(14, 14, 5),    "c.srai");
    t(c_andi(15, -9),        andi(15, 15, -9),   "c.andi");
    t(c_ca(8, 9, 1),         xor_(8, 8, 9),      "c.xor");
    t(c_ca(10, 11, 2),       or_(10, 10, 11),    "c.or");
    t(c_ca(12, 13, 3),       and_(12, 12, 13),   "c.and");
    t(c_addi16sp(-512),      addi(2, 2, -512),   "c.addi16sp min");
    t(c_addi16sp(496),       addi(2, 2, 496),    "c.addi16sp");
    t(16'h9002,              32'h0010_0073,      "c.ebreak");
    t_ill(16'h0000, "all-zero halfword");
    t_ill(c_lwsp(0, 4), "c.lwsp to x0");
    t_ill(16'h2000, "c.fld");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
