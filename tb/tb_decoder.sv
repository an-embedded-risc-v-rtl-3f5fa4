// tb_decoder: self-checking test of the instruction decoder. Instructions are
// encoded with rv_asm_pkg and the decoded fields (registers, immediate, ALU
// operation, memory, branch, CSR, system and MMUL controls) are compared with
// what the RISC-V specification and the MMUL format say they mean. RV32E
// register limits and unknown opcodes must set `illegal`.
module tb_decoder;
  import rv_pkg::*;
  import rv_asm_pkg::*;
  logic [31:0] inst;
  dec_t        dec;
  decoder dut (.inst, .dec);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (inst %h)", what, inst); end
  endtask

  initial begin
    #10_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    inst = addi(5, 3, -20); #1;
    check(!dec.illegal && dec.rd == 5 && dec.rs1 == 3 && dec.imm == 32'hFFFF_FFEC &&
          dec.alu_op == ALU_ADD && dec.opb_sel == OPB_IMM && dec.rf_we, "addi");
    inst = sub(1, 2, 3); #1;
    check(!dec.illegal && dec.alu_op == ALU_SUB && dec.opb_sel == OPB_RS2 && dec.rs2 == 3, "sub");
    inst = srai(4, 4, 3); #1;
    check(!dec.illegal && dec.alu_op == ALU_SRA && dec.imm[4:0] == 3, "srai");
    inst = sltu(6, 7, 8); #1;
    check(!dec.illegal && dec.alu_op == ALU_SLTU, "sltu");
    inst = lui(9, 'h12345); #1;
    check(!dec.illegal && dec.imm == 32'h1234_5000 && dec.alu_op == ALU_PASSB, "lui");
    inst = auipc(9, 'h1); #1;
    check(!dec.illegal && dec.opa_sel == OPA_PC && dec.imm == 32'h1000, "auipc");
    inst = lb(2, 3, 7); #1;
    check(!dec.illegal && dec.mem_rd && dec.mem_size == MEM_B && !dec.mem_uns && dec.imm == 7, "lb");
    inst = lhu(2, 3, -2); #1;
    check(!dec.illegal && dec.mem_rd && dec.mem_size == MEM_H && dec.mem_uns && dec.imm == 32'hFFFF_FFFE, "lhu");
    inst = sw(5, 6, -100); #1;
    check(!dec.illegal && dec.mem_wr && !dec.rf_we && dec.mem_size == MEM_W &&
          dec.rs2 == 5 && dec.rs1 == 6 && dec.imm == 32'hFFFF_FF9C, "sw");
    inst = bne(1, 2, -16); #1;
    check(!dec.illegal && dec.br_type == BR_NE && dec.imm == 32'hFFFF_FFF0 && !dec.rf_we, "bne");
    inst = bgeu(1, 2, 2048); #1;
    check(!dec.illegal && dec.br_type == BR_GEU && dec.imm == 32'd2048, "bgeu");
    inst = jal(1, -1048576); #1;
    check(!dec.illegal && dec.jal && dec.rf_we && dec.imm == 32'hFFF0_0000, "jal");
    inst = jalr(0, 1, 12); #1;
    check(!dec.illegal && dec.jalr && dec.imm == 12, "jalr");
    inst = csrrw(3, 'h7C0, 4); #1;
    check(!dec.illegal && dec.csr_op == CSR_RW && dec.csr_addr == 12'h7C0 && !dec.csr_imm, "csrrw");
    inst = csrrsi(0, 'h300, 8); #1;
    check(!dec.illegal && dec.csr_op == CSR_RS && dec.csr_imm && dec.imm == 8, "csrrsi");
    inst = csrrci(0, 'h300, 31); #1;
    check(!dec.illegal && dec.csr_op == CSR_RC && dec.imm == 31, "csrrci");
    inst = mret(); #1;
    check(!dec.illegal && dec.mret, "mret");
    inst = ecall(); #1;
    check(!dec.illegal && dec.ecall, "ecall");
    inst = 32'h0010_0073; #1;
    check(!dec.illegal && dec.ebreak, "ebreak");
    inst = 32'h1050_0073; #1;
    check(!dec.illegal && !dec.rf_we && !dec.mret, "wfi as no-op");
    inst = 32'h0ff0_000f; #1;
    check(!dec.illegal && !dec.rf_we, "fence as no-op");
    for (int w = 1; w <= 32; w++) begin
      inst = mmul(4, 1, 2, 3, w); #1;
      check(!dec.illegal && dec.mmul && dec.rd == 4 && dec.rs1 == 1 && dec.rs2 == 2 &&
            dec.rs3 == 3 && dec.mmul_len == 5'(w - 1) && !dec.rf_we && !dec.mem_rd && !dec.mem_wr,
            $sformatf("mmul %0d words", w));
    end
    // RV32E: registers x16..x31 do not exist
    inst = addi(16, 1, 0); #1;  check(dec.illegal, "rd x16");
    inst = add(1, 17, 2);  #1;  check(dec.illegal, "rs1 x17");
    inst = add(1, 2, 31);  #1;  check(dec.illegal, "rs2 x31");
    inst = mmul(4, 1, 2, 19, 4); #1; check(dec.illegal, "mmul rs3 x19");
    inst = 32'h0000_0007; #1;  check(dec.illegal, "FP load opcode");
    inst = 32'h0200_8033; #1;  check(dec.illegal, "M-extension mul");
    inst = 32'hFFFF_FFFF; #1;  check(dec.illegal, "all ones");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
