// decoder: turns one 32-bit RV32E instruction into the control bundle dec_t.
//
// Purely combinational. It covers RV32I as restricted by the E extension
// (register numbers above 15 are illegal), the Zicsr instructions, ECALL,
// EBREAK, MRET, FENCE and WFI (the last two execute as no-ops), and the MMUL
// custom instruction. MMUL is an R4-type instruction, as the paper chooses:
// rs1, rs2 and rs3 hold the base addresses of the multiplicand A, the
// multiplier B and the modulus N, and rd holds the base address the result
// is written to. Its 5-bit length field is {fnc3, fnc2} and counts 32-bit
// words less one, so 0..31 encode 1..32 words (32 to 1024 bits). The custom-0
// opcode, the rd-as-result-address rule and the bit order of the length field
// are this design's choices. Anything unknown sets `illegal`.
module decoder
  import rv_pkg::*;
(
  input  logic [31:0] inst,
  output dec_t        dec
);
  logic [6:0] opc;
  logic [2:0] f3;
  logic [6:0] f7;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;
  logic bad_rs1, bad_rs2, bad_rd, bad_rs3;

  assign opc = inst[6:0];
  assign f3  = inst[14:12];
  assign f7  = inst[31:25];
  assign imm_i = {{20{inst[31]}}, inst[31:20]};
  assign imm_s = {{20{inst[31]}}, inst[31:25], inst[11:7]};
  assign imm_b = {{19{inst[31]}}, inst[31], inst[7], inst[30:25], inst[11:8], 1'b0};
  assign imm_u = {inst[31:12], 12'b0};
  assign imm_j = {{11{inst[31]}}, inst[31], inst[19:12], inst[20], inst[30:21], 1'b0};
  // RV32E: only x0..x15 exist
  assign bad_rd  = inst[11];
  assign bad_rs1 = inst[19];
  assign bad_rs2 = inst[24];
  assign bad_rs3 = inst[31];

  always_comb begin
    dec = '0;
    dec.rs1 = inst[18:15];
    dec.rs2 = inst[23:20];
    dec.rs3 = inst[30:27];
    dec.rd  = inst[10:7];
    dec.alu_op  = ALU_ADD;
    dec.opa_sel = OPA_RS1;
    dec.opb_sel = OPB_IMM;
    dec.mem_size = MEM_W;
    dec.br_type = BR_NONE;
    dec.csr_op  = CSR_NONE;
    dec.csr_addr = inst[31:20];
    dec.mmul_len = {f3, inst[26:25]};

    unique case (opc)
      OPC_LUI: begin
        dec.imm = imm_u; dec.alu_op = ALU_PASSB; dec.rf_we = 1'b1;
        dec.illegal = bad_rd;
      end
      OPC_AUIPC: begin
        dec.imm = imm_u; dec.opa_sel = OPA_PC; dec.rf_we = 1'b1;
        dec.illegal = bad_rd;
      end
      OPC_JAL: begin
        dec.imm = imm_j; dec.jal = 1'b1; dec.rf_we = 1'b1;
        dec.illegal = bad_rd;
      end
      OPC_JALR: begin
        dec.imm = imm_i; dec.jalr = 1'b1; dec.rf_we = 1'b1;
        dec.illegal = bad_rd | bad_rs1 | (f3 != 3'b000);
      end
      OPC_BRANCH: begin
        dec.imm = imm_b; dec.opb_sel = OPB_RS2;
        unique case (f3)
          3'b000: dec.br_type = BR_EQ;
          3'b001: dec.br_type = BR_NE;
          3'b100: dec.br_type = BR_LT;
          3'b101: dec.br_type = BR_GE;
          3'b110: dec.br_type = BR_LTU;
          3'b111: dec.br_type = BR_GEU;
          default: dec.illegal = 1'b1;
        endcase
        dec.illegal = dec.illegal | bad_rs1 | bad_rs2;
      end
      OPC_LOAD: begin
        dec.imm = imm_i; dec.mem_rd = 1'b1; dec.rf_we = 1'b1;
        dec.mem_size = mem_size_e'(f3[1:0]);
        dec.mem_uns  = f3[2];
        dec.illegal = bad_rd | bad_rs1 | (f3[1:0] == 2'b11) | (f3 == 3'b110);
      end
      OPC_STORE: begin
        dec.imm = imm_s; dec.mem_wr = 1'b1;
        dec.mem_size = mem_size_e'(f3[1:0]);
        dec.illegal = bad_rs1 | bad_rs2 | f3[2] | (f3[1:0] == 2'b11);
      end
      OPC_OPIMM: begin
        dec.imm = imm_i; dec.rf_we = 1'b1;
        unique case (f3)
          3'b000: dec.alu_op = ALU_ADD;
          3'b010: dec.alu_op = ALU_SLT;
          3'b011: dec.alu_op = ALU_SLTU;
          3'b100: dec.alu_op = ALU_XOR;
          3'b110: dec.alu_op = ALU_OR;
          3'b111: dec.alu_op = ALU_AND;
          3'b001: begin
            dec.alu_op = ALU_SLL;
            dec.illegal = (f7 != 7'b0);
          end
          default: begin // 3'b101
            dec.alu_op = f7[5] ? ALU_SRA : ALU_SRL;
            dec.illegal = ({f7[6], f7[4:0]} != 6'b0);
          end
        endcase
        dec.illegal = dec.illegal | bad_rd | bad_rs1;
      end
      OPC_OP: begin
        dec.opb_sel = OPB_RS2; dec.rf_we = 1'b1;
        unique case (f3)
          3'b000: dec.alu_op = f7[5] ? ALU_SUB : ALU_ADD;
          3'b001: dec.alu_op = ALU_SLL;
          3'b010: dec.alu_op = ALU_SLT;
          3'b011: dec.alu_op = ALU_SLTU;
          3'b100: dec.alu_op = ALU_XOR;
          3'b101: dec.alu_op = f7[5] ? ALU_SRA : ALU_SRL;
          3'b110: dec.alu_op = ALU_OR;
          default: dec.alu_op = ALU_AND;
        endcase
        dec.illegal = ({f7[6], f7[4:0]} != 6'b0) |
                      (f7[5] && f3 != 3'b000 && f3 != 3'b101) |
                      bad_rd | bad_rs1 | bad_rs2;
      end
      OPC_MISCMEM: begin
        // FENCE / FENCE.I: nothing to order in this core
        dec.illegal = (f3[2:1] != 2'b00);
      end
      OPC_SYSTEM: begin
        if (f3 == 3'b000) begin
          unique case (inst[31:7])
            25'h0000000: dec.ecall  = 1'b1;
            25'h0002000: dec.ebreak = 1'b1;
            25'h0604000: dec.mret   = 1'b1;                 // 0x30200073
            25'h020A000: ;                                  // WFI: no-op
            default:     dec.illegal = 1'b1;
          endcase
        end else begin
          dec.rf_we   = 1'b1;
          dec.csr_imm = f3[2];
          dec.imm     = {27'b0, inst[19:15]};
          unique case (f3[1:0])
            2'b01:   dec.csr_op = CSR_RW;
            2'b10:   dec.csr_op = CSR_RS;
            2'b11:   dec.csr_op = CSR_RC;
            default: dec.illegal = 1'b1;
          endcase
          dec.illegal = dec.illegal | bad_rd | (!f3[2] & bad_rs1);
        end
      end
      OPC_CUSTOM0: begin
        dec.mmul = 1'b1;
        dec.illegal = bad_rd | bad_rs1 | bad_rs2 | bad_rs3;
      end
      default: dec.illegal = 1'b1;
    endcase
  end
endmodule
