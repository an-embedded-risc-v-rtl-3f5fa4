// rvc_expander: expands a 16-bit RV32C instruction into the equivalent 32-bit
// RV32I instruction, so that only one decoder is needed behind it.
//
// Purely combinational. Input: the 16-bit halfword (its low two bits are not
// 2'b11). Output: the 32-bit instruction and an `illegal` flag for reserved or
// RV64/floating-point-only encodings. Register numbers are copied into the
// full 5-bit fields, so a register above x15 reaches the decoder unchanged and
// is rejected there as an RV32E violation. Follows the RISC-V C extension;
// that the core expands compressed instructions in the fetch stage rather than
// decoding them directly is this design's choice.
module rvc_expander (
  input  logic [15:0] ci,
  output logic [31:0] inst,
  output logic        illegal
);
  localparam logic [4:0] X0 = 5'd0, X1 = 5'd1, X2 = 5'd2;

  function automatic logic [31:0] enc_i(logic [11:0] imm, logic [4:0] rs1,
                                        logic [2:0] f3, logic [4:0] rd, logic [6:0] opc);
    return {imm, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] enc_s(logic [11:0] imm, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3, logic [6:0] opc);
    return {imm[11:5], rs2, rs1, f3, imm[4:0], opc};
  endfunction
  function automatic logic [31:0] enc_r(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3, logic [4:0] rd, logic [6:0] opc);
    return {f7, rs2, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] enc_b(logic [12:0] off, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3);
    return {off[12], off[10:5], rs2, rs1, f3, off[4:1], off[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] enc_j(logic [20:0] off, logic [4:0] rd);
    return {off[20], off[10:1], off[11], off[19:12], rd, 7'b1101111};
  endfunction

  logic [4:0]  rd_full, rs2_full, rdp, rs1p, rs2p;
  logic [11:0] imm6;      // sign-extended 6-bit immediate
  logic [11:0] lw_off, lwsp_off, swsp_off, addi4spn_imm, addi16sp_imm;
  logic [11:0] cj_off;
  logic [8:0]  cb_off;

  assign rd_full  = ci[11:7];
  assign rs2_full = ci[6:2];
  assign rdp  = {2'b01, ci[4:2]};
  assign rs1p = {2'b01, ci[9:7]};
  assign rs2p = {2'b01, ci[4:2]};
  assign imm6 = {{7{ci[12]}}, ci[6:2]};
  assign lw_off       = {5'b0, ci[5], ci[12:10], ci[6], 2'b00};
  assign lwsp_off     = {4'b0, ci[3:2], ci[12], ci[6:4], 2'b00};
  assign swsp_off     = {4'b0, ci[8:7], ci[12:9], 2'b00};
  assign addi4spn_imm = {2'b0, ci[10:7], ci[12:11], ci[5], ci[6], 2'b00};
  assign addi16sp_imm = {{3{ci[12]}}, ci[4:3], ci[5], ci[2], ci[6], 4'b0};
  assign cj_off = {ci[12], ci[8], ci[10:9], ci[6], ci[7], ci[2], ci[11], ci[5:3], 1'b0};
  assign cb_off = {ci[12], ci[6:5], ci[2], ci[11:10], ci[4:3], 1'b0};

  always_comb begin
    inst    = 32'h0000_0013;  // nop
    illegal = 1'b0;
    unique case ({ci[15:13], ci[1:0]})
      // ---- quadrant 0 ----
      5'b000_00: begin  // C.ADDI4SPN
        inst = enc_i(addi4spn_imm, X2, 3'b000, rdp, 7'b0010011);
        illegal = (addi4spn_imm == 12'b0);
      end
      5'b010_00: inst = enc_i(lw_off, rs1p, 3'b010, rdp, 7'b0000011);        // C.LW
      5'b110_00: inst = enc_s(lw_off, rs2p, rs1p, 3'b010, 7'b0100011);       // C.SW
      // ---- quadrant 1 ----
      5'b000_01: inst = enc_i(imm6, rd_full, 3'b000, rd_full, 7'b0010011);   // C.ADDI / C.NOP
      5'b001_01: inst = enc_j({{9{cj_off[11]}}, cj_off}, X1);                // C.JAL
      5'b010_01: inst = enc_i(imm6, X0, 3'b000, rd_full, 7'b0010011);        // C.LI
      5'b011_01: begin
        if (rd_full == X2) begin  // C.ADDI16SP
          inst = enc_i(addi16sp_imm, X2, 3'b000, X2, 7'b0010011);
          illegal = (addi16sp_imm == 12'b0);
        end else begin            // C.LUI
          inst = {{15{ci[12]}}, ci[6:2], rd_full, 7'b0110111};
          illegal = ({ci[12], ci[6:2]} == 6'b0);
        end
      end
      5'b100_01: begin
        unique case (ci[11:10])
          2'b00: begin  // C.SRLI
            inst = enc_r(7'b0000000, ci[6:2], rs1p, 3'b101, rs1p, 7'b0010011);
            illegal = ci[12];
          end
          2'b01: begin  // C.SRAI
            inst = enc_r(7'b0100000, ci[6:2], rs1p, 3'b101, rs1p, 7'b0010011);
            illegal = ci[12];
          end
          2'b10: inst = enc_i(imm6, rs1p, 3'b111, rs1p, 7'b0010011);        // C.ANDI
          default: begin
            illegal = ci[12];
            unique case (ci[6:5])
              2'b00: inst = enc_r(7'b0100000, rs2p, rs1p, 3'b000, rs1p, 7'b0110011); // C.SUB
              2'b01: inst = enc_r(7'b0000000, rs2p, rs1p, 3'b100, rs1p, 7'b0110011); // C.XOR
              2'b10: inst = enc_r(7'b0000000, rs2p, rs1p, 3'b110, rs1p, 7'b0110011); // C.OR
              default: inst = enc_r(7'b0000000, rs2p, rs1p, 3'b111, rs1p, 7'b0110011); // C.AND
            endcase
          end
        endcase
      end
      5'b101_01: inst = enc_j({{9{cj_off[11]}}, cj_off}, X0);                // C.J
      5'b110_01: inst = enc_b({{4{cb_off[8]}}, cb_off}, X0, rs1p, 3'b000);   // C.BEQZ
      5'b111_01: inst = enc_b({{4{cb_off[8]}}, cb_off}, X0, rs1p, 3'b001);   // C.BNEZ
      // ---- quadrant 2 ----
      5'b000_10: begin  // C.SLLI
        inst = enc_r(7'b0000000, ci[6:2], rd_full, 3'b001, rd_full, 7'b0010011);
        illegal = ci[12];
      end
      5'b010_10: begin  // C.LWSP
        inst = enc_i(lwsp_off, X2, 3'b010, rd_full, 7'b0000011);
        illegal = (rd_full == X0);
      end
      5'b100_10: begin
        if (!ci[12]) begin
          if (rs2_full == X0) begin  // C.JR
            inst = enc_i(12'b0, rd_full, 3'b000, X0, 7'b1100111);
            illegal = (rd_full == X0);
          end else begin             // C.MV
            inst = enc_r(7'b0, rs2_full, X0, 3'b000, rd_full, 7'b0110011);
          end
        end else begin
          if (rs2_full == X0 && rd_full == X0) begin  // C.EBREAK
            inst = 32'h0010_0073;
          end else if (rs2_full == X0) begin          // C.JALR
            inst = enc_i(12'b0, rd_full, 3'b000, X1, 7'b1100111);
          end else begin                              // C.ADD
            inst = enc_r(7'b0, rs2_full, rd_full, 3'b000, rd_full, 7'b0110011);
          end
        end
      end
      5'b110_10: inst = enc_s(swsp_off, rs2_full, X2, 3'b010, 7'b0100011);   // C.SWSP
      default: illegal = 1'b1;  // FP loads/stores, reserved, or not a 16-bit instruction
    endcase
  end
endmodule
