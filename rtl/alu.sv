// alu: the RV32 integer ALU of the execute stage.
//
// Purely combinational. It computes the ten RV32I register/immediate
// operations (plus a pass-through of operand b used for LUI) and, for the
// branch unit, the three comparisons eq / signed lt / unsigned lt of a and b.
// The same adder forms every memory address: base register + immediate for
// loads and stores, and, while an MMUL instruction runs, operand base register
// + the word offset supplied by the MMUL unit (the paper's integration of MMUL
// into the datapath). The operation set is RISC-V's; the comparison outputs
// and the pass-through are this design's choices.
module alu
  import rv_pkg::*;
(
  input  alu_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] result,
  output logic        eq,
  output logic        lt,
  output logic        ltu
);
  logic [4:0] shamt;
  assign shamt = b[4:0];
  assign eq  = (a == b);
  assign lt  = ($signed(a) < $signed(b));
  assign ltu = (a < b);

  always_comb begin
    unique case (op)
      ALU_ADD:   result = a + b;
      ALU_SUB:   result = a - b;
      ALU_SLL:   result = a << shamt;
      ALU_SLT:   result = {31'b0, lt};
      ALU_SLTU:  result = {31'b0, ltu};
      ALU_XOR:   result = a ^ b;
      ALU_SRL:   result = a >> shamt;
      ALU_SRA:   result = $unsigned($signed(a) >>> shamt);
      ALU_OR:    result = a | b;
      ALU_AND:   result = a & b;
      ALU_PASSB: result = b;
      default:   result = a + b;
    endcase
  end
endmodule
