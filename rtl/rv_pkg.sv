// rv_pkg: types and constants shared by the RV32EC + MMUL core.
//
// Holds the RV32 opcodes, the ALU operation and CSR encodings, the decoded
// instruction bundle passed from the decoder to the execute stage, and the
// encoding of the MMUL custom instruction. MMUL uses the R4-type format
// (rs3 | fnc2 | rs2 | rs1 | fnc3 | rd | opcode); the operand length is carried
// in the five fnc3/fnc2 bits as a count of 32-bit words. The opcode (custom-0),
// the order of the length bits and the custom CSR number are choices of this
// design; the paper names the format but not these values.
package rv_pkg;

  localparam int unsigned XLEN = 32;
  localparam int unsigned NREGS = 16;  // RV32E

  // Major opcodes (inst[6:0])
  localparam logic [6:0] OPC_LOAD    = 7'b0000011;
  localparam logic [6:0] OPC_CUSTOM0 = 7'b0001011;  // MMUL (R4-type)
  localparam logic [6:0] OPC_MISCMEM = 7'b0001111;
  localparam logic [6:0] OPC_OPIMM   = 7'b0010011;
  localparam logic [6:0] OPC_AUIPC   = 7'b0010111;
  localparam logic [6:0] OPC_STORE   = 7'b0100011;
  localparam logic [6:0] OPC_OP      = 7'b0110011;
  localparam logic [6:0] OPC_LUI     = 7'b0110111;
  localparam logic [6:0] OPC_BRANCH  = 7'b1100011;
  localparam logic [6:0] OPC_JALR    = 7'b1100111;
  localparam logic [6:0] OPC_JAL     = 7'b1101111;
  localparam logic [6:0] OPC_SYSTEM  = 7'b1110011;

  // CSR numbers
  localparam logic [11:0] CSR_MSTATUS  = 12'h300;
  localparam logic [11:0] CSR_MIE      = 12'h304;
  localparam logic [11:0] CSR_MTVEC    = 12'h305;
  localparam logic [11:0] CSR_MSCRATCH = 12'h340;
  localparam logic [11:0] CSR_MEPC     = 12'h341;
  localparam logic [11:0] CSR_MCAUSE   = 12'h342;
  localparam logic [11:0] CSR_MIP      = 12'h344;
  localparam logic [11:0] CSR_MMULCFG  = 12'h7C0;  // bit 0: partial execution

  // Trap causes
  localparam logic [31:0] CAUSE_ILLEGAL = 32'd2;
  localparam logic [31:0] CAUSE_BREAK   = 32'd3;
  localparam logic [31:0] CAUSE_ECALL_M = 32'd11;
  localparam logic [31:0] CAUSE_M_EXT_IRQ = 32'h8000_000B;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU,
    ALU_XOR, ALU_SRL, ALU_SRA, ALU_OR, ALU_AND, ALU_PASSB
  } alu_op_e;

  typedef enum logic [1:0] { OPA_RS1, OPA_PC, OPA_ZERO } opa_sel_e;
  typedef enum logic [0:0] { OPB_RS2, OPB_IMM } opb_sel_e;

  typedef enum logic [2:0] {
    BR_NONE, BR_EQ, BR_NE, BR_LT, BR_GE, BR_LTU, BR_GEU
  } br_type_e;

  typedef enum logic [1:0] { CSR_NONE, CSR_RW, CSR_RS, CSR_RC } csr_op_e;

  typedef enum logic [1:0] { MEM_B = 2'd0, MEM_H = 2'd1, MEM_W = 2'd2 } mem_size_e;

  // Decoded instruction
  typedef struct packed {
    logic        illegal;
    logic [3:0]  rs1;
    logic [3:0]  rs2;
    logic [3:0]  rs3;      // MMUL only
    logic [3:0]  rd;
    logic [31:0] imm;
    alu_op_e     alu_op;
    opa_sel_e    opa_sel;
    opb_sel_e    opb_sel;
    logic        rf_we;
    logic        mem_rd;
    logic        mem_wr;
    mem_size_e   mem_size;
    logic        mem_uns;
    br_type_e    br_type;
    logic        jal;
    logic        jalr;
    csr_op_e     csr_op;
    logic        csr_imm;  // source is the zimm (rs1 field), not rs1
    logic [11:0] csr_addr;
    logic        ecall;
    logic        ebreak;
    logic        mret;
    logic        mmul;
    logic [4:0]  mmul_len; // operand length field: words - 1
  } dec_t;

endpackage
