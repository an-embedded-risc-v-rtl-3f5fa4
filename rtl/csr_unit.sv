// csr_unit: machine-mode control and status registers and trap entry.
//
// Holds mstatus (MIE, MPIE), mie (MEIE), mip (MEIP, read-only, the level of
// the external interrupt input), mtvec, mscratch, mepc, mcause and the custom
// register mmulcfg (0x7C0). Bit 0 of mmulcfg is the MMUL "execution mode
// select": 0 runs an MMUL instruction atomically, 1 selects partial
// execution, in which each MMUL instruction processes one operand bit and
// retires so that interrupts can be taken between the calls. The paper gives
// this register and its connection; its number and bit are this design's
// choices, as are the other CSRs, which are the minimum RISC-V machine mode
// needs to take an interrupt.
//
// Interface: one CSR access per cycle (csr_op/csr_addr/csr_wdata, read data on
// csr_rdata combinationally, written at the clock edge). trap_i with
// trap_pc/trap_cause enters a trap: mepc/mcause are written, MPIE<=MIE,
// MIE<=0; mret_i returns: MIE<=MPIE, MPIE<=1. irq_pending says an enabled
// external interrupt is waiting. Unknown CSR numbers read zero and ignore
// writes.
module csr_unit
  import rv_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  csr_op_e     csr_op,
  input  logic [11:0] csr_addr,
  input  logic [31:0] csr_wdata,
  output logic [31:0] csr_rdata,
  input  logic        trap_i,
  input  logic [31:0] trap_pc,
  input  logic [31:0] trap_cause,
  input  logic        mret_i,
  input  logic        irq_i,
  output logic        irq_pending,
  output logic [31:0] mtvec_o,
  output logic [31:0] mepc_o,
  output logic        mmul_partial
);
  logic        mie_bit, mpie_bit, meie;
  logic [31:0] mtvec, mscratch, mepc, mcause;
  logic        mmulcfg;
  logic [31:0] wval;

  always_comb begin
    unique case (csr_addr)
      CSR_MSTATUS:  csr_rdata = {19'b0, 2'b11, 3'b0, mpie_bit, 3'b0, mie_bit, 3'b0};
      CSR_MIE:      csr_rdata = {20'b0, meie, 11'b0};
      CSR_MIP:      csr_rdata = {20'b0, irq_i, 11'b0};
      CSR_MTVEC:    csr_rdata = mtvec;
      CSR_MSCRATCH: csr_rdata = mscratch;
      CSR_MEPC:     csr_rdata = mepc;
      CSR_MCAUSE:   csr_rdata = mcause;
      CSR_MMULCFG:  csr_rdata = {31'b0, mmulcfg};
      default:      csr_rdata = '0;
    endcase
    unique case (csr_op)
      CSR_RW:  wval = csr_wdata;
      CSR_RS:  wval = csr_rdata | csr_wdata;
      CSR_RC:  wval = csr_rdata & ~csr_wdata;
      default: wval = csr_rdata;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mie_bit  <= 1'b0;
      mpie_bit <= 1'b0;
      meie     <= 1'b0;
      mtvec    <= '0;
      mscratch <= '0;
      mepc     <= '0;
      mcause   <= '0;
      mmulcfg  <= 1'b0;
    end else if (trap_i) begin
      mepc     <= {trap_pc[31:1], 1'b0};
      mcause   <= trap_cause;
      mpie_bit <= mie_bit;
      mie_bit  <= 1'b0;
    end else if (mret_i) begin
      mie_bit  <= mpie_bit;
      mpie_bit <= 1'b1;
    end else if (csr_op != CSR_NONE) begin
      unique case (csr_addr)
        CSR_MSTATUS:  begin mie_bit <= wval[3]; mpie_bit <= wval[7]; end
        CSR_MIE:      meie     <= wval[11];
        CSR_MTVEC:    mtvec    <= {wval[31:2], 2'b00};
        CSR_MSCRATCH: mscratch <= wval;
        CSR_MEPC:     mepc     <= {wval[31:1], 1'b0};
        CSR_MCAUSE:   mcause   <= wval;
        CSR_MMULCFG:  mmulcfg  <= wval[0];
        default: ;
      endcase
    end
  end

  assign irq_pending  = mie_bit & meie & irq_i;
  assign mtvec_o      = mtvec;
  assign mepc_o       = mepc;
  assign mmul_partial = mmulcfg;
endmodule
