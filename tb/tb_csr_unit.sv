// tb_csr_unit: self-checking test of the CSR unit: read/write/set/clear of
// each implemented register, the MMUL execution-mode bit, trap entry (mepc,
// mcause, MIE -> MPIE), mret, the external-interrupt pending logic and that
// unknown CSRs read zero.
module tb_csr_unit;
  import rv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  csr_op_e     op = CSR_NONE;
  logic [11:0] caddr = 0;
  logic [31:0] wdata = 0, rdata, tpc = 0, tcause = 0, mtvec, mepc;
  logic        trap = 0, mret = 0, irq = 0, pend, partial;

  csr_unit dut (.clk, .rst_n, .csr_op(op), .csr_addr(caddr), .csr_wdata(wdata), .csr_rdata(rdata),
                .trap_i(trap), .trap_pc(tpc), .trap_cause(tcause), .mret_i(mret),
                .irq_i(irq), .irq_pending(pend), .mtvec_o(mtvec), .mepc_o(mepc),
                .mmul_partial(partial));

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic acc(input csr_op_e o, input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); op = o; caddr = a; wdata = d;
    @(negedge clk); op = CSR_NONE;
  endtask
  task automatic rdchk(input logic [11:0] a, input logic [31:0] exp, input string what);
    caddr = a; #1;
    check(rdata === exp, $sformatf("%s: read %h expected %h", what, rdata, exp));
  endtask

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    #1 check(!partial, "atomic mode after reset");
    acc(CSR_RW, 12'h7C0, 32'h1);           #1 check(partial, "mmulcfg set selects partial execution");
    rdchk(12'h7C0, 32'h1, "mmulcfg read");
    acc(CSR_RC, 12'h7C0, 32'h1);           #1 check(!partial, "mmulcfg clear");
    acc(CSR_RW, 12'h305, 32'h0000_0103);   rdchk(12'h305, 32'h0000_0100, "mtvec aligned");
    check(mtvec == 32'h100, "mtvec output");
    acc(CSR_RW, 12'h340, 32'hCAFE_F00D);   rdchk(12'h340, 32'hCAFE_F00D, "mscratch");
    acc(CSR_RS, 12'h340, 32'h0000_00F0);   rdchk(12'h340, 32'hCAFE_F0FD, "mscratch set");
    acc(CSR_RC, 12'h340, 32'hFFFF_0000);   rdchk(12'h340, 32'h0000_F0FD, "mscratch clear");
    rdchk(12'hB00, 32'h0, "unknown CSR reads zero");
    // interrupt enable chain
    irq = 1; #1 check(!pend, "no pending interrupt while disabled");
    acc(CSR_RW, 12'h304, 32'h800);         #1 check(!pend, "MEIE alone is not enough");
    acc(CSR_RS, 12'h300, 32'h8);           #1 check(pend, "pending with MIE and MEIE");
    rdchk(12'h344, 32'h800, "mip shows the external interrupt");
    // trap entry
    @(negedge clk); trap = 1; tpc = 32'h0000_0246; tcause = 32'h8000_000B;
    @(negedge clk); trap = 0;
    check(!pend, "MIE cleared on trap");
    check(mepc == 32'h246, "mepc written");
    rdchk(12'h342, 32'h8000_000B, "mcause written");
    rdchk(12'h300, 32'h0000_1880, "mstatus MPIE=1 MIE=0");
    // mret
    @(negedge clk); mret = 1;
    @(negedge clk); mret = 0;
    #1 check(pend, "MIE restored by mret");
    rdchk(12'h300, 32'h0000_1888, "mstatus after mret");
    irq = 0; #1 check(!pend, "no pending without irq");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
