// regfile: the RV32E integer register file, 16 registers of 32 bits.
//
// Two asynchronous read ports and one synchronous write port. Register x0
// always reads as zero and ignores writes. A write becomes visible to the
// read ports on the cycle after it is issued (no write-through); the 2-stage
// pipeline never needs one because reads and write-back happen in the same
// stage. In the MMUL extension, read port A also supplies the base address of
// whichever operand MMUL is loading or storing: the core steers its address.
// Sixteen registers follow from the E extension the paper adopts; port count
// and timing are this design's choices. All registers reset to zero.
module regfile #(
  parameter int unsigned NREGS = 16,
  parameter int unsigned XLEN  = 32,
  localparam int unsigned AW   = $clog2(NREGS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [AW-1:0]   raddr_a,
  output logic [XLEN-1:0] rdata_a,
  input  logic [AW-1:0]   raddr_b,
  output logic [XLEN-1:0] rdata_b,
  input  logic            we,
  input  logic [AW-1:0]   waddr,
  input  logic [XLEN-1:0] wdata
);
  logic [XLEN-1:0] regs [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we && waddr != '0) begin
      regs[waddr] <= wdata;
    end
  end

  assign rdata_a = (raddr_a == '0) ? '0 : regs[raddr_a];
  assign rdata_b = (raddr_b == '0) ? '0 : regs[raddr_b];
endmodule
