// lsu: load/store unit between the execute stage and the data memory.
//
// The data memory is a 32-bit word memory with byte enables and a fixed read
// latency of one cycle (the "single cycle read latency" memory of the
// experimental setup). A request is presented for one cycle on req/we/size/
// addr/wdata; the LSU aligns store data and byte enables to the word lane and
// drives the memory port combinationally. For a read it remembers the byte
// offset, size and signedness, and one cycle later returns the selected,
// zero- or sign-extended value on rdata with rvalid high. Two clients share
// it: ordinary load/store instructions, and the MMUL unit, which triggers
// word-sized loads of its operands and stores of its result (the paper's
// "LSU is triggered by MMUL"). Accesses must be naturally aligned; a
// misaligned one is not supported and is flagged by an assertion. Alignment
// handling and the port protocol are this design's choices.
module lsu
  import rv_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // request from the execute stage
  input  logic        req,
  input  logic        we,
  input  mem_size_e   size,
  input  logic        uns,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  output logic        rvalid,
  // data memory port
  output logic        dmem_req,
  output logic        dmem_we,
  output logic [3:0]  dmem_be,
  output logic [31:0] dmem_addr,
  output logic [31:0] dmem_wdata,
  input  logic [31:0] dmem_rdata
);
  logic [1:0] off;
  assign off = addr[1:0];

  assign dmem_req  = req;
  assign dmem_we   = req & we;
  assign dmem_addr = {addr[31:2], 2'b00};

  always_comb begin
    unique case (size)
      MEM_B: begin
        dmem_be    = 4'b0001 << off;
        dmem_wdata = {4{wdata[7:0]}};
      end
      MEM_H: begin
        dmem_be    = off[1] ? 4'b1100 : 4'b0011;
        dmem_wdata = {2{wdata[15:0]}};
      end
      default: begin
        dmem_be    = 4'b1111;
        dmem_wdata = wdata;
      end
    endcase
  end

  // response bookkeeping
  logic [1:0] r_off;
  mem_size_e  r_size;
  logic       r_uns;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid <= 1'b0;
      r_off  <= '0;
      r_size <= MEM_W;
      r_uns  <= 1'b0;
    end else begin
      rvalid <= req & ~we;
      if (req && !we) begin
        r_off  <= off;
        r_size <= size;
        r_uns  <= uns;
      end
    end
  end

  logic [31:0] shifted;
  assign shifted = dmem_rdata >> {r_off, 3'b000};

  always_comb begin
    unique case (r_size)
      MEM_B:   rdata = {{24{~r_uns & shifted[7]}}, shifted[7:0]};
      MEM_H:   rdata = {{16{~r_uns & shifted[15]}}, shifted[15:0]};
      default: rdata = shifted;
    endcase
  end

  // Accesses must be naturally aligned.
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    req |-> ((size == MEM_W && off == 2'b00) || (size == MEM_H && !off[0]) || size == MEM_B));
endmodule
