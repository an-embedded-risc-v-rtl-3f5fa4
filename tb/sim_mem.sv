// sim_mem: behavioural model of the memory of the test system (not part of
// the core): one array of 32-bit words with an instruction read port and a
// data read/write port with byte enables. Both return read data on the cycle
// after the request (single-cycle read latency) and never stall. Writes take
// effect at the clock edge. Word-addressed; address bits 1:0 are ignored.
module sim_mem #(
  parameter int unsigned WORDS = 16384
) (
  input  logic        clk,
  input  logic        i_req,
  input  logic [31:0] i_addr,
  output logic [31:0] i_rdata,
  input  logic        d_req,
  input  logic        d_we,
  input  logic [3:0]  d_be,
  input  logic [31:0] d_addr,
  input  logic [31:0] d_wdata,
  output logic [31:0] d_rdata
);
  localparam int unsigned AW = $clog2(WORDS);
  logic [31:0] mem [WORDS];

  initial for (int i = 0; i < WORDS; i++) mem[i] = '0;

  always_ff @(posedge clk) begin
    if (i_req) i_rdata <= mem[i_addr[AW+1:2]];
    if (d_req) begin
      if (d_we) begin
        for (int b = 0; b < 4; b++)
          if (d_be[b]) mem[d_addr[AW+1:2]][8*b +: 8] <= d_wdata[8*b +: 8];
      end else begin
        d_rdata <= mem[d_addr[AW+1:2]];
      end
    end
  end
endmodule
