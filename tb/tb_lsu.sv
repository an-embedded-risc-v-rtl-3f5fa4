// tb_lsu: self-checking test of the load/store unit against a word memory
// with one-cycle read latency. Random byte, halfword and word stores are
// mirrored in a byte-array reference; random loads of every size and sign
// must return the reference value, extended as RISC-V specifies, exactly one
// cycle after the request (rvalid).
module tb_lsu;
  import rv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        req = 0, we = 0, uns = 0, rvalid;
  mem_size_e   size = MEM_W;
  logic [31:0] addr = 0, wdata = 0, rdata;
  logic        dmem_req, dmem_we;
  logic [3:0]  dmem_be;
  logic [31:0] dmem_addr, dmem_wdata, dmem_rdata;

  lsu dut (.clk, .rst_n, .req, .we, .size, .uns, .addr, .wdata, .rdata, .rvalid,
           .dmem_req, .dmem_we, .dmem_be, .dmem_addr, .dmem_wdata, .dmem_rdata);

  logic [31:0] mem [64];
  always_ff @(posedge clk) if (dmem_req) begin
    if (dmem_we) begin
      for (int i = 0; i < 4; i++) if (dmem_be[i]) mem[dmem_addr[7:2]][8*i +: 8] <= dmem_wdata[8*i +: 8];
    end else dmem_rdata <= mem[dmem_addr[7:2]];
  end

  logic [7:0] ref_b [256];
  int checks = 0, failures = 0;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp;
    int nbytes;
    for (int i = 0; i < 64; i++) mem[i] = 0;
    for (int i = 0; i < 256; i++) ref_b[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      req = 1; we = $urandom % 2; uns = $urandom % 2;
      size = mem_size_e'($urandom % 3);
      nbytes = 1 << size;
      addr = ($urandom % 256) & ~(nbytes - 1);
      wdata = $urandom;
      if (we) begin
        for (int k = 0; k < nbytes; k++) ref_b[addr + k] = wdata[8*k +: 8];
        @(negedge clk);
        req = 0;
      end else begin
        exp = 0;
        for (int k = 0; k < nbytes; k++) exp[8*k +: 8] = ref_b[addr + k];
        if (!uns && size == MEM_B) exp = {{24{exp[7]}}, exp[7:0]};
        if (!uns && size == MEM_H) exp = {{16{exp[15]}}, exp[15:0]};
        @(negedge clk);
        req = 0;
        checks++;
        if (!rvalid || rdata !== exp) begin
          failures++;
          $display("FAIL load size=%0d uns=%b addr=%h got %h exp %h rvalid=%b", size, uns, addr, rdata, exp, rvalid);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
