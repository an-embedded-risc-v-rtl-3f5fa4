// tb_regfile: self-checking test of the 16 x 32 register file. Random writes
// and reads on both ports are compared with a reference array kept here;
// x0 must read zero whatever is written to it, and a write must not be
// visible before the next clock edge.
module tb_regfile;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [3:0]  ra, rb, wa;
  logic [31:0] da, db, wd;
  logic        we;
  regfile dut (.clk, .rst_n, .raddr_a(ra), .rdata_a(da), .raddr_b(rb), .rdata_b(db),
               .we, .waddr(wa), .wdata(wd));

  logic [31:0] ref_regs [16];
  int checks = 0, failures = 0;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) ref_regs[i] = '0;
    we = 0; ra = 0; rb = 0; wa = 0; wd = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      we = $urandom % 2; wa = 4'($urandom); wd = $urandom;
      ra = 4'($urandom); rb = (i % 4 == 0) ? wa : 4'($urandom);
      #1;
      checks++;
      if (da !== ref_regs[ra] || db !== ref_regs[rb]) begin
        failures++;
        $display("FAIL read r%0d=%h (exp %h) r%0d=%h (exp %h)", ra, da, ref_regs[ra], rb, db, ref_regs[rb]);
      end
      @(posedge clk);
      if (we && wa != 0) ref_regs[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
