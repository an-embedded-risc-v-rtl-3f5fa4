// tb_mmul_workloads: the field sizes of the elliptic curves the core is meant
// for, run on the whole core built with MAX_BITS = 256.
//
// For the FourQ prime 2^127 - 1 (4 words), the NIST P-256 prime and the
// Curve25519 prime 2^255 - 19 (8 words each) a program performs chains of
// in-place Montgomery squarings X <- MMUL(X, X, p), first atomically and then
// one squaring in partial execution mode (one MMUL call per operand bit). Each
// result is checked against X^2 * 2^-n mod p computed here with wide
// arithmetic, 2^-n being ((p + 1) / 2)^n mod p.
module tb_mmul_workloads;
  import rv_asm_pkg::*;

  localparam int unsigned MB = 256;
  localparam int NCHAIN = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        imem_req, dmem_req, dmem_we;
  logic [31:0] imem_addr, imem_rdata, dmem_addr, dmem_wdata, dmem_rdata;
  logic [3:0]  dmem_be;

  mmul_core #(.MAX_BITS(MB)) dut (
    .clk, .rst_n, .irq_i(1'b0),
    .imem_req, .imem_addr, .imem_rdata,
    .dmem_req, .dmem_we, .dmem_be, .dmem_addr, .dmem_wdata, .dmem_rdata
  );
  sim_mem #(.WORDS(8192)) u_mem (
    .clk, .i_req(imem_req), .i_addr(imem_addr), .i_rdata(imem_rdata),
    .d_req(dmem_req), .d_we(dmem_we), .d_be(dmem_be), .d_addr(dmem_addr),
    .d_wdata(dmem_wdata), .d_rdata(dmem_rdata)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  int pc;
  task automatic e32(input logic [31:0] w);
    u_mem.mem[pc >> 2] = w;
    pc += 4;
  endtask

  typedef logic [MB-1:0] big_t;
  big_t p [3], x0 [3];
  int   words [3] = '{4, 8, 8};
  string names [3] = '{"FourQ", "P-256", "Curve25519"};
  localparam int XB = 'h1000, PB = 'h1100, SLOT = 'h200, DONE = 'h7F4;

  function automatic logic [1023:0] modmul(logic [1023:0] a, logic [1023:0] b, logic [1023:0] m);
    return (a * b) % m;
  endfunction
  // X^2 * 2^-n mod p
  function automatic big_t ref_sq(big_t x, big_t m, int n);
    logic [1023:0] inv2 = (1024'(m) + 1) >> 1, invn = 1;
    for (int i = 0; i < n; i++) invn = modmul(invn, inv2, 1024'(m));
    return big_t'(modmul(modmul(1024'(x), 1024'(x), 1024'(m)), invn, 1024'(m)));
  endfunction

  bit done_seen = 0;
  always @(posedge clk) if (dmem_req && dmem_we && dmem_addr == DONE) done_seen = 1;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int loopp;
    big_t exp;
    p[0] = (big_t'(1) << 127) - 1;
    p[1] = {32'hFFFFFFFF, 32'h00000001, 32'h0, 32'h0, 32'h0, 32'hFFFFFFFF, 32'hFFFFFFFF, 32'hFFFFFFFF};
    p[2] = (big_t'(1) << 255) - 19;
    for (int s = 0; s < 3; s++) begin
      x0[s] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom} % p[s];
      for (int i = 0; i < words[s]; i++) begin
        u_mem.mem[((XB + s * SLOT) >> 2) + i] = x0[s][32*i +: 32];
        u_mem.mem[((PB + s * SLOT) >> 2) + i] = p[s][32*i +: 32];
      end
    end
    // program: atomic squaring chains, then one partial squaring per prime
    pc = 0;
    for (int s = 0; s < 3; s++) begin
      e32(lui(1, (XB + s * SLOT) >> 12));
      e32(addi(1, 1, (XB + s * SLOT) & 'hFFF));
      e32(addi(3, 1, PB - XB));
      for (int k = 0; k < NCHAIN; k++) e32(mmul(1, 1, 1, 3, words[s]));
    end
    e32(csrrwi(0, 'h7C0, 1));
    for (int s = 0; s < 3; s++) begin
      e32(lui(1, (XB + s * SLOT) >> 12));
      e32(addi(1, 1, (XB + s * SLOT) & 'hFFF));
      e32(addi(3, 1, PB - XB));
      e32(addi(7, 0, 32 * words[s]));
      loopp = pc;
      e32(mmul(1, 1, 1, 3, words[s]));
      e32(addi(7, 7, -1));
      e32(bne(7, 0, loopp - pc));
    end
    e32(addi(9, 0, 1));
    e32(sw(9, 0, DONE));
    e32(jal(0, 0));

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done_seen);
    repeat (3) @(posedge clk);
    for (int s = 0; s < 3; s++) begin
      big_t r = '0;
      exp = x0[s];
      for (int k = 0; k < NCHAIN + 1; k++) exp = ref_sq(exp, p[s], 32 * words[s]);
      for (int i = 0; i < words[s]; i++) r[32*i +: 32] = u_mem.mem[((XB + s * SLOT) >> 2) + i];
      check(r == exp, $sformatf("%s: %0d squarings gave %h, expected %h", names[s], NCHAIN + 1, r, exp));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
