// tb_fourq_gfp2_mul: FourQ GF(p^2) multiplication, p = 2^127 - 1, on the core
// at its default parameters, written as software around MMUL.
//
// With a = a0 + a1*i, b = b0 + b1*i and i^2 = -1 (all in the Montgomery
// domain):  c0 = MMUL(a0,b0) - MMUL(a1,b1),  c1 = MMUL(a0,b1) + MMUL(a1,b0),
// with the modular addition and subtraction done in unrolled RV32E code
// (word-wise add/sub with carry, then a conditional correction by p). The
// kernel runs twice: with atomic MMULs, and in partial execution mode with
// each MMUL fully unrolled into 128 consecutive calls. Both results are
// checked against c0 * 2^128 = a0*b0 - a1*b1 and c1 * 2^128 = a0*b1 + a1*b0
// (mod p), computed here. The cycle counts of the two kernels are printed and
// must agree to within 1%: partial execution with unrolling costs no time when
// no interrupt arrives.
module tb_fourq_gfp2_mul;
  import rv_asm_pkg::*;

  localparam int W = 4;
  localparam int NB = 128;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        imem_req, dmem_req, dmem_we;
  logic [31:0] imem_addr, imem_rdata, dmem_addr, dmem_wdata, dmem_rdata;
  logic [3:0]  dmem_be;

  mmul_core dut (
    .clk, .rst_n, .irq_i(1'b0),
    .imem_req, .imem_addr, .imem_rdata,
    .dmem_req, .dmem_we, .dmem_be, .dmem_addr, .dmem_wdata, .dmem_rdata
  );
  sim_mem #(.WORDS(16384)) u_mem (
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

  // data, as offsets from DATA (held in x15)
  localparam int DATA = 'h8000, MARK = 'h100, DONE = 'h104;  // MARK, DONE: offsets from DATA
  localparam int A0 = 'h000, A1 = 'h010, B0 = 'h020, B1 = 'h030, P = 'h040,
                 T0 = 'h050, T1 = 'h060, T2 = 'h070, T3 = 'h080, U = 'h090,
                 C0A = 'h0A0, C1A = 'h0B0, C0P = 'h0C0, C1P = 'h0D0;

  // t = x op y over W words with carry/borrow in x9 (x5..x10 scratch)
  task automatic mp_addsub(input int t, input int x, input int y, input bit is_sub);
    e32(addi(9, 0, 0));
    for (int i = 0; i < W; i++) begin
      e32(lw(5, 15, x + 4*i));
      e32(lw(6, 15, y + 4*i));
      if (!is_sub) begin
        e32(add(7, 5, 6));
        e32(sltu(8, 7, 5));
        e32(add(7, 7, 9));
        e32(sltu(10, 7, 9));
      end else begin
        e32(sub(7, 5, 6));
        e32(sltu(8, 5, 6));
        e32(sltu(10, 7, 9));
        e32(sub(7, 7, 9));
      end
      e32(r_t(0, 10, 8, 6, 9, 'h33));  // or x9, x8, x10
      e32(sw(7, 15, t + 4*i));
    end
  endtask
  task automatic copy(input int dst, input int src);
    for (int i = 0; i < W; i++) begin
      e32(lw(5, 15, src + 4*i));
      e32(sw(5, 15, dst + 4*i));
    end
  endtask
  // dst = x + y mod p
  task automatic modadd(input int dst, input int x, input int y);
    mp_addsub(dst, x, y, 0);
    mp_addsub(U, dst, P, 1);
    e32(bne(9, 0, 4 + 8 * W));        // borrow: dst already < p
    copy(dst, U);
  endtask
  // dst = x - y mod p
  task automatic modsub(input int dst, input int x, input int y);
    mp_addsub(dst, x, y, 1);
    e32(beq(9, 0, 4 + (4 + 32 * W) + 8 * W));  // no borrow: done
    mp_addsub(U, dst, P, 0);
    copy(dst, U);
  endtask
  task automatic mm(input int r, input int x, input int y, input bit unrolled_partial);
    e32(addi(1, 15, x));
    e32(addi(2, 15, y));
    e32(addi(3, 15, P));
    e32(addi(4, 15, r));
    if (unrolled_partial) for (int k = 0; k < NB; k++) e32(mmul(4, 1, 2, 3, W));
    else e32(mmul(4, 1, 2, 3, W));
  endtask
  task automatic kernel(input int c0, input int c1, input bit part);
    mm(T0, A0, B0, part);
    mm(T1, A1, B1, part);
    mm(T2, A0, B1, part);
    mm(T3, A1, B0, part);
    modsub(c0, T0, T1);
    modadd(c1, T2, T3);
  endtask

  int mark_cyc [$];
  int cyc = 0;
  bit done_seen = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dmem_req && dmem_we && dmem_addr == DATA + MARK) mark_cyc.push_back(cyc);
    if (dmem_req && dmem_we && dmem_addr == DATA + DONE) done_seen = 1;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef logic [NB-1:0] big_t;
  function automatic big_t rd_big(int off);
    big_t v;
    for (int i = 0; i < W; i++) v[32*i +: 32] = u_mem.mem[((DATA + off) >> 2) + i];
    return v;
  endfunction

  initial begin
    big_t p, a0, a1, b0, b1, c0, c1;
    logic [511:0] pp, e0, e1, l0, l1;
    int t_atomic, t_partial;
    p = (big_t'(1) << 127) - 1;
    a0 = {$urandom, $urandom, $urandom, $urandom} % p;
    a1 = {$urandom, $urandom, $urandom, $urandom} % p;
    b0 = {$urandom, $urandom, $urandom, $urandom} % p;
    b1 = {$urandom, $urandom, $urandom, $urandom} % p;
    for (int i = 0; i < W; i++) begin
      u_mem.mem[((DATA + A0) >> 2) + i] = a0[32*i +: 32];
      u_mem.mem[((DATA + A1) >> 2) + i] = a1[32*i +: 32];
      u_mem.mem[((DATA + B0) >> 2) + i] = b0[32*i +: 32];
      u_mem.mem[((DATA + B1) >> 2) + i] = b1[32*i +: 32];
      u_mem.mem[((DATA + P) >> 2) + i]  = p[32*i +: 32];
    end
    pc = 0;
    e32(lui(15, DATA >> 12));
    e32(sw(0, 15, MARK));
    kernel(C0A, C1A, 0);
    e32(sw(0, 15, MARK));
    e32(csrrwi(0, 'h7C0, 1));
    e32(sw(0, 15, MARK));
    kernel(C0P, C1P, 1);
    e32(sw(0, 15, MARK));
    e32(csrrwi(0, 'h7C0, 0));
    e32(addi(9, 0, 1));
    e32(sw(9, 15, DONE));
    e32(jal(0, 0));

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done_seen);
    repeat (3) @(posedge clk);

    pp = 512'(p);
    e0 = ((512'(a0) * 512'(b0)) % pp + pp - (512'(a1) * 512'(b1)) % pp) % pp;
    e1 = ((512'(a0) * 512'(b1)) % pp + (512'(a1) * 512'(b0)) % pp) % pp;
    c0 = rd_big(C0A); c1 = rd_big(C1A);
    l0 = (512'(c0) << NB) % pp; l1 = (512'(c1) << NB) % pp;
    check(c0 < p && l0 == e0, $sformatf("atomic c0 = %h", c0));
    check(c1 < p && l1 == e1, $sformatf("atomic c1 = %h", c1));
    c0 = rd_big(C0P); c1 = rd_big(C1P);
    l0 = (512'(c0) << NB) % pp; l1 = (512'(c1) << NB) % pp;
    check(c0 < p && l0 == e0, $sformatf("partial c0 = %h", c0));
    check(c1 < p && l1 == e1, $sformatf("partial c1 = %h", c1));
    check(mark_cyc.size() == 4, "kernel markers");
    if (mark_cyc.size() == 4) begin
      t_atomic  = mark_cyc[1] - mark_cyc[0];
      t_partial = mark_cyc[3] - mark_cyc[2];
      $display("GF(p^2) multiplication: atomic %0d cycles, partial (unrolled) %0d cycles", t_atomic, t_partial);
      check(t_partial * 100 <= t_atomic * 101, "partial execution with unrolling as fast as atomic");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
