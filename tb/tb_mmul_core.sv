// tb_mmul_core: end-to-end test of the RV32EC + MMUL core at its default
// parameters (128-bit MMUL).
//
// A program, assembled here with rv_asm_pkg, runs from a behavioural
// single-cycle memory (sim_mem). It exercises compressed and misaligned
// 32-bit instructions, loads/stores of all sizes, taken branches, ECALL and an
// illegal MMUL length (both trapping and resuming), then performs
//   - an atomic 128-bit MMUL and an atomic 32-bit MMUL,
//   - a 128-bit MMUL in partial execution mode: 128 MMUL calls in a loop,
// while the testbench raises the external interrupt during the atomic MMUL
// (it must wait until the instruction retires) and several times during the
// partial sequence (it must be taken between calls, with short latency).
// Results in memory are checked against R < N and R * 2^n == A * B (mod N),
// computed with wide arithmetic here; the number of cycles each MMUL call
// spends in the execute stage is checked against the timing the design
// promises (atomic 3W + 2n + 1 + W; partial first 3W + 2, middle 2,
// last W + 3). The instruction fetches made while an atomic MMUL runs are
// counted and may not exceed four. Each named mechanism must occur at least
// once.
module tb_mmul_core;
  import rv_asm_pkg::*;

  localparam int unsigned NB = 128;
  localparam int unsigned W  = NB / 32;

  logic clk = 1'b0, rst_n = 1'b0, irq = 1'b0;
  always #5 clk = ~clk;

  logic        imem_req, dmem_req, dmem_we;
  logic [31:0] imem_addr, imem_rdata, dmem_addr, dmem_wdata, dmem_rdata;
  logic [3:0]  dmem_be;

  mmul_core dut (
    .clk, .rst_n, .irq_i(irq),
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
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- program image ----------------
  int pc;
  task automatic e16(input logic [15:0] h);
    if (pc[1]) u_mem.mem[pc >> 2][31:16] = h;
    else       u_mem.mem[pc >> 2][15:0]  = h;
    pc += 2;
  endtask
  task automatic e32(input logic [31:0] w);
    e16(w[15:0]);
    e16(w[31:16]);
  endtask
  task automatic wr_big(input int addr, input logic [NB-1:0] v, input int words);
    for (int i = 0; i < words; i++) u_mem.mem[(addr >> 2) + i] = v[32*i +: 32];
  endtask
  function automatic logic [NB-1:0] rd_big(input int addr, input int words);
    logic [NB-1:0] v = '0;
    for (int i = 0; i < words; i++) v[32*i +: 32] = u_mem.mem[(addr >> 2) + i];
    return v;
  endfunction

  localparam int DATA = 'h1000, A_AD = 'h1000, B_AD = 'h1040, N_AD = 'h1080,
                 RA_AD = 'h10C0, RP_AD = 'h1100, R1_AD = 'h1140, MISC = 'h1180,
                 A1_AD = 'h1200, B1_AD = 'h1204, N1_AD = 'h1208;
  localparam int ACK = 'h7F0, DONE = 'h7F4;
  localparam int CSR_MSTATUS = 'h300, CSR_MIE = 'h304, CSR_MTVEC = 'h305,
                 CSR_MEPC = 'h341, CSR_MCAUSE = 'h342, CSR_MMULCFG = 'h7C0;

  logic [NB-1:0] a_v, b_v, n_v;
  logic [31:0]   a1, b1, n1;

  task automatic build_program();
    int loop1, loop2, loopp;
    // reset vector
    pc = 0;
    e32(jal(0, 'h200));
    // trap handler at 0x100; x11 = interrupt count, x12 = exception count
    pc = 'h100;
    e32(csrrs(14, CSR_MCAUSE, 0));
    e32(bge(14, 0, 'h10));          // exception path at 0x114
    e32(addi(11, 11, 1));
    e32(sw(11, 0, ACK));            // acknowledge the interrupt
    e32(mret());
    e32(csrrs(13, CSR_MEPC, 0));    // 0x114: skip the trapping instruction
    e32(addi(13, 13, 4));
    e32(csrrw(0, CSR_MEPC, 13));
    e32(addi(12, 12, 1));
    e32(mret());
    // main at 0x200
    pc = 'h200;
    e32(addi(1, 0, 'h100));
    e32(csrrw(0, CSR_MTVEC, 1));
    e32(addi(1, 0, 1));
    e32(slli(1, 1, 11));
    e32(csrrw(0, CSR_MIE, 1));
    e32(csrrsi(0, CSR_MSTATUS, 8));
    // compressed code, with a 32-bit instruction on a halfword boundary
    e16(c_li(8, 5));                // x8 = 5
    e16(c_addi(8, 3));              // x8 = 8
    e16(c_mv(9, 8));                // x9 = 8
    e32(addi(10, 9, 7));            // x10 = 15 (misaligned)
    e16(c_add(9, 10));              // x9 = 23
    e16(c_slli(9, 2));              // x9 = 92
    e32(lui(1, DATA >> 12));        // x1 = 0x1000 (misaligned)
    e32(addi(2, 1, MISC - DATA));   // x2 = MISC
    e16(c_nop_pad());
    // loads and stores
    e32(sw(9, 2, 0));
    e32(addi(3, 0, -3));
    e32(sb(3, 2, 4));
    e32(lw(4, 2, 0));               // x4 = 92
    e32(lb(5, 2, 4));               // x5 = -3
    e32(lhu(6, 2, 4));              // x6 = 0xFD
    e16(c_mv(10, 2));
    e16(c_lw(8, 10, 0));            // x8 = 92
    e16(c_sw(8, 10, 8));            // MISC+8 = 92
    e16(c_sub(8, 10));              // x8 = 92 - MISC
    e32(sw(4, 2, 12));
    e32(sw(5, 2, 16));
    e32(sw(6, 2, 20));
    e32(sw(8, 2, 24));
    // loops: 32-bit branch and compressed branch
    e32(addi(7, 0, 5));
    e32(addi(15, 0, 0));
    loop1 = pc;
    e32(addi(15, 15, 2));
    e32(addi(7, 7, -1));
    e32(bne(7, 0, loop1 - pc));     // x15 = 10
    e16(c_li(10, 3));
    loop2 = pc;
    e16(c_addi(10, -1));
    e16(c_bnez(10, loop2 - pc));    // x10 = 0
    e32(ecall());                   // exception 1
    e32(mmul(4, 1, 2, 3, W + 1));   // too long: illegal instruction, exception 2
    // atomic MMULs
    e32(lui(1, DATA >> 12));
    e32(addi(2, 1, B_AD - A_AD));
    e32(addi(3, 1, N_AD - A_AD));
    e32(addi(4, 1, RA_AD - A_AD));
    e32(mmul(4, 1, 2, 3, W));
    e32(addi(5, 1, A1_AD - A_AD));
    e32(addi(6, 1, B1_AD - A_AD));
    e32(addi(7, 1, N1_AD - A_AD));
    e32(addi(8, 1, R1_AD - A_AD));
    e32(mmul(8, 5, 6, 7, 1));
    // partial execution: one MMUL call per operand bit
    e32(csrrwi(0, CSR_MMULCFG, 1));
    e32(addi(6, 1, RP_AD - A_AD));
    e32(addi(7, 0, NB));
    loopp = pc;
    e32(mmul(6, 1, 2, 3, W));
    e32(addi(7, 7, -1));
    e32(bne(7, 0, loopp - pc));
    e32(csrrwi(0, CSR_MMULCFG, 0));
    // finish
    e32(addi(9, 0, 1));
    e32(sw(9, 0, DONE));
    e32(jal(0, 0));
  endtask

  function automatic logic [15:0] c_nop_pad();
    return c_addi(0, 0);
  endfunction

  // ---------------- monitors ----------------
  int n_compressed, n_misaligned32, n_br_taken, n_load_stall, n_exc, n_irq;
  int n_irq_partial, n_irq_deferred, n_atomic, n_p_first, n_p_mid, n_p_last;
  int n_store;
  int mm_fetches = 0, max_atomic_fetches = 0;  // instruction fetches during an atomic MMUL
  int cyc = 0, mm_cycles = 0, irq_raise_cyc = -1, max_partial_latency = 0;
  bit irq_in_atomic = 0;
  bit done_seen = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.retire && dut.ic) n_compressed++;
    if (dut.retire && !dut.ic && dut.ipc[1]) n_misaligned32++;
    if (dut.ok && dut.br_taken) n_br_taken++;
    if (dut.ld_wait) n_load_stall++;
    if (dut.dmem_req && dut.dmem_we && !dut.dec.mmul) n_store++;
    if (dut.exc) n_exc++;
    if (dut.take_irq) begin
      n_irq++;
      if (dut.u_mmul.active) n_irq_partial++;
      if (irq_in_atomic) begin
        n_irq_deferred++;
        check(cyc - irq_raise_cyc > 100, "interrupt during atomic MMUL waited for it");
        irq_in_atomic = 0;
      end else if (dut.mmul_partial) begin
        if (cyc - irq_raise_cyc > max_partial_latency) max_partial_latency = cyc - irq_raise_cyc;
      end
    end
    // cycles of each MMUL instruction in the execute stage
    if (dut.mmul_start) begin
      mm_cycles++;
      if (imem_req) mm_fetches++;
      if (dut.mmul_done) begin
        if (!dut.mmul_partial) begin
          n_atomic++;
          if (mm_fetches > max_atomic_fetches) max_atomic_fetches = mm_fetches;
          if (dut.dec.mmul_len == 5'(W - 1))
            check(mm_cycles == 3*W + 2*NB + 1 + W, $sformatf("atomic 128-bit MMUL cycles %0d", mm_cycles));
          else
            check(mm_cycles == 3 + 64 + 1 + 1, $sformatf("atomic 32-bit MMUL cycles %0d", mm_cycles));
        end else if (mm_cycles == 3*W + 2) n_p_first++;
        else if (mm_cycles == 2)            n_p_mid++;
        else if (mm_cycles == W + 3)        n_p_last++;
        else check(0, $sformatf("partial MMUL call took %0d cycles", mm_cycles));
        mm_cycles = 0;
        mm_fetches = 0;
      end
    end
    if (dut.dmem_req && dut.dmem_we && dut.dmem_addr == ACK) irq <= 1'b0;
    if (dut.dmem_req && dut.dmem_we && dut.dmem_addr == DONE) done_seen = 1;
  end

  // interrupt stimulus: once inside the atomic 128-bit MMUL, and every so
  // often while the partial sequence is active
  int partial_irqs = 0;
  always @(posedge clk) if (rst_n && !irq) begin
    if (dut.mmul_busy && !dut.mmul_partial && dut.dec.mmul_len == 5'(W - 1)
        && dut.u_mmul.iter == 7'd20 && n_irq_deferred == 0 && !irq_in_atomic) begin
      irq <= 1'b1; irq_raise_cyc = cyc + 1; irq_in_atomic = 1;
    end else if (dut.mmul_partial && dut.u_mmul.active && partial_irqs < 6
                 && ($urandom % 40) == 0) begin
      irq <= 1'b1; irq_raise_cyc = cyc + 1; partial_irqs++;
    end
  end

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [511:0] prod, lhs;
  initial begin
    // operands: N odd with top bit set, A, B < N
    n_v = {$urandom, $urandom, $urandom, $urandom};
    n_v[NB-1] = 1'b1; n_v[0] = 1'b1;
    a_v = {$urandom, $urandom, $urandom, $urandom} % n_v;
    b_v = {$urandom, $urandom, $urandom, $urandom} % n_v;
    n1 = $urandom | 32'h8000_0001;
    a1 = $urandom % n1;
    b1 = $urandom % n1;
    #1;
    build_program();
    wr_big(A_AD, a_v, W); wr_big(B_AD, b_v, W); wr_big(N_AD, n_v, W);
    u_mem.mem[A1_AD >> 2] = a1; u_mem.mem[B1_AD >> 2] = b1; u_mem.mem[N1_AD >> 2] = n1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done_seen);
    repeat (5) @(posedge clk);

    // register results
    check(u_mem.mem[(MISC >> 2) + 3] == 32'd92, "lw result");
    check(u_mem.mem[(MISC >> 2) + 4] == 32'hFFFF_FFFD, "lb sign extension");
    check(u_mem.mem[(MISC >> 2) + 5] == 32'h0000_00FD, "lhu zero extension");
    check(u_mem.mem[(MISC >> 2) + 6] == 32'(92 - MISC), "c.lw / c.sub result");
    check(dut.u_rf.regs[9] == 32'd1, "x9");
    check(dut.u_rf.regs[5] == A_AD + (A1_AD - A_AD), "x5 base");
    check(dut.u_rf.regs[15] == 32'd10, "x15 loop count");
    check(dut.u_rf.regs[10] == 32'd0, "x10 c.bnez loop");
    check(dut.u_rf.regs[12] == 32'd2, "two exceptions taken");
    check(dut.u_rf.regs[11] == 32'(n_irq), "handler counted every interrupt");
    check(u_mem.mem[MISC >> 2] == 32'd92, "sw result");
    check(u_mem.mem[(MISC >> 2) + 1] == 32'h0000_00FD, "sb result");
    check(u_mem.mem[(MISC >> 2) + 2] == 32'd92, "c.sw result");

    // MMUL results: R < N and R * 2^n = A * B (mod N)
    begin
      logic [NB-1:0] ra, rp;
      logic [31:0] r1;
      ra = rd_big(RA_AD, W);
      rp = rd_big(RP_AD, W);
      r1 = u_mem.mem[R1_AD >> 2];
      prod = (512'(a_v) * 512'(b_v)) % 512'(n_v);
      lhs  = (512'(ra) << NB) % 512'(n_v);
      check(ra < n_v && lhs == prod, $sformatf("atomic 128-bit MMUL result %h", ra));
      lhs  = (512'(rp) << NB) % 512'(n_v);
      check(rp < n_v && lhs == prod, $sformatf("partial 128-bit MMUL result %h", rp));
      prod = (512'(a1) * 512'(b1)) % 512'(n1);
      lhs  = (512'(r1) << 32) % 512'(n1);
      check(r1 < n1 && lhs == prod, $sformatf("atomic 32-bit MMUL result %h", r1));
    end
    check(n_p_first == 1 && n_p_mid == NB - 2 && n_p_last == 1,
          $sformatf("partial calls first/mid/last = %0d/%0d/%0d", n_p_first, n_p_mid, n_p_last));
    check(max_partial_latency <= 3*W + 2 + 3,
          $sformatf("interrupt latency in partial mode %0d cycles", max_partial_latency));

    // the fetch stage goes quiet once its queue is full during an MMUL
    check(max_atomic_fetches <= 4,
          $sformatf("instruction fetches during an atomic MMUL %0d", max_atomic_fetches));

    // every mechanism happened
    check(n_compressed > 0,   "compressed instructions");
    check(n_misaligned32 > 0, "misaligned 32-bit instructions");
    check(n_br_taken > 0,     "taken branches");
    check(n_load_stall > 0,   "load stalls");
    check(n_store > 0,        "stores");
    check(n_exc == 2,         "exceptions");
    check(n_atomic == 2,      "atomic MMULs");
    check(n_irq_deferred == 1, "interrupt deferred by atomic MMUL");
    check(n_irq_partial > 0,  "interrupt between partial MMUL calls");
    $display("mechanisms: compressed=%0d misaligned32=%0d br_taken=%0d load_stall=%0d store=%0d exc=%0d irq=%0d irq_partial=%0d irq_deferred=%0d atomic=%0d partial=%0d/%0d/%0d max_partial_irq_latency=%0d atomic_fetches=%0d cycles=%0d",
             n_compressed, n_misaligned32, n_br_taken, n_load_stall, n_store, n_exc, n_irq,
             n_irq_partial, n_irq_deferred, n_atomic, n_p_first, n_p_mid, n_p_last,
             max_partial_latency, max_atomic_fetches, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
