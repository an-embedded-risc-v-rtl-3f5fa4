// tb_mmul_unit: self-checking test of the R2MM MMUL unit on its own.
//
// The testbench plays the core: it holds `start` while an MMUL "instruction"
// runs, forms addresses as base[reg_sel] + offset (the core's ALU), and
// answers reads one cycle later from a word array (the LSU and memory). For
// every length of 1..4 words it runs atomic and partial multiplications on
// random odd moduli and checks R < N and R * 2^n = A * B (mod N) with wide
// arithmetic, the cycle count of every call (atomic 3W + 2n + 1 + W; partial
// first 3W + 2, middle 2, last W + 3) and the len_ok flag.
module tb_mmul_unit;
  localparam int unsigned MB = 128;
  localparam int unsigned MAXW = MB / 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start = 1'b0, partial = 1'b0;
  logic [4:0]  len = '0;
  logic        len_ok, done, mem_req, mem_we, mem_rvalid, active, busy;
  logic [1:0]  reg_sel;
  logic [31:0] offset, mem_wdata, mem_rdata;

  mmul_unit dut (
    .clk, .rst_n, .start, .partial, .len, .len_ok, .done,
    .reg_sel, .offset, .mem_req, .mem_we, .mem_wdata, .mem_rdata, .mem_rvalid,
    .active, .busy
  );

  // memory: base addresses of A, B, N, R
  logic [31:0] mem [256];
  logic [31:0] base [4];
  initial begin
    base[0] = 32'h000; base[1] = 32'h100; base[2] = 32'h200; base[3] = 32'h300;
  end
  logic [31:0] addr;
  assign addr = base[reg_sel] + offset;
  always_ff @(posedge clk) begin
    mem_rvalid <= mem_req & ~mem_we;
    if (mem_req && !mem_we) mem_rdata <= mem[addr[9:2]];
    if (mem_req && mem_we)  mem[addr[9:2]] <= mem_wdata;
  end

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // run one MMUL instruction, return its cycle count (called just after a
  // rising edge; done is sampled in the middle of each cycle)
  task automatic call(output int cycles);
    cycles = 0;
    #1 start = 1'b1;
    forever begin
      @(negedge clk);
      cycles++;
      if (done) break;
      if (cycles > 2000) begin check(0, "MMUL call never finished"); break; end
    end
    @(posedge clk);
    #1 start = 1'b0;
    repeat ($urandom % 3) @(posedge clk);
  endtask

  task automatic run(input int words, input bit part);
    logic [MB-1:0] a, b, n, r;
    logic [511:0] lhs, rhs;
    int cyc, nb;
    nb = 32 * words;
    n = '0; a = '0; b = '0;
    for (int i = 0; i < words; i++) n[32*i +: 32] = $urandom;
    n[nb-1] = 1'b1; n[0] = 1'b1;
    for (int i = 0; i < words; i++) begin a[32*i +: 32] = $urandom; b[32*i +: 32] = $urandom; end
    a = a % n; b = b % n;
    for (int i = 0; i < MAXW; i++) begin
      mem[(base[0] >> 2) + i] = a[32*i +: 32];
      mem[(base[1] >> 2) + i] = b[32*i +: 32];
      mem[(base[2] >> 2) + i] = n[32*i +: 32];
      mem[(base[3] >> 2) + i] = 32'hDEAD_BEEF;
    end
    len <= 5'(words - 1);
    partial <= part;
    @(posedge clk);
    check(len_ok, "len_ok for a supported length");
    if (!part) begin
      call(cyc);
      check(cyc == 3*words + 2*nb + 1 + words,
            $sformatf("atomic %0d-word cycles %0d", words, cyc));
    end else begin
      for (int i = 0; i < nb; i++) begin
        call(cyc);
        if (i == 0)
          check(cyc == 3*words + 2, $sformatf("partial first call cycles %0d", cyc));
        else if (i == nb - 1)
          check(cyc == words + 3, $sformatf("partial last call cycles %0d", cyc));
        else if (cyc != 2)
          check(0, $sformatf("partial call %0d cycles %0d", i, cyc));
        if (i < nb - 1 && !active) check(0, "operands kept between partial calls");
      end
      check(!active, "unit idle after last partial call");
    end
    r = '0;
    for (int i = 0; i < words; i++) r[32*i +: 32] = mem[(base[3] >> 2) + i];
    lhs = (512'(r) << nb) % 512'(n);
    rhs = (512'(a) * 512'(b)) % 512'(n);
    check(r < n && lhs == rhs,
          $sformatf("%s %0d-word result a=%h b=%h n=%h r=%h", part ? "partial" : "atomic", words, a, b, n, r));
    if (words < MAXW)
      check(mem[(base[3] >> 2) + words] == 32'hDEAD_BEEF, "no store beyond the result");
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    len <= 5'(MAXW);
    #1 check(!len_ok, "len_ok low for a length above MAX_BITS");
    for (int rep = 0; rep < 3; rep++)
      for (int w = 1; w <= MAXW; w++) begin
        run(w, 1'b0);
        run(w, 1'b1);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
