// tb_fetch_stage: self-checking test of the fetch stage.
//
// Instruction memory holds a random mix of 16-bit (c.addi) and 32-bit (addi)
// instructions, so 32-bit ones often straddle a word boundary. A consumer
// with random readiness takes instructions and checks each one's address,
// length and (expanded) encoding against the expected stream; at random it
// redirects to a random instruction start and checks that the target arrives
// after exactly one bubble cycle (two for a 32-bit target in the upper half
// of a word). A last phase checks one instruction per cycle on straight-line
// aligned 32-bit code.
module tb_fetch_stage;
  import rv_asm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        imem_req, instr_valid, instr_c, instr_ill, ready = 0, redirect = 0;
  logic [31:0] imem_addr, imem_rdata, instr, instr_pc, redirect_pc = 0;

  fetch_stage dut (
    .clk, .rst_n, .imem_req, .imem_addr, .imem_rdata,
    .instr_valid, .instr, .instr_pc, .instr_c, .instr_illegal_c(instr_ill),
    .instr_ready(ready), .redirect, .redirect_pc
  );

  localparam int HW = 2048;  // halfwords of program
  logic [15:0] hmem [HW + 64];
  always_ff @(posedge clk) if (imem_req) imem_rdata <= {hmem[imem_addr[12:1] + 1], hmem[imem_addr[12:1]]};

  // expected stream: per instruction start, its expansion and length
  logic [31:0] exp_inst [HW];
  bit          is_start [HW], exp_c [HW];
  int          starts [$];
  int          straight;   // byte address of the aligned 32-bit region

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int h = 0, rd, imm, exp_pc, n_redir = 0, bubble, tgt, got;
    logic [31:0] w;
    for (int i = 0; i < HW + 64; i++) hmem[i] = 16'h0001;
    for (int i = 0; i < HW; i++) is_start[i] = 0;
    while (h < HW - 200) begin
      rd = 1 + $urandom % 15; imm = int'($urandom % 64) - 32;
      is_start[h] = 1; starts.push_back(2 * h);
      if ($urandom % 2) begin
        hmem[h] = c_addi(rd, imm); exp_inst[h] = addi(rd, rd, imm); exp_c[h] = 1; h += 1;
      end else begin
        w = addi(rd, 1 + $urandom % 15, int'($urandom % 4096) - 2048);
        hmem[h] = w[15:0]; hmem[h + 1] = w[31:16]; exp_inst[h] = w; exp_c[h] = 0; h += 2;
      end
    end
    if (h % 2) begin hmem[h] = c_addi(1, 1); exp_inst[h] = addi(1, 1, 1); exp_c[h] = 1; is_start[h] = 1; h++; end
    straight = 2 * h;
    for (int k = 0; k < 64; k++) begin
      w = addi(k % 15 + 1, 0, k);
      hmem[h] = w[15:0]; hmem[h + 1] = w[31:16]; exp_inst[h] = w; exp_c[h] = 0; is_start[h] = 1; h += 2;
    end

    repeat (2) @(negedge clk);
    rst_n = 1;
    exp_pc = 0;
    bubble = -1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      redirect = 0;
      ready = ($urandom % 4) != 0;
      #1;
      if (bubble >= 0) begin
        // cycles since the redirect: target must arrive on time
        if (bubble == 0 || (bubble == 1 && !exp_c[exp_pc / 2] && exp_pc[1]))
          check(!instr_valid, "bubble after redirect");
        else if (bubble == 1 || bubble == 2) begin
          check(instr_valid, $sformatf("redirect target %h ready %0d cycles after redirect", exp_pc, bubble + 1));
          bubble = -2;
        end
        if (bubble >= 0) bubble++;
        else bubble = -1;
      end
      if (instr_valid && ready) begin
        check(instr_pc == exp_pc && instr == exp_inst[exp_pc / 2] && instr_c == exp_c[exp_pc / 2] && !instr_ill,
              $sformatf("pc %h inst %h c=%b, expected pc %h inst %h", instr_pc, instr, instr_c, exp_pc, exp_inst[exp_pc / 2]));
        exp_pc += exp_c[exp_pc / 2] ? 2 : 4;
        if (($urandom % 8) == 0 || exp_pc >= straight) begin
          tgt = starts[$urandom % starts.size()];
          redirect = 1; redirect_pc = tgt; exp_pc = tgt; n_redir++; bubble = 0;
        end
      end
    end
    check(n_redir > 100, "redirects exercised");
    // throughput on aligned 32-bit code
    @(negedge clk);
    redirect = 1; redirect_pc = straight; ready = 1;
    @(negedge clk);
    redirect = 0;
    got = 0;
    for (int cyc = 0; cyc < 41; cyc++) begin
      #1;
      if (instr_valid) begin
        check(instr_pc == straight + 4 * got, "straight-line order");
        got++;
      end
      @(negedge clk);
    end
    check(got == 40, $sformatf("one instruction per cycle: %0d in 41 cycles", got));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
