// tb_alu: self-checking test of the ALU. Random and corner operands for every
// operation; expected values are computed here with plain SystemVerilog
// arithmetic on integers, and the three comparison outputs are checked too.
module tb_alu;
  import rv_pkg::*;
  alu_op_e     op;
  logic [31:0] a, b, y;
  logic        eq, lt, ltu;
  alu dut (.op, .a, .b, .result(y), .eq, .lt, .ltu);

  int checks = 0, failures = 0;

  function automatic logic [31:0] model(alu_op_e o, logic [31:0] x, logic [31:0] z);
    int sx = int'(x), sz = int'(z);
    longint unsigned ux = x;
    case (o)
      ALU_ADD:  return 32'(ux + z);
      ALU_SUB:  return 32'(ux - z);
      ALU_SLL:  return 32'(ux << z[4:0]);
      ALU_SLT:  return (sx < sz) ? 32'd1 : 32'd0;
      ALU_SLTU: return (ux < longint'(z)) ? 32'd1 : 32'd0;
      ALU_XOR:  return x ^ z;
      ALU_SRL:  return 32'(ux >> z[4:0]);
      ALU_SRA:  return 32'(sx >>> z[4:0]);
      ALU_OR:   return x | z;
      ALU_AND:  return x & z;
      default:  return z;
    endcase
  endfunction

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] corner [6] = '{32'h0, 32'h1, 32'hFFFF_FFFF, 32'h8000_0000, 32'h7FFF_FFFF, 32'h1F};
    for (int i = 0; i < 3000; i++) begin
      op = alu_op_e'($urandom % 11);
      a  = (i % 3 == 0) ? corner[$urandom % 6] : $urandom;
      b  = (i % 5 == 0) ? corner[$urandom % 6] : $urandom;
      #1;
      checks++;
      if (y !== model(op, a, b) || eq !== (a == b) ||
          lt !== (int'(a) < int'(b)) || ltu !== (longint'(a) < longint'(b))) begin
        failures++;
        $display("FAIL op=%s a=%h b=%h y=%h exp=%h", op.name(), a, b, y, model(op, a, b));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
