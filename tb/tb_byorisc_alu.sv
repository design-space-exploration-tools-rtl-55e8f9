// tb_byorisc_alu: random and directed checks of every ALU function against a reference
// written with plain SystemVerilog operators.
module tb_byorisc_alu;
  import byorisc_pkg::*;
  alu_op_e op; word_t a, b, y; logic [15:0] imm; logic [10:0] pc;
  int checks = 0, failures = 0;
  byorisc_alu dut (.*);

  function automatic word_t ref_alu(alu_op_e o, word_t x, word_t z, logic [15:0] i, logic [10:0] p);
    case (o)
      ALU_ADD:  return x + z;
      ALU_SUB:  return x - z;
      ALU_AND:  return x & z;
      ALU_OR:   return x | z;
      ALU_XOR:  return x ^ z;
      ALU_NOR:  return ~(x | z);
      ALU_SLT:  return (int'(x) < int'(z)) ? 1 : 0;
      ALU_SLTU: return (longint'(x) < longint'(z)) ? 1 : 0;
      ALU_LLI:  return 32'(i);
      ALU_LHI:  return 32'(i) * 65536;
      ALU_LOLI: return x | 32'(i);
      ALU_LINK: return 32'(p) + 1;
      ALU_SEQ:  return (x == z) ? 1 : 0;
      ALU_SNE:  return (x != z) ? 1 : 0;
      ALU_SLE:  return (int'(x) <= int'(z)) ? 1 : 0;
      ALU_SLEU: return (longint'(x) <= longint'(z)) ? 1 : 0;
      default:  return 0;
    endcase
  endfunction

  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      op = alu_op_e'(n % 16); a = $urandom; b = $urandom; imm = 16'($urandom); pc = 11'($urandom);
      if (n % 7 == 0) b = a;
      if (n % 11 == 0) a = 32'h80000000;
      #1;
      checks++;
      if (y !== ref_alu(op, a, b, imm, pc)) begin
        failures++; $display("FAIL op=%s a=%h b=%h y=%h", op.name(), a, b, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
