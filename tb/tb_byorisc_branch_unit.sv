// tb_byorisc_branch_unit: direct jumps in ID, BEQZ/BNEZ conditions and targets, JR.
module tb_byorisc_branch_unit;
  import byorisc_pkg::*;
  logic [7:0] id_op; logic [23:0] id_addr; logic id_jump; logic [10:0] id_target;
  br_e ex_br; word_t ex_val; logic [15:0] ex_imm; logic [10:0] ex_pc; logic ex_taken; logic [10:0] ex_target;
  int checks = 0, failures = 0;
  byorisc_branch_unit dut (.*);
  task automatic chk(string w, int got, int exp);
    checks++; if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", w, got, exp); end
  endtask
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 500; n++) begin
      id_op = 8'($urandom_range(0, 70)); if (n % 4 == 0) id_op = OP_J; if (n % 4 == 1) id_op = OP_JAL;
      id_addr = 24'($urandom);
      ex_br = br_e'(n % 4); ex_val = (n % 3 == 0) ? 0 : $urandom; ex_imm = 16'($urandom_range(0, 65535));
      ex_pc = 11'($urandom);
      #1;
      chk("id_jump", id_jump, (id_op == OP_J || id_op == OP_JAL));
      chk("id_target", id_target, id_addr % 2048);
      case (ex_br)
        BR_BEQZ: chk("beqz", ex_taken, ex_val == 0);
        BR_BNEZ: chk("bnez", ex_taken, ex_val != 0);
        BR_JR:   chk("jr", ex_taken, 1);
        default: chk("none", ex_taken, 0);
      endcase
      if (ex_br == BR_JR) chk("jr target", ex_target, ex_val % 2048);
      else if (ex_br != BR_NONE)
        chk("br target", ex_target, ((int'(ex_pc) + 1 + int'($signed(ex_imm))) % 2048 + 2048) % 2048);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
