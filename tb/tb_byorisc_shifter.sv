// tb_byorisc_shifter: every shift type and amount on random values, for all three shifter
// topologies (funnel, barrel, dedicated) side by side. The expected word is built bit by
// bit: SLL moves bit i-s to i, SRL/SRA move bit i+s to i and fill with 0 or the sign.
module tb_byorisc_shifter;
  import byorisc_pkg::*;
  shift_op_e op; word_t x; logic [4:0] s;
  word_t y [3];
  int checks = 0, failures = 0;
  byorisc_shifter #(.TPL(SHF_FUNNEL))    dut   (.op, .x, .s, .y(y[0]));
  byorisc_shifter #(.TPL(SHF_BARREL))    dut_b (.op, .x, .s, .y(y[1]));
  byorisc_shifter #(.TPL(SHF_DEDICATED)) dut_d (.op, .x, .s, .y(y[2]));
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    word_t e;
    for (int n = 0; n < 3000; n++) begin
      op = shift_op_e'(n % 3); x = $urandom; s = 5'(n / 3);
      if (n % 97 == 0) x = 32'h8000_0001;
      #1;
      for (int i = 0; i < 32; i++)
        case (op)
          SH_SLL:  e[i] = (i >= int'(s)) ? x[i - int'(s)] : 1'b0;
          SH_SRL:  e[i] = (i + int'(s) < 32) ? x[i + int'(s)] : 1'b0;
          default: e[i] = (i + int'(s) < 32) ? x[i + int'(s)] : x[31];
        endcase
      for (int t = 0; t < 3; t++) begin
        checks++;
        if (y[t] !== e) begin
          failures++; $display("FAIL topology %0d %s x=%h s=%0d y=%h exp %h", t, op.name(), x, s, y[t], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
