// tb_byorisc_pc_unit: reset value, increment, hold, ID and late redirect priority,
// compared cycle by cycle with a reference PC kept by the testbench.
module tb_byorisc_pc_unit;
  logic clk = 0, rst = 1, hold = 0, id_redirect = 0, late_redirect = 0;
  logic [10:0] id_target = 0, late_target = 0, pc, ref_pc;
  int checks = 0, failures = 0;
  byorisc_pc_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    @(negedge clk); @(negedge clk);
    checks++; if (pc !== 0) begin failures++; $display("FAIL reset pc %0d", pc); end
    rst = 0; ref_pc = 0;
    for (int n = 0; n < 1000; n++) begin
      hold = ($urandom_range(0, 3) == 0); id_redirect = ($urandom_range(0, 4) == 0);
      late_redirect = ($urandom_range(0, 6) == 0);
      id_target = 11'($urandom); late_target = 11'($urandom);
      if (late_redirect) ref_pc = late_target;
      else if (id_redirect) ref_pc = id_target;
      else if (!hold) ref_pc = ref_pc + 1;
      @(negedge clk);
      checks++; if (pc !== ref_pc) begin failures++; $display("FAIL pc %0d exp %0d", pc, ref_pc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
