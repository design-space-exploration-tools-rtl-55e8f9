// tb_byorisc_dmem: random byte-enable writes on the core port and word writes on the
// host port, checked by reads on both ports against a byte-level model.
module tb_byorisc_dmem;
  import byorisc_pkg::*;
  logic clk = 0;
  logic a_en = 0; logic [3:0] a_be = 0; logic [10:0] a_addr = 0; word_t a_wdata = 0, a_rdata;
  logic b_en = 0, b_we = 0; logic [10:0] b_addr = 0; word_t b_wdata = 0, b_rdata;
  word_t model [2048];
  int checks = 0, failures = 0;
  byorisc_dmem dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < 2048; i++) begin
      @(negedge clk); b_en = 1; b_we = 1; b_addr = 11'(i); b_wdata = $urandom; model[i] = b_wdata;
    end
    @(negedge clk); b_en = 0; b_we = 0;
    for (int n = 0; n < 2000; n++) begin
      word_t old;
      a_en = 1; a_be = 4'($urandom); a_addr = 11'($urandom_range(0, 63)); a_wdata = $urandom;
      old = model[a_addr];
      for (int k = 0; k < 4; k++) if (a_be[k]) model[a_addr][8*k +: 8] = a_wdata[8*k +: 8];
      b_en = 1; b_we = 0; b_addr = 11'($urandom_range(0, 63));
      @(negedge clk);
      checks++; if (a_rdata !== old) begin failures++; $display("FAIL port A read-before-write"); end
      a_en = 0; a_be = 0;
      @(negedge clk);
      checks++; if (b_rdata !== model[b_addr]) begin failures++; $display("FAIL port B read %0d", b_addr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
