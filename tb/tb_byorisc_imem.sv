// tb_byorisc_imem: writes random words, then reads them back checking the one-cycle
// synchronous read and that the output holds while en is low.
module tb_byorisc_imem;
  import byorisc_pkg::*;
  logic clk = 0, en = 0, we = 0; logic [10:0] raddr = 0, waddr = 0; word_t rdata, wdata = 0;
  word_t model [2048];
  int checks = 0, failures = 0;
  byorisc_imem dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < 2048; i++) begin
      @(negedge clk); we = 1; waddr = 11'(i); wdata = $urandom; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 1000; n++) begin
      word_t held;
      en = 1; raddr = 11'($urandom);
      @(negedge clk);
      checks++; if (rdata !== model[raddr]) begin failures++; $display("FAIL read %0d", raddr); end
      held = rdata; en = 0; raddr = raddr + 1;
      @(negedge clk);
      checks++; if (rdata !== held) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
