// tb_byorisc_sid: loads random 144-bit entries, presents B-fmt and base instruction words
// and checks the decoded fields one cycle later against fields cut from the entry by the
// Fig. 3 layout (dst_0 in the top byte, re_v in the bottom byte), plus is_ci and hold.
module tb_byorisc_sid;
  import byorisc_pkg::*;
  logic clk = 0, en = 0, lut_we = 0; word_t inst = 0; logic is_ci;
  logic [7:0][7:0] dst, src; logic [7:0] we_v, re_v;
  logic [7:0] lut_waddr = 0; logic [143:0] lut_wdata = 0;
  logic [143:0] model [256];
  int checks = 0, failures = 0;
  byorisc_sid dut (.*);
  always #5 clk = ~clk;
  task automatic chk(string w, int got, int exp);
    checks++; if (got != exp) begin failures++; $display("FAIL %s got %h exp %h", w, got, exp); end
  endtask
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); lut_we = 1; lut_waddr = 8'(i);
      lut_wdata = {$urandom, $urandom, $urandom, $urandom, 16'($urandom)}; model[i] = lut_wdata;
    end
    @(negedge clk); lut_we = 0;
    for (int n = 0; n < 1000; n++) begin
      logic [143:0] e; logic [7:0] opc;
      opc = 8'($urandom); inst = {opc, 24'($urandom)}; en = 1;
      e = model[inst[7:0]];
      @(negedge clk);
      chk("is_ci", is_ci, opc >= 8'h40);
      for (int k = 0; k < 8; k++) chk("dst", dst[k], e[143 - 8*k -: 8]);
      chk("we_v", we_v, e[79:72]);
      for (int k = 0; k < 8; k++) chk("src", src[k], e[71 - 8*k -: 8]);
      chk("re_v", re_v, e[7:0]);
      en = 0; inst = ~inst;
      @(negedge clk);
      chk("hold", dst[0], e[143:136]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
