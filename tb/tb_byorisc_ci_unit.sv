// tb_byorisc_ci_unit: the permutation CI (one cycle, out[k] = in[7-k]) and the fsdither1
// CI against a small byte memory model: load request in cycle 0, store of the loaded
// byte in cycle 1 with done, results vr128 + 1 and 4096.
module tb_byorisc_ci_unit;
  import byorisc_pkg::*;
  logic clk = 0, rst = 1, valid = 0; logic [7:0] op = 0;
  logic [7:0][31:0] in = '0, out; logic done, mem_req, mem_we; word_t mem_addr;
  logic [7:0] mem_wdata, mem_rdata = 0;
  logic [7:0] bytes [1024];
  int checks = 0, failures = 0;
  byorisc_ci_unit dut (.*);
  always #5 clk = ~clk;
  // one-cycle synchronous byte memory
  always @(posedge clk) if (mem_req) begin
    mem_rdata <= bytes[mem_addr % 1024];
    if (mem_we) bytes[mem_addr % 1024] <= mem_wdata;
  end
  task automatic chk(string w, longint got, longint exp);
    checks++; if (got != exp) begin failures++; $display("FAIL %s got %h exp %h", w, got, exp); end
  endtask
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < 1024; i++) bytes[i] = 8'($urandom);
    @(negedge clk); rst = 0;
    for (int n = 0; n < 300; n++) begin
      for (int k = 0; k < 8; k++) in[k] = $urandom;
      if (n % 2 == 0) begin
        op = CI_PERM; valid = 1; #1;
        chk("perm done", done, 1); chk("perm mem", mem_req, 0);
        for (int k = 0; k < 8; k++) chk("perm out", out[k], in[7-k]);
        @(negedge clk);
      end else begin
        logic [7:0] b; int src, dstw, idx;
        src = $urandom_range(0, 400); dstw = $urandom_range(500, 900); idx = $urandom_range(0, 100);
        in[0] = src; in[1] = dstw; in[2] = idx; op = CI_FSDITHER1; valid = 1;
        b = bytes[src + idx];
        #1;
        chk("fs load cycle done", done, 0); chk("fs load req", mem_req, 1); chk("fs load we", mem_we, 0);
        chk("fs load addr", mem_addr, src + idx);
        @(negedge clk);
        in = '0;                                  // operands must have been latched
        #1;
        chk("fs store done", done, 1); chk("fs store we", mem_we, 1);
        chk("fs store addr", mem_addr, dstw + idx); chk("fs store data", mem_wdata, b);
        chk("fs out0", out[0], idx + 1); chk("fs out1", out[1], 4096);
        @(negedge clk);
        valid = 0;
        chk("fs memory", bytes[dstw + idx], b);
        @(negedge clk);
      end
    end
    valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
