// tb_byorisc_mprf: random multi-port traffic on the 256-entry, 8-read, 8-write register
// file. Each cycle writes go to distinct banks; all 8 read ports read random registers.
// Data are checked one cycle later against a register array model, including reads of a
// register being written in the same cycle (new value expected) and output hold.
module tb_byorisc_mprf;
  logic clk = 0, ren = 0;
  logic [7:0][7:0] raddr = '0, waddr = '0; logic [7:0][31:0] rdata, wdata = '0; logic [7:0] we = '0;
  logic [31:0] model [256];
  int checks = 0, failures = 0;
  byorisc_mprf dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    // initialise all registers: 8 per cycle, one per bank
    for (int i = 0; i < 32; i++) begin
      @(negedge clk);
      for (int w = 0; w < 8; w++) begin
        we[w] = 1; waddr[w] = 8'(w * 32 + i); wdata[w] = $urandom; model[w * 32 + i] = wdata[w];
      end
    end
    for (int n = 0; n < 2000; n++) begin
      logic [7:0][31:0] exp; int perm[8];
      @(negedge clk);
      for (int w = 0; w < 8; w++) perm[w] = w;
      perm.shuffle();
      for (int w = 0; w < 8; w++) begin
        we[w] = ($urandom_range(0, 2) != 0);
        waddr[w] = 8'(perm[w] * 32 + $urandom_range(0, 31));
        wdata[w] = $urandom;
      end
      ren = 1;
      for (int p = 0; p < 8; p++) begin
        raddr[p] = (p < 2 && we[p]) ? waddr[p] : 8'($urandom);
      end
      for (int w = 0; w < 8; w++) if (we[w]) model[waddr[w]] = wdata[w];
      for (int p = 0; p < 8; p++) exp[p] = model[raddr[p]];
      @(negedge clk);
      we = '0; ren = (n % 4 != 0);
      for (int p = 0; p < 8; p++) begin
        checks++;
        if (rdata[p] !== exp[p]) begin failures++; $display("FAIL port %0d reg %0d", p, raddr[p]); end
      end
      if (!ren) begin
        @(negedge clk);
        checks++; if (rdata !== exp) begin failures++; $display("FAIL hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
