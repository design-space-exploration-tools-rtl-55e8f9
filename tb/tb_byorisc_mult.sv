// tb_byorisc_mult: back-to-back random products; each result must appear exactly three
// cycles after its start (four cycles in EX) and equal the low word of a*b. A second,
// single-cycle instance (PIPELINED = 0) must give the product and valid in the start cycle.
module tb_byorisc_mult;
  import byorisc_pkg::*;
  logic clk = 0, rst = 1, start = 0, valid; word_t a = 0, b = 0, y;
  int checks = 0, failures = 0;
  byorisc_mult dut (.*);
  word_t y1; logic v1;
  byorisc_mult #(.PIPELINED(1'b0)) dut1 (.clk, .rst, .start, .a, .b, .y(y1), .valid(v1));
  always #5 clk = ~clk;
  word_t expq[$]; int tq[$]; int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (valid && !rst) begin
      checks += 2;
      if (expq.size() == 0) begin failures += 2; $display("FAIL spurious valid"); end
      else begin
        word_t e; int t0;
        e = expq.pop_front(); t0 = tq.pop_front();
        if (y !== e) begin failures++; $display("FAIL y=%h exp=%h", y, e); end
        if (cyc - t0 != 3) begin failures++; $display("FAIL latency %0d", cyc - t0); end
      end
    end
    if (start) begin expq.push_back(a * b); tq.push_back(cyc); end
    checks++;
    if (v1 !== start || (start && y1 !== a * b)) begin
      failures++; $display("FAIL single-cycle v=%b y=%h exp %h", v1, y1, a * b);
    end
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk); rst = 0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      start = (n % 5 != 4); a = $urandom; b = $urandom;
      if (n % 13 == 0) a = 32'hFFFFFFFF;
    end
    @(negedge clk); start = 0;
    repeat (6) @(negedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
