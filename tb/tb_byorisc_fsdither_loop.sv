// tb_byorisc_fsdither_loop: the hot loop of the fsdither kernel, rewritten around the
// fsdither1 custom instruction, on the default ByoRISC system.
//
// fsdither1 copies one pixel byte MEM[source_word + i] = MEM[source + i], returns i + 1
// and the constant 4096 (the loop bound). The loop is
//     L: fsdither1            ; r92 = i + 1, r154 = 4096, byte copied
//        SLT  r93, r92, r154  ; both operands forwarded from EX/MEM lanes 0 and 1
//        BNEZ r93, L          ; r93 forwarded from EX/MEM
//        HALT
// over 4096 pixels, source at 0x0000 and destination at 0x1000 (the whole 8 KB data
// memory). The destination is compared with the source, and the run time with the
// pipeline's own arithmetic: 7 cycles per iteration (2 for the CI, whose load must return
// before its store, 1 SLT, 1 BNEZ, 3 squashed fetches after the taken branch), and no
// squash after the last one.
module tb_byorisc_fsdither_loop;
  import byorisc_pkg::*;
  import byorisc_asm_pkg::*;

  localparam int N = 4096;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic imem_we = 0; logic [10:0] imem_waddr = 0; word_t imem_wdata = 0;
  logic sid_we = 0; logic [7:0] sid_waddr = 0; logic [143:0] sid_wdata = 0;
  logic host_en = 0, host_we = 0; logic [10:0] host_addr = 0; word_t host_wdata = 0, host_rdata;
  logic halted; logic [10:0] pc;
  byorisc_top dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  word_t src [N/4];
  always @(posedge clk) if (!rst && !halted) cyc++;

  initial begin #5_000_000; failures++; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    word_t prog[$];
    int d1[8] = '{92, 154, 0, 0, 0, 0, 0, 0};
    int s1[8] = '{90, 91, 92, 0, 0, 0, 0, 0};
    int bad = 0;
    prog = '{imm(OP_LLI, 90, 0), imm(OP_LLI, 91, 16'h1000), imm(OP_LLI, 92, 0), nop(),
             ci(CI_FSDITHER1, 1), r3(OP_SLT, 93, 92, 154), imm(OP_BNEZ, 93, -3),
             jmp(OP_HALT, 0)};
    @(negedge clk);
    for (int i = 0; i < prog.size(); i++) begin
      imem_we = 1; imem_waddr = 11'(i); imem_wdata = prog[i]; @(negedge clk);
    end
    imem_we = 0;
    sid_we = 1; sid_waddr = 1; sid_wdata = sid_entry(d1, 8'h03, s1, 8'h07); @(negedge clk);
    sid_we = 0;
    for (int i = 0; i < N/4; i++) begin
      src[i] = $urandom;
      host_en = 1; host_we = 1; host_addr = 11'(i); host_wdata = src[i]; @(negedge clk);
      host_addr = 11'(N/4 + i); host_wdata = ~src[i]; @(negedge clk);
    end
    host_en = 0; host_we = 0;
    rst = 0;
    wait (halted);
    repeat (4) @(negedge clk);
    for (int i = 0; i < N/4; i++) begin
      host_en = 1; host_addr = 11'(N/4 + i); @(negedge clk);
      checks++;
      if (host_rdata !== src[i]) begin
        failures++; bad++;
        if (bad < 5) $display("FAIL word %0d got %h exp %h", i, host_rdata, src[i]);
      end
    end
    host_en = 0;
    // first CI enters EX in cycle 7 (4 set-up instructions, 3 fill stages); HALT enters EX
    // 4 cycles after the last CI; the count includes HALT's EX cycle
    checks++;
    if (cyc != 7 + 7 * (N - 1) + 4 + 1) begin
      failures++; $display("FAIL cycles %0d exp %0d", cyc, 7 + 7 * (N - 1) + 4 + 1);
    end
    $display("fsdither1 loop: %0d pixels in %0d cycles (%0.2f cycles/pixel)", N, cyc, real'(cyc) / N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
