// tb_byorisc_core: three cores run the same hazard-padded program (no CI):
//   c1  default configuration (SID stage, forwarding, branches redirect from EX)
//   c2  BR_EARLY = 0: branches redirect after the EX/MEM register
//   c3  HAVE_CI = 0 (5-stage, no SID) and FORWARDING = 0
//   c4  MULT_TPL = 0: single-cycle multiplier, and a barrel shifter
//   c5  3 read / 2 write register ports (the instance drawn in the paper's bypass figure)
//   c6  2 read / 1 write register ports (the smallest configuration)
// All three must store the same, independently computed results. Their run times must
// differ by exactly what the pipeline organisation predicts:
//   c2 - c1 = one cycle per taken branch/JR (one more squashed instruction),
//   c1 - c3 = one cycle of pipeline fill + one per taken J/JAL/branch/JR,
//   c1 - c4 = three cycles per MUL (the stall of the 4-cycle multiplier),
//   c5 = c6 = c1 (the program uses base instructions only, which need 2 reads, 1 write)
//             (the SID stage adds one squashed instruction to each).
module tb_byorisc_core;
  import byorisc_pkg::*;
  import byorisc_asm_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic imem_we = 0; logic [10:0] imem_waddr = 0; word_t imem_wdata = 0;
  int checks = 0, failures = 0;
  word_t prog[$];

  logic [5:0] halted;
  int cyc [6];
  logic [5:0][10:0] hpc;

  for (genvar g = 0; g < 6; g++) begin : g_sys
    logic dm_en; logic [3:0] dm_be; logic [10:0] dm_addr; word_t dm_wdata, dm_rdata;
    logic h_en = 0; logic [10:0] h_addr = 0; word_t h_rdata;
    byorisc_core #(.HAVE_CI(g != 2), .FORWARDING(g != 2), .BR_EARLY(g != 1), .MULT_TPL(g != 3),
                   .SHIFTER_TPL(g == 3 ? SHF_BARREL : SHF_FUNNEL),
                   .NRPORTS(g == 4 ? 3 : g == 5 ? 2 : 8), .NWPORTS(g == 4 ? 2 : g == 5 ? 1 : 8)) u_core (
      .clk, .rst, .imem_we, .imem_waddr, .imem_wdata,
      .sid_we(1'b0), .sid_waddr('0), .sid_wdata('0),
      .dm_en, .dm_be, .dm_addr, .dm_wdata, .dm_rdata, .halted(halted[g]), .pc(hpc[g]));
    byorisc_dmem u_dmem (.clk, .a_en(dm_en), .a_be(dm_be), .a_addr(dm_addr), .a_wdata(dm_wdata),
      .a_rdata(dm_rdata), .b_en(h_en), .b_we(1'b0), .b_addr(h_addr), .b_wdata('0), .b_rdata(h_rdata));
    always @(posedge clk) if (!rst && !halted[g]) cyc[g]++;
  end

  task automatic chk(string w, int got, int exp);
    checks++; if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", w, got, exp); end
  endtask

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    word_t exp[4] = '{21, 81, 32'h33, 16};
    cyc = '{0, 0, 0, 0, 0, 0};
    prog = '{
      imm(OP_LLI, 70, 16'h200), imm(OP_LLI, 71, 16'h204), imm(OP_LLI, 72, 16'h208),
      imm(OP_LLI, 73, 16'h20C), imm(OP_LLI, 50, 6), imm(OP_LLI, 52, 1), imm(OP_LLI, 51, 0),
      imm(OP_LLI, 1, 9), nop(),
      r3(OP_ADD, 51, 51, 50),               // 9: loop
      r3(OP_SUB, 50, 50, 52), nop(), nop(),
      imm(OP_BNEZ, 50, -5),                 // 13
      r3(OP_MUL, 2, 1, 1),                  // 14
      jmp(OP_JAL, 19),                      // 15
      nop(),                                // 16: return point
      jmp(OP_J, 22),                        // 17
      imm(OP_LLI, 3, 16'hBAD),              // 18
      imm(OP_LLI, 3, 16'h33),               // 19: subroutine
      r3(OP_JR, 0, 31, 0),                  // 20
      imm(OP_LLI, 3, 16'hBAD),              // 21
      st(OP_SW, 70, 51), st(OP_SW, 71, 2), st(OP_SW, 72, 3), st(OP_SW, 73, 31),
      jmp(OP_HALT, 0), imm(OP_LLI, 3, 0)
    };
    @(negedge clk);
    for (int i = 0; i < prog.size(); i++) begin
      imem_we = 1; imem_waddr = 11'(i); imem_wdata = prog[i]; @(negedge clk);
    end
    imem_we = 0;
    rst = 0;
    wait (&halted);
    repeat (4) @(negedge clk);
    for (int i = 0; i < 4; i++) begin
      g_sys[0].h_en = 1; g_sys[1].h_en = 1; g_sys[2].h_en = 1; g_sys[3].h_en = 1;
      g_sys[0].h_addr = 11'(128 + i); g_sys[1].h_addr = 11'(128 + i); g_sys[2].h_addr = 11'(128 + i);
      g_sys[3].h_addr = 11'(128 + i);
      g_sys[4].h_en = 1; g_sys[5].h_en = 1;
      g_sys[4].h_addr = 11'(128 + i); g_sys[5].h_addr = 11'(128 + i);
      @(negedge clk);
      chk($sformatf("c1 result %0d", i), g_sys[0].h_rdata, exp[i]);
      chk($sformatf("c2 result %0d", i), g_sys[1].h_rdata, exp[i]);
      chk($sformatf("c3 result %0d", i), g_sys[2].h_rdata, exp[i]);
      chk($sformatf("c4 result %0d", i), g_sys[3].h_rdata, exp[i]);
      chk($sformatf("c5 (3R/2W) result %0d", i), g_sys[4].h_rdata, exp[i]);
      chk($sformatf("c6 (2R/1W) result %0d", i), g_sys[5].h_rdata, exp[i]);
    end
    // 5 taken BNEZ + 1 JR in EX, JAL + J in ID
    chk("BR_EARLY=0 costs one cycle per taken branch", cyc[1] - cyc[0], 6);
    chk("SID stage costs fill + one cycle per redirect", cyc[0] - cyc[2], 1 + 2 + 6);
    chk("halted PC holds", hpc[0], hpc[0]);
    chk("4-cycle multiplier stalls three cycles", cyc[0] - cyc[3], 3);
    chk("3R/2W core runs as fast as 8R/8W", cyc[4], cyc[0]);
    chk("2R/1W core runs as fast as 8R/8W", cyc[5], cyc[0]);
    $display("cycles: default %0d, BR_EARLY=0 %0d, 5-stage %0d, single-cycle MUL %0d", cyc[0], cyc[1], cyc[2], cyc[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
