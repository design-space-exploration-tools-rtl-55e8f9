// tb_byorisc_top: end-to-end test of the ByoRISC system at its default configuration.
//
// Loads a program that runs every mechanism of the pipeline, lets it run to HALT and
// checks the words it stored in data memory against values computed here. The program
// covers: ALU, shifts, halfword immediates, loads/stores of words/halves/bytes,
// forwarding from EX/MEM and MEM/WB on several read ports and write lanes, the
// write-first register file path, the 4-cycle multiplier stall, the permutation CI
// (8 reads and 8 writes in one instruction), the fsdither1 CI with data memory accesses,
// a counted loop with BNEZ, J, JAL/JR and HALT.
// Mechanism counters are read from the core and each must be non-zero; stall lengths are
// checked against the multiplier latency (4 cycles in EX) and the fsdither1 schedule
// (2 cycles in EX).
module tb_byorisc_top;
  import byorisc_pkg::*;
  import byorisc_asm_pkg::*;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  logic          imem_we = 1'b0;
  logic [10:0]   imem_waddr = '0;
  word_t         imem_wdata = '0;
  logic          sid_we = 1'b0;
  logic [7:0]    sid_waddr = '0;
  logic [143:0]  sid_wdata = '0;
  logic          host_en = 1'b0, host_we = 1'b0;
  logic [10:0]   host_addr = '0;
  word_t         host_wdata = '0, host_rdata;
  logic          halted;
  logic [10:0]   pc;

  byorisc_top dut (.*);

  int checks = 0, failures = 0;
  word_t prog[$];
  int    cycles = 0;

  task automatic check(string what, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  function automatic void emit(word_t w);
    prog.push_back(w);
  endfunction
  function automatic int here();
    return prog.size();
  endfunction

  // results are stored at 0x200 upward, r40 is the pointer, r41 = 4
  int nres = 0;
  word_t expv[$];
  function automatic void save(int r, word_t e);
    emit(st(OP_SW, 40, r));
    emit(r3(OP_ADD, 40, 40, 41));
    expv.push_back(e);
  endfunction

  // mechanism counters
  int n_stall = 0, n_fwd1 = 0, n_fwd2 = 0, n_wf = 0, n_branch = 0, n_jump = 0;
  int n_ci_mem = 0, n_multi_wr = 0, n_mul = 0, n_fs = 0, n_perm = 0, n_squash = 0;
  int run_len = 0;
  int bad_stall_len = 0;
  logic prev_stall = 1'b0;
  byte  stall_kind;

  always @(posedge clk) if (!rst) begin
    cycles++;
    if (dut.u_core.stall) n_stall++;
    for (int p = 0; p < 8; p++) if (dut.u_core.ex_live && dut.u_core.ex_re[p]) begin
      if (dut.u_core.pipe_sel[p] == 1) n_fwd1++;
      if (dut.u_core.pipe_sel[p] == 2) n_fwd2++;
    end
    // write-first path: ID reads a register that WB writes in the same cycle
    for (int p = 0; p < 8; p++)
      for (int w = 0; w < 8; w++)
        if (dut.u_core.id_valid && dut.u_core.id_re[p] && dut.u_core.wb_we[w] &&
            dut.u_core.wb_waddr[w] == dut.u_core.id_raddr[p] && !dut.u_core.stall) n_wf++;
    if (dut.u_core.late_redirect) n_branch++;
    if (dut.u_core.id_redirect) n_jump++;
    if (dut.u_core.ci_mreq) n_ci_mem++;
    if ($countones(dut.u_core.wb_we) > 1) n_multi_wr++;
    if (dut.u_core.ex_live && dut.u_core.ex_first && dut.u_core.ex_ctrl.exu == EXU_MUL) n_mul++;
    if (dut.u_core.ex_live && dut.u_core.ex_first && dut.u_core.ex_ctrl.exu == EXU_CI) begin
      if (dut.u_core.ex_ctrl.ci_op == CI_FSDITHER1) n_fs++;
      if (dut.u_core.ex_ctrl.ci_op == CI_PERM) n_perm++;
    end
    if ((dut.u_core.late_redirect || dut.u_core.id_redirect) && dut.u_core.sid_valid) n_squash++;
    // stall run lengths: 3 extra cycles for MUL, 1 for fsdither1
    if (dut.u_core.stall) begin
      if (!prev_stall) begin
        run_len = 0;
        stall_kind = (dut.u_core.ex_ctrl.exu == EXU_MUL) ? 8'd3 : 8'd1;
      end
      run_len++;
    end else if (prev_stall) begin
      if (run_len != int'(stall_kind)) bad_stall_len++;
    end
    prev_stall = dut.u_core.stall;
  end

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int loop_top, j_fix, sub_addr, jal_site, fwd_a;
    word_t r5v, r11v;

    // ---------------- program ----------------
    emit(imm(OP_LLI, 41, 4));
    emit(imm(OP_LLI, 40, 16'h200));
    emit(imm(OP_LLI, 1, 5));
    emit(imm(OP_LLI, 2, 7));
    emit(r3(OP_ADD, 3, 1, 2));          // 12: r2 from EX/MEM, r1 from MEM/WB
    emit(r3(OP_SUB, 4, 3, 1));          // 7: r3 from EX/MEM, r1 via write-first RF
    emit(imm(OP_LHI, 5, 16'h1234));
    emit(imm(OP_LOLI, 5, 16'h5678));    // r5 = 0x12345678
    emit(imm(OP_LLI, 10, 16'h100));
    emit(st(OP_SW, 10, 5));             // MEM[0x100] = r5
    emit(r3(OP_MUL, 6, 3, 4));          // 84, stalls 3 cycles
    emit(r3(OP_ADD, 7, 6, 6));          // 168
    emit(r3(OP_MUL, 42, 5, 5));         // 0x12345678^2 mod 2^32
    emit(sh(OP_SLL, 8, 5, 4));
    emit(imm(OP_LHI, 11, 16'h8000));
    emit(sh(OP_SRA, 12, 11, 3));
    emit(r3(OP_SRLV, 13, 1, 11));       // r11 >> r1
    emit(r3(OP_SLT, 14, 12, 1));
    emit(r3(OP_SLTU, 15, 12, 1));
    emit(r3(OP_XOR, 16, 3, 4));
    emit(ld(OP_LW, 17, 10));
    emit(nop());                        // load delay slot
    emit(r3(OP_ADD, 18, 17, 1));        // load value from MEM/WB
    emit(imm(OP_LLI, 19, 16'h105));
    emit(st(OP_SB, 19, 16));            // MEM byte 0x105 = 11
    emit(ld(OP_LB, 20, 10));            // byte 0x100 = 0x78
    emit(ld(OP_LH, 21, 19));            // half at 0x104 (aligned down): 0x0B00
    emit(r3(OP_NOR, 22, 1, 2));
    emit(r3(OP_OR, 23, 1, 2));
    emit(r3(OP_AND, 24, 3, 4));
    emit(r3(OP_SUBU, 25, 1, 2));
    emit(r3(OP_SLLV, 26, 1, 5));        // r5 << 5
    emit(sh(OP_SRL, 27, 11, 31));
    save(3, 12); save(4, 7); save(5, 32'h12345678); save(6, 84); save(7, 168);
    save(42, 32'h12345678 * 32'h12345678);
    save(8, 32'h23456780); save(12, 32'hF0000000); save(13, 32'h04000000);
    save(14, 1); save(15, 0); save(16, 11); save(17, 32'h12345678);
    save(18, 32'h1234567D); save(20, 32'h78); save(21, 32'h0B00);
    save(22, ~(32'd5 | 32'd7)); save(23, 7); save(24, 4); save(25, 32'hFFFFFFFE);
    save(26, 32'h12345678 << 5); save(27, 1);
    // counted loop: r51 = 10 + 9 + ... + 1
    emit(imm(OP_LLI, 50, 10));
    emit(imm(OP_LLI, 51, 0));
    emit(imm(OP_LLI, 52, 1));
    loop_top = here();
    emit(r3(OP_ADD, 51, 51, 50));
    emit(r3(OP_SUB, 50, 50, 52));
    emit(imm(OP_BNEZ, 50, loop_top - (here() + 1)));
    emit(imm(OP_LLI, 53, 16'h33));      // fall-through path
    save(51, 55); save(53, 32'h33);
    // BEQZ taken over a poisoned instruction
    emit(imm(OP_BEQZ, 50, 1));
    emit(imm(OP_LLI, 53, 16'hBAD));
    save(53, 32'h33);
    // J over a poisoned instruction
    j_fix = here() + 2;
    emit(jmp(OP_J, j_fix));
    emit(imm(OP_LLI, 61, 16'hBAD));
    emit(imm(OP_LLI, 61, 16'h61));      // j_fix
    save(61, 32'h61);
    // JAL to a subroutine that returns with JR r31
    jal_site = here();
    sub_addr = jal_site + 4;
    emit(jmp(OP_JAL, sub_addr));
    emit(imm(OP_LLI, 62, 16'h62));      // return point
    emit(jmp(OP_J, sub_addr + 3));      // skip the subroutine
    emit(nop());
    emit(imm(OP_LLI, 60, 16'h77));      // sub_addr
    emit(r3(OP_JR, 0, 31, 0));
    emit(imm(OP_LLI, 60, 16'hBAD));
    save(60, 32'h77); save(62, 32'h62); save(31, word_t'(jal_site + 1));
    // permutation CI, occurrence 0: src r1..r8, dst in 8 different banks
    emit(ci(CI_PERM, 0));
    fwd_a = here();
    emit(r3(OP_ADD, 63, 200, 20));      // lanes 0 and 6 forwarded from EX/MEM
    save(200, 32'h23456780); save(170, 168); save(140, 84); save(110, 32'h12345678);
    save(80, 7); save(50, 12); save(20, 7); save(230, 5);
    save(63, 32'h23456780 + 7);
    // fsdither1 CI, occurrence 1: in = {source r90, source_word r91, vr128 r92}
    emit(imm(OP_LLI, 90, 16'h300));
    emit(imm(OP_LLI, 91, 16'h340));
    emit(imm(OP_LLI, 92, 3));
    emit(ci(CI_FSDITHER1, 1));
    emit(ci(CI_FSDITHER1, 1));          // vr128 forwarded from the previous CI
    save(92, 5); save(154, 4096);
    emit(jmp(OP_HALT, 0));
    emit(imm(OP_LLI, 41, 0));           // must never execute

    // ---------------- load ----------------
    @(negedge clk);
    for (int i = 0; i < prog.size(); i++) begin
      imem_we = 1'b1; imem_waddr = 11'(i); imem_wdata = prog[i];
      @(negedge clk);
    end
    imem_we = 1'b0;
    begin
      int d0[8] = '{200, 170, 140, 110, 80, 50, 20, 230};
      int s0[8] = '{1, 2, 3, 4, 5, 6, 7, 8};
      int d1[8] = '{92, 154, 0, 0, 0, 0, 0, 0};
      int s1[8] = '{90, 91, 92, 0, 0, 0, 0, 0};
      sid_we = 1'b1; sid_waddr = 0; sid_wdata = sid_entry(d0, 8'hFF, s0, 8'hFF);
      @(negedge clk);
      sid_waddr = 1; sid_wdata = sid_entry(d1, 8'h03, s1, 8'h07);
      @(negedge clk);
      sid_we = 1'b0;
    end
    host_en = 1'b1; host_we = 1'b1;
    host_addr = 11'(32'h300 >> 2); host_wdata = 32'hA1B2C3D4; @(negedge clk);
    host_addr = 11'(32'h304 >> 2); host_wdata = 32'h000000E5; @(negedge clk);
    host_addr = 11'(32'h340 >> 2); host_wdata = 32'h0;        @(negedge clk);
    host_addr = 11'(32'h344 >> 2); host_wdata = 32'h0;        @(negedge clk);
    host_addr = 11'(32'h104 >> 2); host_wdata = 32'h0;        @(negedge clk);
    host_en = 1'b0; host_we = 1'b0;

    // ---------------- run ----------------
    rst = 1'b0;
    wait (halted);
    repeat (5) @(negedge clk);

    // ---------------- results ----------------
    for (int i = 0; i < expv.size(); i++) begin
      host_en = 1'b1; host_addr = 11'((32'h200 >> 2) + i);
      @(negedge clk);
      check($sformatf("result %0d", i), host_rdata, expv[i]);
    end
    host_addr = 11'(32'h340 >> 2); @(negedge clk);
    check("fsdither1 copied byte 0x303 -> 0x343", host_rdata, 32'hA1000000);
    host_addr = 11'(32'h344 >> 2); @(negedge clk);
    check("fsdither1 copied byte 0x304 -> 0x344", host_rdata, 32'h000000E5);
    host_en = 1'b0;
    check("halted pc frozen", word_t'(pc), word_t'(pc));

    // ---------------- mechanisms ----------------
    check("MUL ops seen", word_t'(n_mul), 2);
    check("fsdither1 CIs seen", word_t'(n_fs), 2);
    check("perm CI seen", word_t'(n_perm), 1);
    check("stall cycles = 3 per MUL + 1 per fsdither1", word_t'(n_stall), 2*3 + 2*1);
    check("stall run lengths", word_t'(bad_stall_len), 0);
    check("CI memory accesses = 2 per fsdither1", word_t'(n_ci_mem), 4);
    check("taken branches (9 BNEZ + 1 BEQZ + 1 JR)", word_t'(n_branch), 11);
    check("ID jumps (J, JAL, J)", word_t'(n_jump), 3);
    checks++; if (n_fwd1 == 0) begin failures++; $display("FAIL no EX/MEM forwarding"); end
    checks++; if (n_fwd2 == 0) begin failures++; $display("FAIL no MEM/WB forwarding"); end
    checks++; if (n_wf == 0) begin failures++; $display("FAIL no write-first read"); end
    checks++; if (n_multi_wr == 0) begin failures++; $display("FAIL no multi-lane write-back"); end
    checks++; if (n_squash == 0) begin failures++; $display("FAIL no squashed instruction"); end
    $display("cycles=%0d stall=%0d fwd_exmem=%0d fwd_memwb=%0d writefirst=%0d branches=%0d jumps=%0d ci_mem=%0d multiwrite=%0d",
             cycles, n_stall, n_fwd1, n_fwd2, n_wf, n_branch, n_jump, n_ci_mem, n_multi_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
