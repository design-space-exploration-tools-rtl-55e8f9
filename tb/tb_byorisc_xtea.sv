// tb_byorisc_xtea: XTEA block encryption (the xteaenc kernel) on the default ByoRISC
// system, in base instructions only.
//
// The program enciphers NBLK 64-bit blocks with a 128-bit key, 32 rounds each:
//   v0 += (((v1 << 4) ^ (v1 >> 5)) + v1) ^ (sum + key[sum & 3]);  sum += delta;
//   v1 += (((v0 << 4) ^ (v0 >> 5)) + v0) ^ (sum + key[(sum >> 11) & 3]);
// Key, plaintext and ciphertext live in data memory (key at byte 0x80, input from 0x100,
// output from 0x400); the key word is fetched with a register-direct load each half
// round. The inner loop is 27 instructions: the first load's delay slot holds a NOP, the
// second's the loop counter decrement. The ciphertext is compared with a model of the
// cipher computed here, and the cycle count with the pipeline's arithmetic: every
// instruction takes one cycle, every taken BNEZ adds 3 squashed slots, and the first
// instruction reaches EX in cycle 3.
// The custom instruction that accelerates this kernel is not modelled (its function is
// not published), so this is the kernel's base-instruction version.
module tb_byorisc_xtea;
  import byorisc_pkg::*;
  import byorisc_asm_pkg::*;

  localparam int NBLK   = 16;
  localparam int ROUNDS = 32;
  localparam word_t DELTA = 32'h9E37_79B9;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic imem_we = 0; logic [10:0] imem_waddr = 0; word_t imem_wdata = 0;
  logic sid_we = 0; logic [7:0] sid_waddr = 0; logic [143:0] sid_wdata = 0;
  logic host_en = 0, host_we = 0; logic [10:0] host_addr = 0; word_t host_wdata = 0, host_rdata;
  logic halted; logic [10:0] pc;
  byorisc_top dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) if (!rst && !halted) cyc++;

  initial begin #2_000_000; failures++; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  word_t prog[$];
  function automatic void emit(word_t w); prog.push_back(w); endfunction

  // register use
  localparam int V0 = 1, V1 = 2, SUM = 3, DEL = 4, KEY = 5, CNT = 6, T0 = 7, T1 = 8,
                 KA = 9, KW = 10, C3 = 13, ONE = 14, OUT = 15, OUT4 = 16, NB = 17,
                 FOUR = 18, EIGHT = 19, INP = 20, INP4 = 21;

  word_t key [4];
  word_t pt  [NBLK][2];
  word_t ct  [NBLK][2];

  initial begin
    int setup, outer, head, inner, tail, slots, exp_cyc;
    // ---------------- program ----------------
    emit(imm(OP_LLI, KEY, 16'h0080)); emit(imm(OP_LLI, INP, 16'h0100));
    emit(imm(OP_LLI, OUT, 16'h0400)); emit(imm(OP_LLI, NB, NBLK));
    emit(imm(OP_LHI, DEL, DELTA[31:16])); emit(imm(OP_LOLI, DEL, DELTA[15:0]));
    emit(imm(OP_LLI, C3, 3)); emit(imm(OP_LLI, ONE, 1));
    emit(imm(OP_LLI, FOUR, 4)); emit(imm(OP_LLI, EIGHT, 8));
    setup = prog.size();
    // outer loop: one block
    outer = prog.size();
    emit(ld(OP_LW, V0, INP));
    emit(r3(OP_ADD, INP4, INP, FOUR));
    emit(ld(OP_LW, V1, INP4));
    emit(imm(OP_LLI, SUM, 0));
    emit(imm(OP_LLI, CNT, ROUNDS));
    head = prog.size() - outer;
    // inner loop: one round
    inner = prog.size();
    emit(sh(OP_SLL, T0, V1, 4));
    emit(sh(OP_SRL, T1, V1, 5));
    emit(r3(OP_XOR, T0, T0, T1));
    emit(r3(OP_ADD, T0, T0, V1));
    emit(r3(OP_AND, KA, SUM, C3));
    emit(sh(OP_SLL, KA, KA, 2));
    emit(r3(OP_ADD, KA, KA, KEY));
    emit(ld(OP_LW, KW, KA));
    emit(nop());                                   // load delay slot
    emit(r3(OP_ADD, KW, KW, SUM));
    emit(r3(OP_XOR, T0, T0, KW));
    emit(r3(OP_ADD, V0, V0, T0));
    emit(r3(OP_ADD, SUM, SUM, DEL));
    emit(sh(OP_SLL, T0, V0, 4));
    emit(sh(OP_SRL, T1, V0, 5));
    emit(r3(OP_XOR, T0, T0, T1));
    emit(r3(OP_ADD, T0, T0, V0));
    emit(sh(OP_SRL, KA, SUM, 11));
    emit(r3(OP_AND, KA, KA, C3));
    emit(sh(OP_SLL, KA, KA, 2));
    emit(r3(OP_ADD, KA, KA, KEY));
    emit(ld(OP_LW, KW, KA));
    emit(r3(OP_SUB, CNT, CNT, ONE));               // load delay slot
    emit(r3(OP_ADD, KW, KW, SUM));
    emit(r3(OP_XOR, T0, T0, KW));
    emit(r3(OP_ADD, V1, V1, T0));
    emit(imm(OP_BNEZ, CNT, 16'(inner - (prog.size() + 1))));
    inner = prog.size() - inner;
    // block done: store, advance pointers
    tail = prog.size();
    emit(st(OP_SW, OUT, V0));
    emit(r3(OP_ADD, OUT4, OUT, FOUR));
    emit(st(OP_SW, OUT4, V1));
    emit(r3(OP_ADD, OUT, OUT, EIGHT));
    emit(r3(OP_ADD, INP, INP, EIGHT));
    emit(r3(OP_SUB, NB, NB, ONE));
    emit(imm(OP_BNEZ, NB, 16'(outer - (prog.size() + 1))));
    tail = prog.size() - tail;
    emit(jmp(OP_HALT, 0));

    // ---------------- data and reference ----------------
    foreach (key[i]) key[i] = $urandom;
    for (int b = 0; b < NBLK; b++) begin
      word_t v0, v1, sum;
      pt[b][0] = $urandom; pt[b][1] = $urandom;
      v0 = pt[b][0]; v1 = pt[b][1]; sum = 0;
      for (int r = 0; r < ROUNDS; r++) begin
        v0 += (((v1 << 4) ^ (v1 >> 5)) + v1) ^ (sum + key[sum & 3]);
        sum += DELTA;
        v1 += (((v0 << 4) ^ (v0 >> 5)) + v0) ^ (sum + key[(sum >> 11) & 3]);
      end
      ct[b][0] = v0; ct[b][1] = v1;
    end

    // ---------------- load and run ----------------
    @(negedge clk);
    for (int i = 0; i < prog.size(); i++) begin
      imem_we = 1; imem_waddr = 11'(i); imem_wdata = prog[i]; @(negedge clk);
    end
    imem_we = 0;
    host_en = 1; host_we = 1;
    for (int i = 0; i < 4; i++) begin host_addr = 11'(8'h20 + i); host_wdata = key[i]; @(negedge clk); end
    for (int b = 0; b < NBLK; b++)
      for (int j = 0; j < 2; j++) begin
        host_addr = 11'(8'h40 + 2 * b + j); host_wdata = pt[b][j]; @(negedge clk);
        host_addr = 11'(12'h100 + 2 * b + j); host_wdata = 0; @(negedge clk);
      end
    host_en = 0; host_we = 0;
    rst = 0;
    wait (halted);
    repeat (4) @(negedge clk);
    for (int b = 0; b < NBLK; b++)
      for (int j = 0; j < 2; j++) begin
        host_en = 1; host_addr = 11'(12'h100 + 2 * b + j); @(negedge clk);
        checks++;
        if (host_rdata !== ct[b][j]) begin
          failures++; $display("FAIL block %0d word %0d got %h exp %h", b, j, host_rdata, ct[b][j]);
        end
      end
    host_en = 0;

    // slots up to HALT: setup, then per block the head, 32 rounds with 31 taken
    // back-branches, the tail, and a taken outer branch for all but the last block
    slots = setup + NBLK * (head + ROUNDS * inner + (ROUNDS - 1) * 3 + tail) + (NBLK - 1) * 3;
    exp_cyc = 3 + slots + 1;
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("FAIL cycles %0d exp %0d", cyc, exp_cyc); end
    $display("xtea: %0d blocks x %0d rounds in %0d cycles (%0d per round, %0d instructions per round)",
             NBLK, ROUNDS, cyc, (cyc + ROUNDS * NBLK / 2) / (ROUNDS * NBLK), inner);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
