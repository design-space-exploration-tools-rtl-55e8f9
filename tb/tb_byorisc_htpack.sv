// tb_byorisc_htpack: halftone packing and unpacking (the htpack and htunpack kernels) on
// the default ByoRISC system, in base instructions only.
//
// A bilevel image of NPIX pixels, one byte each (0x00 black, 0xFF white, as a dithering
// stage leaves it), is packed eight pixels to a byte, first pixel in the MSB, and the
// packed image is then unpacked back to one byte per pixel:
//   pack:   acc = (acc << 1) | (pixel & 1), eight times, then store acc
//   unpack: pixel = -((byte >> 7) & 1); byte = (byte << 1) & 0xFF, eight times
// Pixels at byte 0x000, packed bytes at 0x800, unpacked pixels at 0x1000. The packed
// bytes are compared with a model computed here, the unpacked image with the original,
// and the cycle count with the pipeline's arithmetic (one cycle per instruction, 3
// squashed slots per taken BNEZ, first instruction in EX in cycle 3).
// The custom instructions that accelerate these kernels are not modelled (their
// functions are not published), so these are the kernels' base-instruction versions.
module tb_byorisc_htpack;
  import byorisc_pkg::*;
  import byorisc_asm_pkg::*;

  localparam int NPIX = 512;
  localparam int NB   = NPIX / 8;

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

  localparam int SRC = 1, DST = 2, NLEFT = 3, CNT = 4, ACC = 5, P = 6, ONE = 7, EIGHT = 8,
                 MASK = 9, ZERO = 10, T = 11;

  logic [7:0] pix [NPIX];
  logic [7:0] packed_exp [NB];

  initial begin
    int setup, pk_head, pk_body, pk_tail, up_setup, up_head, up_body, up_tail, slots, exp_cyc;
    int l_outer, l_inner;
    // ---------------- pack ----------------
    emit(imm(OP_LLI, SRC, 0)); emit(imm(OP_LLI, DST, 32'h800)); emit(imm(OP_LLI, NLEFT, NB));
    emit(imm(OP_LLI, ONE, 1)); emit(imm(OP_LLI, EIGHT, 8)); emit(imm(OP_LLI, MASK, 32'hFF));
    emit(imm(OP_LLI, ZERO, 0));
    setup = prog.size();
    l_outer = prog.size();
    emit(imm(OP_LLI, CNT, 8));
    emit(imm(OP_LLI, ACC, 0));
    pk_head = prog.size() - l_outer;
    l_inner = prog.size();
    emit(ld(OP_LBU, P, SRC));
    emit(r3(OP_ADD, SRC, SRC, ONE));               // load delay slot
    emit(sh(OP_SLL, ACC, ACC, 1));
    emit(r3(OP_AND, P, P, ONE));
    emit(r3(OP_OR, ACC, ACC, P));
    emit(r3(OP_SUB, CNT, CNT, ONE));
    emit(imm(OP_BNEZ, CNT, 32'(l_inner - (prog.size() + 1))));
    pk_body = prog.size() - l_inner;
    pk_tail = prog.size();
    emit(st(OP_SB, DST, ACC));
    emit(r3(OP_ADD, DST, DST, ONE));
    emit(r3(OP_SUB, NLEFT, NLEFT, ONE));
    emit(imm(OP_BNEZ, NLEFT, 32'(l_outer - (prog.size() + 1))));
    pk_tail = prog.size() - pk_tail;
    // ---------------- unpack ----------------
    up_setup = prog.size();
    emit(imm(OP_LLI, SRC, 32'h800)); emit(imm(OP_LLI, DST, 32'h1000)); emit(imm(OP_LLI, NLEFT, NB));
    up_setup = prog.size() - up_setup;
    l_outer = prog.size();
    emit(ld(OP_LBU, ACC, SRC));
    emit(imm(OP_LLI, CNT, 8));                     // load delay slot
    emit(r3(OP_ADD, SRC, SRC, ONE));
    up_head = prog.size() - l_outer;
    l_inner = prog.size();
    emit(sh(OP_SRL, T, ACC, 7));
    emit(r3(OP_AND, T, T, ONE));
    emit(r3(OP_SUB, T, ZERO, T));
    emit(st(OP_SB, DST, T));
    emit(sh(OP_SLL, ACC, ACC, 1));
    emit(r3(OP_AND, ACC, ACC, MASK));
    emit(r3(OP_ADD, DST, DST, ONE));
    emit(r3(OP_SUB, CNT, CNT, ONE));
    emit(imm(OP_BNEZ, CNT, 32'(l_inner - (prog.size() + 1))));
    up_body = prog.size() - l_inner;
    up_tail = prog.size();
    emit(r3(OP_SUB, NLEFT, NLEFT, ONE));
    emit(imm(OP_BNEZ, NLEFT, 32'(l_outer - (prog.size() + 1))));
    up_tail = prog.size() - up_tail;
    emit(jmp(OP_HALT, 0));

    // ---------------- image and reference ----------------
    for (int i = 0; i < NPIX; i++) pix[i] = ($urandom_range(0, 1) != 0) ? 8'hFF : 8'h00;
    for (int b = 0; b < NB; b++)
      for (int k = 0; k < 8; k++) packed_exp[b][7 - k] = pix[8 * b + k][0];

    // ---------------- load and run ----------------
    @(negedge clk);
    for (int i = 0; i < prog.size(); i++) begin
      imem_we = 1; imem_waddr = 11'(i); imem_wdata = prog[i]; @(negedge clk);
    end
    imem_we = 0;
    host_en = 1; host_we = 1;
    for (int w = 0; w < NPIX / 4; w++) begin
      host_addr = 11'(w);
      host_wdata = {pix[4 * w + 3], pix[4 * w + 2], pix[4 * w + 1], pix[4 * w]};
      @(negedge clk);
      host_addr = 11'(32'h400 + w); host_wdata = 32'h5A5A_5A5A; @(negedge clk);
    end
    for (int w = 0; w < NB / 4; w++) begin
      host_addr = 11'(32'h200 + w); host_wdata = 32'hA5A5_A5A5; @(negedge clk);
    end
    host_en = 0; host_we = 0;
    rst = 0;
    wait (halted);
    repeat (4) @(negedge clk);
    for (int w = 0; w < NB / 4; w++) begin
      host_en = 1; host_addr = 11'(32'h200 + w); @(negedge clk);
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (host_rdata[8 * k +: 8] !== packed_exp[4 * w + k]) begin
          failures++;
          $display("FAIL packed byte %0d got %h exp %h", 4 * w + k, host_rdata[8 * k +: 8], packed_exp[4 * w + k]);
        end
      end
    end
    for (int w = 0; w < NPIX / 4; w++) begin
      host_en = 1; host_addr = 11'(32'h400 + w); @(negedge clk);
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (host_rdata[8 * k +: 8] !== pix[4 * w + k]) begin
          failures++;
          $display("FAIL unpacked pixel %0d got %h exp %h", 4 * w + k, host_rdata[8 * k +: 8], pix[4 * w + k]);
        end
      end
    end
    host_en = 0;

    slots = setup + NB * (pk_head + 8 * pk_body + 7 * 3 + pk_tail) + (NB - 1) * 3
          + up_setup + NB * (up_head + 8 * up_body + 7 * 3 + up_tail) + (NB - 1) * 3;
    exp_cyc = 3 + slots + 1;
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("FAIL cycles %0d exp %0d", cyc, exp_cyc); end
    $display("htpack+htunpack: %0d pixels packed and unpacked in %0d cycles", NPIX, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
