// tb_byorisc_decoder: directed decode of each base instruction class (unit, operation,
// read/write addresses and enables) and of a CI taking its vectors from the SID fields.
// The main decoder has every optional group on, the auxiliary compares (OPT_SET) included.
// A second decoder with every optional instruction group switched off must decode the
// opcodes of those groups as no-operations and still decode the minimal instructions.
module tb_byorisc_decoder;
  import byorisc_pkg::*;
  import byorisc_asm_pkg::*;
  word_t inst; logic is_ci = 0;
  logic [7:0][7:0] sid_dst, sid_src, raddr, waddr; logic [7:0] sid_we_v, sid_re_v, re, we;
  ctrl_t ctrl;
  int checks = 0, failures = 0;
  byorisc_decoder #(.OPT_SET(1'b1)) dut (.*);   // every group on, auxiliary compares included
  ctrl_t ctrl_m; logic [7:0][7:0] raddr_m, waddr_m; logic [7:0] re_m, we_m;
  byorisc_decoder #(.OPT_LS(1'b0), .OPT_SHIFT(1'b0), .OPT_MUL(1'b0), .OPT_LOGIC(1'b0), .OPT_SET(1'b0)) dut_min (
    .inst, .is_ci, .sid_dst, .sid_we_v, .sid_src, .sid_re_v,
    .ctrl(ctrl_m), .raddr(raddr_m), .re(re_m), .waddr(waddr_m), .we(we_m));
  task automatic chk(string w, int got, int exp);
    checks++; if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", w, got, exp); end
  endtask
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  opcode_e opt_ops[] = '{OP_LB, OP_LBU, OP_LH, OP_LHU, OP_SB, OP_SH, OP_SRA, OP_SRL, OP_SLL,
                         OP_MUL, OP_MULU, OP_NOR, OP_SEQ, OP_SNE, OP_SLE, OP_SLEU};
  opcode_e req_ops[] = '{OP_ADD, OP_ADDU, OP_SUB, OP_SUBU, OP_AND, OP_OR, OP_XOR, OP_LW, OP_SW,
                         OP_LLI, OP_LHI, OP_LOLI, OP_SRAV, OP_SRLV, OP_SLLV, OP_SLT, OP_SLTU,
                         OP_J, OP_JR, OP_BNEZ, OP_BEQZ, OP_HALT};
  initial begin
    for (int k = 0; k < 8; k++) begin sid_dst[k] = 8'(100 + k); sid_src[k] = 8'(10 + k); end
    sid_we_v = 8'h5A; sid_re_v = 8'hC3;
    inst = r3(OP_SUB, 9, 3, 4); #1;
    chk("sub exu", ctrl.exu, EXU_ALU); chk("sub op", ctrl.alu_op, ALU_SUB);
    inst = r3(OP_SEQ, 9, 3, 4); #1;  chk("seq op", ctrl.alu_op, ALU_SEQ);  chk("seq we", we[0], 1);
    inst = r3(OP_SNE, 9, 3, 4); #1;  chk("sne op", ctrl.alu_op, ALU_SNE);  chk("sne re", re[1:0], 3);
    inst = r3(OP_SLE, 9, 3, 4); #1;  chk("sle op", ctrl.alu_op, ALU_SLE);  chk("sle rd", waddr[0], 9);
    inst = r3(OP_SLEU, 9, 3, 4); #1; chk("sleu op", ctrl.alu_op, ALU_SLEU); chk("sleu exu", ctrl.exu, EXU_ALU);
    chk("sub rs", raddr[0], 3); chk("sub rt", raddr[1], 4); chk("sub re", re, 3);
    chk("sub rd", waddr[0], 9); chk("sub we", we, 1);
    inst = sh(OP_SRA, 7, 6, 12); #1;
    chk("sra exu", ctrl.exu, EXU_SHIFT); chk("sra op", ctrl.sh_op, SH_SRA); chk("sra imm", ctrl.sh_imm, 1);
    chk("sra rt", raddr[1], 6); chk("sra re", re, 2); chk("sra rd", waddr[0], 7); chk("sra amt", ctrl.imm[4:0], 12);
    inst = r3(OP_SLLV, 7, 2, 6); #1;
    chk("sllv op", ctrl.sh_op, SH_SLL); chk("sllv imm", ctrl.sh_imm, 0); chk("sllv re", re, 3);
    inst = r3(OP_MULU, 1, 2, 3); #1;
    chk("mul exu", ctrl.exu, EXU_MUL); chk("mul we", we, 1);
    inst = imm(OP_LOLI, 33, 16'hBEEF); #1;
    chk("loli op", ctrl.alu_op, ALU_LOLI); chk("loli src", raddr[0], 33); chk("loli re", re, 1);
    chk("loli dst", waddr[0], 33); chk("loli imm", ctrl.imm, 16'hBEEF);
    inst = imm(OP_LHI, 34, 1); #1;
    chk("lhi op", ctrl.alu_op, ALU_LHI); chk("lhi re", re, 0); chk("lhi dst", waddr[0], 34);
    inst = ld(OP_LHU, 5, 6); #1;
    chk("lhu mem", ctrl.mem_op, MEM_LHU); chk("lhu addr reg", raddr[0], 6); chk("lhu dst", waddr[0], 5); chk("lhu we", we, 1);
    inst = st(OP_SB, 6, 7); #1;
    chk("sb mem", ctrl.mem_op, MEM_SB); chk("sb addr", raddr[0], 6); chk("sb data", raddr[1], 7); chk("sb we", we, 0);
    inst = jmp(OP_JAL, 100); #1;
    chk("jal op", ctrl.alu_op, ALU_LINK); chk("jal dst", waddr[0], 31); chk("jal we", we, 1);
    inst = r3(OP_JR, 0, 31, 0); #1;
    chk("jr br", ctrl.br, BR_JR); chk("jr reg", raddr[0], 31); chk("jr re", re, 1);
    inst = imm(OP_BNEZ, 44, -3); #1;
    chk("bnez br", ctrl.br, BR_BNEZ); chk("bnez reg", raddr[0], 44); chk("bnez we", we, 0);
    inst = jmp(OP_HALT, 0); #1;
    chk("halt", ctrl.halt, 1); chk("halt we", we, 0);
    inst = 32'h3F000000; #1;
    chk("unknown exu", ctrl.exu, EXU_NONE); chk("unknown we", we, 0);
    // minimal configuration: optional groups removed, the 22 required instructions kept
    foreach (opt_ops[i]) begin
      inst = (opt_ops[i] inside {OP_SB, OP_SH}) ? st(opt_ops[i], 3, 4) : r3(opt_ops[i], 9, 3, 4); #1;
      chk($sformatf("min %s exu", opt_ops[i].name()), ctrl_m.exu, EXU_NONE);
      chk($sformatf("min %s mem", opt_ops[i].name()), ctrl_m.mem_op, MEM_NONE);
      chk($sformatf("min %s re/we", opt_ops[i].name()), {re_m, we_m}, 0);
      chk($sformatf("full %s decoded", opt_ops[i].name()), (ctrl.exu != EXU_NONE) || (ctrl.mem_op != MEM_NONE), 1);
    end
    foreach (req_ops[i]) begin
      inst = r3(req_ops[i], 9, 3, 4); #1;
      chk($sformatf("min %s same as full", req_ops[i].name()), {ctrl_m, raddr_m, re_m, waddr_m, we_m} == {ctrl, raddr, re, waddr, we}, 1);
    end
    inst = ci(8'h41, 5); is_ci = 1; #1;
    chk("ci exu", ctrl.exu, EXU_CI); chk("ci op", ctrl.ci_op, 8'h41);
    chk("ci re", re, 8'hC3); chk("ci we", we, 8'h5A);
    for (int k = 0; k < 8; k++) begin chk("ci src", raddr[k], 10 + k); chk("ci dst", waddr[k], 100 + k); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
