// byorisc_decoder: ID-stage decoding of base instructions, merged with SID output for CIs.
//
// Combinational. For a base instruction it derives the execute-stage control word and
// the register operand vectors from the fixed fields of the word; for a custom
// instruction (is_ci from the SID stage) it passes on the addresses and enables that the
// SID table returned for this occurrence. Read port 0 and 1 and write lane 0 serve base
// instructions:
//   R-fmt  rd = rs op rt               port0 = rs, port1 = rt, lane0 = rd
//   SxxV   rd = rt shift rs[4:0]       port0 = rs, port1 = rt, lane0 = rd
//   S-fmt  rd = rt shift shamt[4:0]    port1 = rt, lane0 = rd
//   LLI/LHI rt = imm (low / high half), LOLI rt = rt | imm   port0 = rt, lane0 = rt
//   loads  rd = MEM[rs]                port0 = rs, lane0 = rd
//   stores MEM[rs] = rt                port0 = rs, port1 = rt
//   BEQZ/BNEZ on rt, offset imm        port0 = rt
//   JR rs                              port0 = rs
//   JAL                                lane0 = r31 (link = pc + 1)
// Unknown base opcodes decode as no-operation.
// Follows the paper: field positions of Fig. 2, the instruction list of the evaluated
// configuration (no DIV, CVT or auxiliary compares unless OPT_SET), register-direct addressing for loads and
// stores ("The basic addressing mode for these instructions is register direct"), and the
// use of the SID entry for CI operands. The operand-to-port mapping is this design's own.
// Optional instruction groups (the paper's OPT_* switches) can be left out; an opcode of a
// group that is switched off decodes as a no-operation:
//   OPT_LS    LB, LBU, LH, LHU, SB, SH  (load/store of small data types)
//   OPT_SHIFT SRA, SRL, SLL             (shift by an immediate)
//   OPT_MUL   MUL, MULU
//   OPT_LOGIC NOR                       (logical beyond AND/OR/XOR)
//   OPT_SET   SEQ, SNE, SLE, SLEU       (comparisons beyond SLT/SLTU; off by default, as in
//                                        the evaluated core, which omits the auxiliary ones)
// Which instructions fall in each group is this design's reading of the group names
// against the paper's list of the 22 instructions every ByoRISC must have.
module byorisc_decoder
  import byorisc_pkg::*;
#(
  parameter int unsigned NRD = 8,
  parameter int unsigned NWR = 8,
  parameter bit          OPT_LS    = 1'b1,
  parameter bit          OPT_SHIFT = 1'b1,
  parameter bit          OPT_MUL   = 1'b1,
  parameter bit          OPT_LOGIC = 1'b1,
  parameter bit          OPT_SET   = 1'b0
) (
  input  word_t                    inst,
  input  logic                     is_ci,
  input  logic [NWR-1:0][RAW-1:0]  sid_dst,
  input  logic [NWR-1:0]           sid_we_v,
  input  logic [NRD-1:0][RAW-1:0]  sid_src,
  input  logic [NRD-1:0]           sid_re_v,
  output ctrl_t                    ctrl,
  output logic [NRD-1:0][RAW-1:0]  raddr,
  output logic [NRD-1:0]           re,
  output logic [NWR-1:0][RAW-1:0]  waddr,
  output logic [NWR-1:0]           we
);
  logic [OW-1:0] op;
  assign op = f_op(inst);

  // opcode belongs to an optional group that this configuration leaves out
  function automatic logic left_out(input logic [OW-1:0] o);
    return (!OPT_LS    && (o inside {OP_LB, OP_LBU, OP_LH, OP_LHU, OP_SB, OP_SH})) ||
           (!OPT_SHIFT && (o inside {OP_SRA, OP_SRL, OP_SLL}))                     ||
           (!OPT_MUL   && (o inside {OP_MUL, OP_MULU}))                            ||
           (!OPT_LOGIC && (o == OP_NOR))                                          ||
           (!OPT_SET   && (o inside {OP_SEQ, OP_SNE, OP_SLE, OP_SLEU}));
  endfunction

  always_comb begin
    ctrl        = '0;
    ctrl.exu    = EXU_NONE;
    ctrl.alu_op = ALU_ADD;
    ctrl.sh_op  = SH_SLL;
    ctrl.mem_op = MEM_NONE;
    ctrl.br     = BR_NONE;
    ctrl.imm    = f_imm(inst);
    ctrl.ci_op  = op;
    raddr = '0;
    re    = '0;
    waddr = '0;
    we    = '0;

    if (is_ci) begin
      ctrl.exu = EXU_CI;
      raddr    = sid_src;
      re       = sid_re_v;
      waddr    = sid_dst;
      we       = sid_we_v;
    end else if (!left_out(op)) begin
      // common R-fmt operand routing, overridden below where needed
      raddr[0] = f_rs(inst);
      raddr[1] = f_rt(inst);
      waddr[0] = f_rd(inst);
      unique case (op)
        OP_ADD, OP_ADDU, OP_SUB, OP_SUBU, OP_AND, OP_OR, OP_XOR, OP_NOR, OP_SLT, OP_SLTU,
        OP_SEQ, OP_SNE, OP_SLE, OP_SLEU: begin
          ctrl.exu = EXU_ALU;
          re[1:0] = 2'b11; we[0] = 1'b1;
          unique case (op)
            OP_SUB, OP_SUBU: ctrl.alu_op = ALU_SUB;
            OP_AND:          ctrl.alu_op = ALU_AND;
            OP_OR:           ctrl.alu_op = ALU_OR;
            OP_XOR:          ctrl.alu_op = ALU_XOR;
            OP_NOR:          ctrl.alu_op = ALU_NOR;
            OP_SLT:          ctrl.alu_op = ALU_SLT;
            OP_SLTU:         ctrl.alu_op = ALU_SLTU;
            OP_SEQ:          ctrl.alu_op = ALU_SEQ;
            OP_SNE:          ctrl.alu_op = ALU_SNE;
            OP_SLE:          ctrl.alu_op = ALU_SLE;
            OP_SLEU:         ctrl.alu_op = ALU_SLEU;
            default:         ctrl.alu_op = ALU_ADD;
          endcase
        end
        OP_SRAV, OP_SRLV, OP_SLLV, OP_SRA, OP_SRL, OP_SLL: begin
          ctrl.exu    = EXU_SHIFT;
          ctrl.sh_imm = op inside {OP_SRA, OP_SRL, OP_SLL};
          ctrl.sh_op  = (op inside {OP_SRAV, OP_SRA}) ? SH_SRA :
                        (op inside {OP_SRLV, OP_SRL}) ? SH_SRL : SH_SLL;
          re[1:0] = ctrl.sh_imm ? 2'b10 : 2'b11;
          we[0] = 1'b1;
        end
        OP_MUL, OP_MULU: begin
          ctrl.exu = EXU_MUL;
          re[1:0] = 2'b11; we[0] = 1'b1;
        end
        OP_LLI, OP_LHI, OP_LOLI: begin
          ctrl.exu    = EXU_ALU;
          ctrl.alu_op = (op == OP_LLI) ? ALU_LLI : (op == OP_LHI) ? ALU_LHI : ALU_LOLI;
          raddr[0] = f_rt(inst);
          re[0]    = (op == OP_LOLI);
          waddr[0] = f_rt(inst);
          we[0]    = 1'b1;
        end
        OP_LW, OP_LB, OP_LBU, OP_LH, OP_LHU: begin
          ctrl.mem_op = (op == OP_LW) ? MEM_LW : (op == OP_LB) ? MEM_LB :
                        (op == OP_LBU) ? MEM_LBU : (op == OP_LH) ? MEM_LH : MEM_LHU;
          re[0] = 1'b1; we[0] = 1'b1;
        end
        OP_SW, OP_SB, OP_SH: begin
          ctrl.mem_op = (op == OP_SW) ? MEM_SW : (op == OP_SB) ? MEM_SB : MEM_SH;
          re[1:0] = 2'b11;
        end
        OP_JAL: begin
          ctrl.exu    = EXU_ALU;
          ctrl.alu_op = ALU_LINK;
          waddr[0]    = LINK_REG;
          we[0]       = 1'b1;
        end
        OP_JR: begin
          ctrl.br = BR_JR;
          re[0]   = 1'b1;
        end
        OP_BEQZ, OP_BNEZ: begin
          ctrl.br  = (op == OP_BEQZ) ? BR_BEQZ : BR_BNEZ;
          raddr[0] = f_rt(inst);
          re[0]    = 1'b1;
        end
        OP_HALT: ctrl.halt = 1'b1;
        default: ;
      endcase
    end
  end
endmodule
