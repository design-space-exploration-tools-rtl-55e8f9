// byorisc_branch_unit: control-transfer evaluation.
//
// Combinational. In ID it serves J/JAL ("early" signalling, Fig. 4 of the paper): the
// target is the absolute 24-bit address field, truncated to the PC width. In EX it
// serves BEQZ/BNEZ (taken when the tested register is / is not zero, target
// pc + 1 + sign-extended 16-bit word offset) and JR (target = register value)
// ("late" signalling).
// The PC counts 32-bit instruction words. The split into early jumps and late
// branches follows Fig. 4. The encoding, the word-addressed PC and the PC-relative offset
// base are this design's own.
module byorisc_branch_unit
  import byorisc_pkg::*;
#(
  parameter int unsigned PCW = 11
) (
  // ID side: direct jumps
  input  logic [OW-1:0]  id_op,
  input  logic [23:0]    id_addr,
  output logic           id_jump,
  output logic [PCW-1:0] id_target,
  // EX side: branches and indirect jump
  input  br_e            ex_br,
  input  word_t          ex_val,
  input  logic [15:0]    ex_imm,
  input  logic [PCW-1:0] ex_pc,
  output logic           ex_taken,
  output logic [PCW-1:0] ex_target
);
  always_comb begin
    id_jump   = (id_op == OP_J) || (id_op == OP_JAL);
    id_target = id_addr[PCW-1:0];

    unique case (ex_br)
      BR_BEQZ: ex_taken = (ex_val == '0);
      BR_BNEZ: ex_taken = (ex_val != '0);
      BR_JR:   ex_taken = 1'b1;
      default: ex_taken = 1'b0;
    endcase
    if (ex_br == BR_JR) ex_target = ex_val[PCW-1:0];
    else                ex_target = ex_pc + PCW'(1) + PCW'($signed(ex_imm));
  end
endmodule
