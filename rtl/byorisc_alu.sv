// byorisc_alu: integer ALU of the ByoRISC execute stage.
//
// Combinational. Computes y = f(a, b) for the arithmetic (ADD/ADDU/SUB/SUBU), logical
// (AND/OR/XOR/NOR) and set (SEQ/SNE/SLT/SLTU/SLE/SLEU) groups, and the halfword immediate loads:
// LLI (y = zero-extended imm), LHI (y = imm << 16) and LOLI (y = a | zero-extended imm).
// ALU_LINK returns pc + 1 for JAL.
// Interface: op selects the function, a is read port 0 (rs) or, for LOLI, the rt operand,
// b is read port 1 (rt), imm is the 16-bit immediate, pc the word address of the instruction.
// The instruction groups follow Table 1 of the paper. Without exceptions the signed
// and unsigned add/sub give the same word; that, the zero extension in LLI and the
// exact LHI/LOLI semantics are this design's reading of "lower/upper/lower with OR".
module byorisc_alu
  import byorisc_pkg::*;
#(
  parameter int unsigned PCW = 11
) (
  input  alu_op_e        op,
  input  word_t          a,
  input  word_t          b,
  input  logic [15:0]    imm,
  input  logic [PCW-1:0] pc,
  output word_t          y
);
  always_comb begin
    unique case (op)
      ALU_ADD:  y = a + b;
      ALU_SUB:  y = a - b;
      ALU_AND:  y = a & b;
      ALU_OR:   y = a | b;
      ALU_XOR:  y = a ^ b;
      ALU_NOR:  y = ~(a | b);
      ALU_SLT:  y = {31'b0, $signed(a) < $signed(b)};
      ALU_SLTU: y = {31'b0, a < b};
      ALU_SEQ:  y = {31'b0, a == b};
      ALU_SNE:  y = {31'b0, a != b};
      ALU_SLE:  y = {31'b0, $signed(a) <= $signed(b)};
      ALU_SLEU: y = {31'b0, a <= b};
      ALU_LLI:  y = {16'b0, imm};
      ALU_LHI:  y = {imm, 16'b0};
      ALU_LOLI: y = a | {16'b0, imm};
      ALU_LINK: y = word_t'(pc) + 32'd1;
      default:  y = '0;
    endcase
  end
endmodule
