// byorisc_pc_unit: program counter and next-PC selection of the IF stage.
//
// The PC counts 32-bit instruction words and addresses the instruction memory directly.
// Each cycle the next PC is, in priority order:
//   late_redirect  taken branch or JR resolved in EX (or MEM when BR_EARLY = 0): late_target
//   id_redirect    J/JAL decoded in ID: id_target
//   hold           pipeline stalled or processor halted: the PC keeps its value
//   otherwise      pc + 1
// Reset sets the PC to RESET_PC. The older (later-stage) redirect wins because the
// instruction that asked for the younger one is on the wrong path.
// The IF-stage PC calculation follows the paper (Fig. 4); the ZOLC target input is not
// built. Word addressing and the reset value are this design's own.
module byorisc_pc_unit #(
  parameter int unsigned PCW      = 11,
  parameter logic [PCW-1:0] RESET_PC = '0
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           hold,
  input  logic           id_redirect,
  input  logic [PCW-1:0] id_target,
  input  logic           late_redirect,
  input  logic [PCW-1:0] late_target,
  output logic [PCW-1:0] pc
);
  logic [PCW-1:0] pc_next;

  always_comb begin
    if (late_redirect)    pc_next = late_target;
    else if (id_redirect) pc_next = id_target;
    else if (hold)        pc_next = pc;
    else                  pc_next = pc + PCW'(1);
  end

  always_ff @(posedge clk) begin
    if (rst) pc <= RESET_PC;
    else     pc <= pc_next;
  end
endmodule
