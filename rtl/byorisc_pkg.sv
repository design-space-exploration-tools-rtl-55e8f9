// byorisc_pkg: types and constants shared by the ByoRISC core.
//
// Holds the default configuration (32-bit words, 256 registers, 8 read and 8 write
// register-file ports, two execution stages EX and MEM), the instruction field positions,
// the primary opcode map and the control word that the decoder hands to the execute stage.
//
// Follows the paper: word length, register count, port counts, the number of execution
// stages, the instruction field layout (opcode in the top byte, every field on a byte
// boundary) and the rule that CIs are told apart from base instructions by the opcode MSBs
// (64 base opcodes, 192 left for CIs).
// Own choices: the numeric value of every opcode, the link register of JAL (r31) and the
// two sample CI opcodes (0x40 permutation, 0x41 fsdither1).
package byorisc_pkg;

  // ---------------- configuration defaults ----------------
  localparam int unsigned DW    = 32;   // data word width
  localparam int unsigned NR    = 256;  // physical registers
  localparam int unsigned RAW   = 8;    // register address width, log2(NR)
  localparam int unsigned NRP   = 8;    // register file read ports (n_i)
  localparam int unsigned NWP   = 8;    // register file write ports (n_o)
  localparam int unsigned NPIPE = 2;    // execution stages (EX, MEM)
  localparam int unsigned OW    = 8;    // opcode width

  typedef logic [DW-1:0]  word_t;
  typedef logic [RAW-1:0] raddr_t;

  // ---------------- primary opcodes (this design's numbering) ----------------
  // Base instructions occupy 0x00-0x3F; any opcode with a non-zero value in its two MSBs
  // is a custom instruction (B-fmt).
  typedef enum logic [OW-1:0] {
    OP_NOP  = 8'h00,
    OP_ADD  = 8'h01, OP_ADDU = 8'h02, OP_SUB  = 8'h03, OP_SUBU = 8'h04,
    OP_AND  = 8'h05, OP_OR   = 8'h06, OP_XOR  = 8'h07, OP_NOR  = 8'h08,
    OP_SLT  = 8'h09, OP_SLTU = 8'h0A,
    OP_SRAV = 8'h0B, OP_SRLV = 8'h0C, OP_SLLV = 8'h0D,
    OP_SRA  = 8'h0E, OP_SRL  = 8'h0F, OP_SLL  = 8'h10,
    OP_MUL  = 8'h11, OP_MULU = 8'h12,
    OP_LLI  = 8'h13, OP_LHI  = 8'h14, OP_LOLI = 8'h15,
    OP_LW   = 8'h16, OP_LB   = 8'h17, OP_LBU  = 8'h18, OP_LH = 8'h19, OP_LHU = 8'h1A,
    OP_SW   = 8'h1B, OP_SB   = 8'h1C, OP_SH   = 8'h1D,
    OP_J    = 8'h1E, OP_JR   = 8'h1F, OP_JAL  = 8'h20,
    OP_BEQZ = 8'h21, OP_BNEZ = 8'h22,
    OP_HALT = 8'h23,
    OP_SEQ  = 8'h24, OP_SNE  = 8'h25, OP_SLE  = 8'h26, OP_SLEU = 8'h27
  } opcode_e;

  localparam logic [OW-1:0] CI_PERM      = 8'h40; // skeleton CI: 8-to-8 permutation
  localparam logic [OW-1:0] CI_FSDITHER1 = 8'h41; // fsdither1 CI with data memory access

  localparam raddr_t LINK_REG = 8'd31;            // JAL destination

  function automatic logic is_ci_opcode(input logic [OW-1:0] op);
    return op[OW-1:OW-2] != 2'b00;
  endfunction

  // ---------------- instruction fields (Fig. 2 layout) ----------------
  //   R-fmt: opcode[31:24] rt[23:16] rd[15:8] rs[7:0]
  //   S-fmt: opcode rt rd shamt[7:0]
  //   I-fmt: opcode rt imm[15:0]
  //   J-fmt: opcode addr[23:0]
  //   B-fmt: opcode ciocc[23:0]
  function automatic logic [OW-1:0] f_op(input word_t i);    return i[31:24]; endfunction
  function automatic raddr_t        f_rt(input word_t i);    return i[23:16]; endfunction
  function automatic raddr_t        f_rd(input word_t i);    return i[15:8];  endfunction
  function automatic raddr_t        f_rs(input word_t i);    return i[7:0];   endfunction
  function automatic logic [15:0]   f_imm(input word_t i);   return i[15:0];  endfunction
  function automatic logic [23:0]   f_addr(input word_t i);  return i[23:0];  endfunction

  // ---------------- execute-stage control ----------------
  typedef enum logic [2:0] {EXU_NONE, EXU_ALU, EXU_SHIFT, EXU_MUL, EXU_CI} exu_e;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_AND, ALU_OR, ALU_XOR, ALU_NOR,
    ALU_SLT, ALU_SLTU, ALU_LLI, ALU_LHI, ALU_LOLI, ALU_LINK,
    ALU_SEQ, ALU_SNE, ALU_SLE, ALU_SLEU
  } alu_op_e;

  typedef enum logic [1:0] {SH_SLL, SH_SRL, SH_SRA} shift_op_e;

  // shifter topology (funnel is the evaluated one)
  typedef enum logic [1:0] {SHF_FUNNEL, SHF_BARREL, SHF_DEDICATED} shifter_tpl_e;

  typedef enum logic [3:0] {
    MEM_NONE, MEM_LW, MEM_LB, MEM_LBU, MEM_LH, MEM_LHU, MEM_SW, MEM_SB, MEM_SH
  } mem_op_e;

  typedef enum logic [1:0] {BR_NONE, BR_BEQZ, BR_BNEZ, BR_JR} br_e;

  function automatic logic is_load(input mem_op_e m);
    return m inside {MEM_LW, MEM_LB, MEM_LBU, MEM_LH, MEM_LHU};
  endfunction
  function automatic logic is_store(input mem_op_e m);
    return m inside {MEM_SW, MEM_SB, MEM_SH};
  endfunction

  // Control word produced in ID and carried by the ID/EX register.
  typedef struct packed {
    exu_e            exu;
    alu_op_e         alu_op;
    shift_op_e       sh_op;
    logic            sh_imm;     // shift amount from the shamt field
    mem_op_e         mem_op;
    br_e             br;
    logic            halt;
    logic [OW-1:0]   ci_op;
    logic [15:0]     imm;
  } ctrl_t;

endpackage
