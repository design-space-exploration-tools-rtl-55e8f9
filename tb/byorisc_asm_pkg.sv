// byorisc_asm_pkg: instruction encoders used by the processor testbenches.
//
// Each function returns one 32-bit ByoRISC instruction word in the field layout
// opcode[31:24] | rt[23:16] | rd[15:8] | rs[7:0]  (R/S-fmt),
// opcode | rt | imm[15:0] (I-fmt), opcode | addr[23:0] (J-fmt), opcode | ciocc (B-fmt),
// plus a helper that packs one SID table entry
// (dst_0..dst_7 | we_v | src_0..src_7 | re_v, most significant first).
package byorisc_asm_pkg;
  import byorisc_pkg::*;

  function automatic word_t r3(opcode_e op, int rd, int rs, int rt);
    return {op, 8'(rt), 8'(rd), 8'(rs)};
  endfunction
  function automatic word_t sh(opcode_e op, int rd, int rt, int shamt);
    return {op, 8'(rt), 8'(rd), 8'(shamt)};
  endfunction
  function automatic word_t imm(opcode_e op, int rt, int value);
    return {op, 8'(rt), 16'(value)};
  endfunction
  function automatic word_t jmp(opcode_e op, int addr);
    return {op, 24'(addr)};
  endfunction
  function automatic word_t ci(logic [7:0] op, int ciocc);
    return {op, 24'(ciocc)};
  endfunction
  // load rd = MEM[rs]; store MEM[rs] = rt
  function automatic word_t ld(opcode_e op, int rd, int rs);
    return {op, 8'd0, 8'(rd), 8'(rs)};
  endfunction
  function automatic word_t st(opcode_e op, int rs, int rt);
    return {op, 8'(rt), 8'd0, 8'(rs)};
  endfunction
  function automatic word_t nop();
    return 32'h0;
  endfunction

  // SID entry for 8 inputs / 8 outputs, 8-bit register addresses (144 bits)
  function automatic logic [143:0] sid_entry(int dst[8], logic [7:0] we_v,
                                             int src[8], logic [7:0] re_v);
    logic [143:0] e;
    e = '0;
    for (int k = 0; k < 8; k++) e[143 - 8*k -: 8] = 8'(dst[k]);
    e[79:72] = we_v;
    for (int k = 0; k < 8; k++) e[71 - 8*k -: 8] = 8'(src[k]);
    e[7:0] = re_v;
    return e;
  endfunction
endpackage
