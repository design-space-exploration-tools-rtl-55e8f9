// byorisc_shifter: the execute-stage shifter, in one of three topologies.
//
// Combinational; all three give the same result y for op (SLL/SRL/SRA), value x and
// amount s (only the low 5 bits are used, as in the paper's shamt field description).
//   SHF_FUNNEL (default, the evaluated configuration): a 64-bit word {hi, lo} is shifted
//     right by a 6-bit amount and the low 32 bits are kept. Logical right: {0, x} >> s.
//     Arithmetic right: {sign(x)*32, x} >> s. Left: {x, 0} >> (32 - s). One
//     right-shifting network serves all three shifts.
//   SHF_BARREL: a logarithmic right shifter, five stages of 2:1 multiplexers shifting by
//     16, 8, 4, 2 and 1 under control of one amount bit each, filling with the sign for
//     SRA; a left shift reverses the bit order before and after the network.
//   SHF_DEDICATED: three separate shifters, one per shift type, and an output
//     multiplexer.
// The paper names the three topologies as a configuration option (funnel, barrel,
// dedicated) and uses the funnel one; how each is built here is this design's own.
module byorisc_shifter
  import byorisc_pkg::*;
#(
  parameter shifter_tpl_e TPL = SHF_FUNNEL
) (
  input  shift_op_e  op,
  input  word_t      x,
  input  logic [4:0] s,
  output word_t      y
);
  if (TPL == SHF_BARREL) begin : g_barrel
    word_t in_r, out_r;
    logic  fill;

    always_comb begin
      fill = (op == SH_SRA) && x[31];
      in_r = (op == SH_SLL) ? {<<{x}} : x;
      out_r = in_r;
      for (int k = 4; k >= 0; k--)
        if (s[k]) out_r = (out_r >> (1 << k)) | ({32{fill}} << (32 - (1 << k)));
      y = (op == SH_SLL) ? {<<{out_r}} : out_r;
    end
  end else if (TPL == SHF_DEDICATED) begin : g_dedicated
    word_t y_sll, y_srl, y_sra;

    assign y_sll = x << s;
    assign y_srl = x >> s;
    assign y_sra = word_t'($signed(x) >>> s);
    assign y     = (op == SH_SLL) ? y_sll : (op == SH_SRA) ? y_sra : y_srl;
  end else begin : g_funnel
    logic [63:0] funnel;
    logic [5:0]  amt;
    logic [63:0] shifted;

    always_comb begin
      unique case (op)
        SH_SLL:  begin funnel = {x, 32'b0};        amt = 6'd32 - {1'b0, s}; end
        SH_SRA:  begin funnel = {{32{x[31]}}, x};  amt = {1'b0, s};         end
        default: begin funnel = {32'b0, x};        amt = {1'b0, s};         end
      endcase
      shifted = funnel >> amt;
      y = shifted[31:0];
    end
  end
endmodule
