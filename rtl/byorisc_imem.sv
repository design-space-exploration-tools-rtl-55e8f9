// byorisc_imem: instruction memory, synchronous read (block RAM style).
//
// WORDS 32-bit words addressed by the word PC. The read address is registered when en
// is high and the word appears on rdata in the next cycle. With en low the output holds,
// which is how the pipeline stall freezes the instruction in the SID stage.
// A write port (we, waddr, wdata) lets a host load the program; it is meant to be used
// while the core is held in reset.
// Size (8 KB) and the synchronous read follow the paper. The host load port is this
// design's own choice.
module byorisc_imem
  import byorisc_pkg::*;
#(
  parameter int unsigned WORDS = 2048,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          en,
  input  logic [AW-1:0] raddr,
  output word_t         rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  word_t         wdata
);
  word_t mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (en) rdata <= mem[raddr];
  end
endmodule
