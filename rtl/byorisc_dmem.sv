// byorisc_dmem: byte-addressed data memory, two synchronous ports.
//
// BYTES bytes stored as 32-bit words. Port A serves the core: when a_en is high the word
// at a_addr (word address) is read into a_rdata at the clock edge and the byte lanes set
// in a_be are written with a_wdata (read-before-write). Port B serves a host
// (load data, inspect results) with word writes and reads.
// Timing: one-cycle synchronous read on both ports. The ports must not write the same
// word in the same cycle.
// The 8 KB size and the synchronous read follow the paper. The second port and the
// byte-enable interface are this design's own.
module byorisc_dmem
  import byorisc_pkg::*;
#(
  parameter int unsigned BYTES = 8192,
  localparam int unsigned AW   = $clog2(BYTES / 4)
) (
  input  logic          clk,
  // core port
  input  logic          a_en,
  input  logic [3:0]    a_be,
  input  logic [AW-1:0] a_addr,
  input  word_t         a_wdata,
  output word_t         a_rdata,
  // host port
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  word_t         b_wdata,
  output word_t         b_rdata
);
  word_t mem [BYTES / 4];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      for (int i = 0; i < 4; i++)
        if (a_be[i]) mem[a_addr][8*i +: 8] <= a_wdata[8*i +: 8];
    end
    if (b_en) begin
      b_rdata <= mem[b_addr];
      if (b_we) mem[b_addr] <= b_wdata;
    end
  end
endmodule
