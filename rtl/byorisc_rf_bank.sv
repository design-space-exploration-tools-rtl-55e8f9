// byorisc_rf_bank: one register-file memory block, one write port and one read port.
//
// DEPTH words of DW bits with a synchronous read: the read address is registered when
// ren is high and the word appears on rdata in the next cycle; with ren low rdata holds.
// A read that meets a write of the same address in the same cycle returns the new data
// (write-first). The register file relies on this so that an instruction reading a
// register in the same cycle the write-back stage writes it sees the new value.
// This is the building block of the multi-port register file; write-first is this
// design's own choice, not stated in the paper.
module byorisc_rf_bank #(
  parameter int unsigned DW    = 32,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          ren,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (ren) rdata <= (we && waddr == raddr) ? wdata : mem[raddr];
  end
endmodule
