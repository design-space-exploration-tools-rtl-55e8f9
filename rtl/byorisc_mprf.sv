// byorisc_mprf: multi-port register file built from replicated memory blocks.
//
// NR registers are split by address into NWP banks of NR/NWP registers; bank b holds
// registers b*NR/NWP .. (b+1)*NR/NWP-1 and is written only through its own memory write
// port. Each bank is copied NRP times, one copy per read port, so NRP x NWP memory blocks
// in all (64 for the default 8 x 8). Read port p reads copy p of every bank and a
// multiplexer picks the bank named by the upper bits of the (registered) read address.
// Write steering: bank b takes the write of the lowest-numbered enabled write port whose
// address falls in bank b. Two write ports may not target the same bank in one cycle;
// an assertion checks this, and the register allocator has to respect it.
// Timing: synchronous read, address taken when ren is high, data valid the next cycle,
// held while ren is low; writes at the clock edge; same-cycle write then read of one
// register returns the new value.
// Follows the paper: the replicated n_i x n_o block organisation (Fig. 5 shows the 3-read,
// 2-write case with registers R0-R127 and R128-R255 in separate block groups) and the
// synchronous read. Own choices: address-based write steering and write-first blocks.
module byorisc_mprf #(
  parameter int unsigned DW  = 32,
  parameter int unsigned NR  = 256,
  parameter int unsigned NRP = 8,
  parameter int unsigned NWP = 8,
  localparam int unsigned RAW  = $clog2(NR),
  localparam int unsigned BD   = NR / NWP,                       // registers per bank
  localparam int unsigned BAW  = (BD > 1) ? $clog2(BD) : 1,      // address inside a bank
  localparam int unsigned BSW  = (NWP > 1) ? $clog2(NWP) : 1     // bank select width
) (
  input  logic                     clk,
  input  logic                     ren,
  input  logic [NRP-1:0][RAW-1:0]  raddr,
  output logic [NRP-1:0][DW-1:0]   rdata,
  input  logic [NWP-1:0]           we,
  input  logic [NWP-1:0][RAW-1:0]  waddr,
  input  logic [NWP-1:0][DW-1:0]   wdata
);
  function automatic logic [BSW-1:0] bank_of(input logic [RAW-1:0] a);
    return BSW'(a / BD);
  endfunction

  // write steering: one write per bank
  logic [NWP-1:0]          bwe;
  logic [NWP-1:0][BAW-1:0] bwaddr;
  logic [NWP-1:0][DW-1:0]  bwdata;

  always_comb begin
    bwe    = '0;
    bwaddr = '0;
    bwdata = '0;
    for (int b = 0; b < NWP; b++) begin
      for (int w = NWP - 1; w >= 0; w--) begin
        if (we[w] && bank_of(waddr[w]) == BSW'(b)) begin
          bwe[b]    = 1'b1;
          bwaddr[b] = BAW'(waddr[w] % BD);
          bwdata[b] = wdata[w];
        end
      end
    end
  end

  // NWP x NRP memory blocks
  logic [NRP-1:0][NWP-1:0][DW-1:0] bank_rdata;
  logic [NRP-1:0][BSW-1:0]         rsel_q;

  for (genvar b = 0; b < NWP; b++) begin : g_bank
    for (genvar p = 0; p < NRP; p++) begin : g_copy
      byorisc_rf_bank #(.DW(DW), .DEPTH(BD)) u_blk (
        .clk   (clk),
        .we    (bwe[b]),
        .waddr (bwaddr[b]),
        .wdata (bwdata[b]),
        .ren   (ren),
        .raddr (BAW'(raddr[p] % BD)),
        .rdata (bank_rdata[p][b])
      );
    end
  end

  always_ff @(posedge clk) begin
    if (ren)
      for (int p = 0; p < NRP; p++) rsel_q[p] <= bank_of(raddr[p]);
  end

  always_comb begin
    for (int p = 0; p < NRP; p++) rdata[p] = bank_rdata[p][rsel_q[p]];
  end

  // two write ports aimed at one bank would lose a write
  always_ff @(posedge clk) begin
    for (int i = 0; i < NWP; i++)
      for (int j = i + 1; j < NWP; j++)
        assert (!(we[i] && we[j] && bank_of(waddr[i]) == bank_of(waddr[j])))
          else $error("mprf: write ports %0d and %0d target the same bank", i, j);
  end
endmodule
