// byorisc_top: a ByoRISC system, the core with its instruction memory and SID table plus
// an 8 KB data memory.
//
// The core runs from reset at word address 0 until it executes HALT, then raises halted.
// A host loads the program (imem_*), the CI operand table (sid_*) and data (host_*)
// while rst is high, releases rst, waits for halted and reads results through the
// second data memory port (host_*, one-cycle synchronous read).
// The main configuration is the default: 256 registers, 8 read and 8 write register
// ports, CIs with 8 inputs and 8 outputs, 256 SID entries, full forwarding, branch
// redirect before the EX/MEM register, 8 KB instruction and data memories.
// The paper places the data memory outside the core, in the system; the host ports are
// this design's own. Coprocessor bus, interrupt controller and AMBA bridge of the
// paper's overview are not part of this system.
module byorisc_top
  import byorisc_pkg::*;
#(
  parameter int unsigned IMEM_WORDS  = 2048,
  parameter int unsigned DMEM_BYTES  = 8192,
  parameter int unsigned SID_ENTRIES = 256,
  parameter int unsigned NREGS       = 256,
  parameter int unsigned NRPORTS     = 8,
  parameter int unsigned NWPORTS     = 8,
  parameter bit          HAVE_CI     = 1'b1,
  parameter bit          FORWARDING  = 1'b1,
  parameter bit          BR_EARLY    = 1'b1,
  parameter bit          MULT_TPL    = 1'b1,   // 1: 4-cycle pipelined, 0: single-cycle multiplier
  parameter shifter_tpl_e SHIFTER_TPL = SHF_FUNNEL,
  parameter bit          OPT_LS      = 1'b1,   // optional instruction groups, see decoder
  parameter bit          OPT_SHIFT   = 1'b1,
  parameter bit          OPT_MUL     = 1'b1,
  parameter bit          OPT_LOGIC   = 1'b1,
  parameter bit          OPT_SET     = 1'b0,
  localparam int unsigned PCW = $clog2(IMEM_WORDS),
  localparam int unsigned DAW = $clog2(DMEM_BYTES / 4),
  localparam int unsigned EW  = (NRPORTS + NWPORTS) * (RAW + 1),
  localparam int unsigned EAW = $clog2(SID_ENTRIES)
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           imem_we,
  input  logic [PCW-1:0] imem_waddr,
  input  word_t          imem_wdata,
  input  logic           sid_we,
  input  logic [EAW-1:0] sid_waddr,
  input  logic [EW-1:0]  sid_wdata,
  input  logic           host_en,
  input  logic           host_we,
  input  logic [DAW-1:0] host_addr,
  input  word_t          host_wdata,
  output word_t          host_rdata,
  output logic           halted,
  output logic [PCW-1:0] pc
);
  logic           dm_en;
  logic [3:0]     dm_be;
  logic [DAW-1:0] dm_addr;
  word_t          dm_wdata, dm_rdata;

  byorisc_core #(
    .IMEM_WORDS (IMEM_WORDS), .DAW (DAW), .SID_ENTRIES (SID_ENTRIES),
    .NREGS (NREGS), .NRPORTS (NRPORTS), .NWPORTS (NWPORTS),
    .HAVE_CI (HAVE_CI), .FORWARDING (FORWARDING), .BR_EARLY (BR_EARLY),
    .MULT_TPL (MULT_TPL), .SHIFTER_TPL (SHIFTER_TPL), .OPT_LS (OPT_LS), .OPT_SHIFT (OPT_SHIFT), .OPT_MUL (OPT_MUL),
    .OPT_LOGIC (OPT_LOGIC),
    .OPT_SET   (OPT_SET)
  ) u_core (
    .clk, .rst,
    .imem_we, .imem_waddr, .imem_wdata,
    .sid_we, .sid_waddr, .sid_wdata,
    .dm_en, .dm_be, .dm_addr, .dm_wdata, .dm_rdata,
    .halted, .pc
  );

  byorisc_dmem #(.BYTES(DMEM_BYTES)) u_dmem (
    .clk,
    .a_en    (dm_en),
    .a_be    (dm_be),
    .a_addr  (dm_addr),
    .a_wdata (dm_wdata),
    .a_rdata (dm_rdata),
    .b_en    (host_en),
    .b_we    (host_we),
    .b_addr  (host_addr),
    .b_wdata (host_wdata),
    .b_rdata (host_rdata)
  );
endmodule
