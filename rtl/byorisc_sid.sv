// byorisc_sid: secondary instruction decoding (SID) stage lookup table.
//
// Custom instructions (B-fmt) carry no register fields; instead their 24-bit ciocc field
// names one occurrence of a CI in the program, and this table holds, per occurrence, the
// destination addresses dst_0..dst_{NO-1}, the write enable vector we_v, the source
// addresses src_0..src_{NI-1} and the read enable vector re_v.
// Entry layout (most significant field first, as drawn in the paper's Fig. 3):
//   dst_0 | ... | dst_{NO-1} | we_v | src_0 | ... | src_{NI-1} | re_v
// Width (NI+NO)*(log2(NR)+1) = 144 bits for the default 8/8/256. Bit k of we_v (re_v),
// counted from the LSB of that field, enables dst_k (src_k).
// Timing: the instruction word arrives in the SID stage; the table is addressed with the
// low bits of ciocc and read synchronously (when en is high), so the entry and the
// registered is_ci flag (opcode MSBs non-zero) are valid in the following ID stage.
// A write port lets the host load the table.
// Follows the paper: entry format and width, indexing by ciocc, synchronous read,
// identification from the opcode MSBs, 256 entries. Own choices: the bit order inside the
// enable vectors and the host write port.
module byorisc_sid
  import byorisc_pkg::*;
#(
  parameter int unsigned NI      = 8,
  parameter int unsigned NO      = 8,
  parameter int unsigned RADW     = 8,
  parameter int unsigned ENTRIES = 256,
  localparam int unsigned EW  = (NI + NO) * (RADW + 1),
  localparam int unsigned EAW = $clog2(ENTRIES)
) (
  input  logic                   clk,
  input  logic                   en,
  input  word_t                  inst,      // instruction in the SID stage
  // ID-stage outputs
  output logic                   is_ci,
  output logic [NO-1:0][RADW-1:0] dst,
  output logic [NO-1:0]          we_v,
  output logic [NI-1:0][RADW-1:0] src,
  output logic [NI-1:0]          re_v,
  // table load
  input  logic                   lut_we,
  input  logic [EAW-1:0]         lut_waddr,
  input  logic [EW-1:0]          lut_wdata
);
  logic [EW-1:0] lut [ENTRIES];
  logic [EW-1:0] entry;

  always_ff @(posedge clk) begin
    if (lut_we) lut[lut_waddr] <= lut_wdata;
    if (en) begin
      entry <= lut[inst[EAW-1:0]];
      is_ci <= is_ci_opcode(inst[31:24]);
    end
  end

  always_comb begin
    for (int k = 0; k < NO; k++)
      dst[k] = entry[EW - 1 - k*RADW -: RADW];
    we_v = entry[EW - 1 - NO*RADW -: NO];
    for (int k = 0; k < NI; k++)
      src[k] = entry[EW - 1 - NO*RADW - NO - k*RADW -: RADW];
    re_v = entry[NI-1:0];
  end
endmodule
