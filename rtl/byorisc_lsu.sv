// byorisc_lsu: load-store unit with the shared data memory port.
//
// The data memory has a single core port, so only one transfer happens per cycle,
// whether it belongs to a base load/store or to the custom instruction active in EX
// (the paper: "Only a single data memory transfer is allowed at each processor cycle").
// Both requesters live in EX, where at most one instruction sits, so the unit only muxes:
// a base request (base_valid with a load/store mem_op) wins; otherwise a CI request
// (ci_req, byte access) drives the port. An assertion flags two requests in one cycle.
// Request side (EX, combinational): byte address -> word address, byte enables and the
// store data replicated on the byte lanes (little-endian lanes: byte a sits in lane a%4).
// Response side (next cycle, MEM): the unit registers the access type and the byte
// offset and returns the aligned, sign- or zero-extended load value on load_data.
// CI reads are always unsigned bytes.
// Registers-direct addressing and one access per cycle follow the paper; the lane order,
// the byte-only CI accesses and the priority are this design's own.
module byorisc_lsu
  import byorisc_pkg::*;
#(
  parameter int unsigned DAW = 11            // data memory word address width
) (
  input  logic           clk,
  input  logic           rst,
  // base load/store (EX)
  input  logic           base_valid,
  input  mem_op_e        base_op,
  input  word_t          base_addr,
  input  word_t          base_wdata,
  // CI access (EX)
  input  logic           ci_req,
  input  logic           ci_we,
  input  word_t          ci_addr,
  input  logic [7:0]     ci_wdata,
  // data memory core port
  output logic           dm_en,
  output logic [3:0]     dm_be,
  output logic [DAW-1:0] dm_addr,
  output word_t          dm_wdata,
  input  word_t          dm_rdata,
  // load result (MEM), valid the cycle after the request
  output word_t          load_data
);
  mem_op_e    op;
  word_t      addr;
  logic       base_act;
  mem_op_e    op_q;
  logic [1:0] off_q;

  always_comb begin
    base_act = base_valid && (base_op != MEM_NONE);
    if (base_act) begin
      op   = base_op;
      addr = base_addr;
      dm_wdata = (base_op == MEM_SB) ? {4{base_wdata[7:0]}} :
                 (base_op == MEM_SH) ? {2{base_wdata[15:0]}} : base_wdata;
    end else if (ci_req) begin
      op   = ci_we ? MEM_SB : MEM_LBU;
      addr = ci_addr;
      dm_wdata = {4{ci_wdata}};
    end else begin
      op   = MEM_NONE;
      addr = base_addr;
      dm_wdata = base_wdata;
    end
    dm_en   = (op != MEM_NONE);
    dm_addr = addr[DAW+1:2];
    unique case (op)
      MEM_SW:  dm_be = 4'b1111;
      MEM_SH:  dm_be = addr[1] ? 4'b1100 : 4'b0011;
      MEM_SB:  dm_be = 4'b0001 << addr[1:0];
      default: dm_be = 4'b0000;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) op_q <= MEM_NONE;
    else     op_q <= op;
    off_q <= addr[1:0];
  end

  logic [7:0]  rbyte;
  logic [15:0] rhalf;
  always_comb begin
    rbyte = dm_rdata[8*off_q +: 8];
    rhalf = off_q[1] ? dm_rdata[31:16] : dm_rdata[15:0];
    unique case (op_q)
      MEM_LB:  load_data = {{24{rbyte[7]}}, rbyte};
      MEM_LBU: load_data = {24'b0, rbyte};
      MEM_LH:  load_data = {{16{rhalf[15]}}, rhalf};
      MEM_LHU: load_data = {16'b0, rhalf};
      default: load_data = dm_rdata;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst) assert (!(base_act && ci_req)) else $error("lsu: base and CI access in one cycle");
  end
endmodule
