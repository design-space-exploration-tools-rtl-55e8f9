// byorisc_ci_unit: application-specific hardware extensions (ASHEs) serving custom
// instructions in the EX stage.
//
// A CI arrives with up to NI input operands (already forwarded) and may return up to NO
// results, written to the registers named by its SID entry. Two extensions are built:
//   CI_PERM (0x40)      the skeleton CI of the evaluated core: a permutation of the 8
//                       inputs to the 8 outputs by plain wiring, here out[k] = in[NI-1-k].
//                       It completes in the cycle it enters EX.
//   CI_FSDITHER1 (0x41) the fsdither1 CI drawn in the paper (3 inputs, 2 outputs, 2
//                       constants). With in[0] = source, in[1] = source_word,
//                       in[2] = vr128 it performs
//                         MEM[source_word + vr128] = MEM[source + vr128]  (byte)
//                         out[0] = vr128 + 1,  out[1] = 4096
//                       as a small FSMD: cycle 0 LOAD (read request), cycle 1 STORE
//                       (write the loaded byte, done). It owns the data memory port
//                       while the pipeline is stalled.
// Any other CI opcode completes at once with zero results.
// Interface: valid is high while a CI sits in EX; done tells the pipeline the results are
// on out and EX may advance (a multi-cycle CI keeps EX stalled until then). mem_* is the
// CI data memory access port to the load-store unit; mem_rdata is the byte read one
// cycle after a read request.
// From the paper: the skeleton permutation CI, the fsdither1 data-flow graph (Fig. 13),
// the LOAD/STORE computational states and single memory transfer per cycle. Own choices:
// which permutation, the operand order, byte-wide accesses and the 2-cycle schedule
// (the paper lists 1 hardware cycle for fsdither1, which a synchronous-read memory
// cannot give for a load followed by a dependent store).
module byorisc_ci_unit
  import byorisc_pkg::*;
#(
  parameter int unsigned NI = 8,
  parameter int unsigned NO = 8
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                valid,
  input  logic [OW-1:0]       op,
  input  logic [NI-1:0][31:0] in,
  output logic [NO-1:0][31:0] out,
  output logic                done,
  output logic                mem_req,
  output logic                mem_we,
  output word_t               mem_addr,
  output logic [7:0]          mem_wdata,
  input  logic [7:0]          mem_rdata
);
  typedef enum logic [0:0] {S_LOAD, S_STORE} fs_state_e;
  fs_state_e state;
  word_t     base_st_q, idx_q;
  // operands and results padded to 8 words, so that fsdither1's fixed operand positions
  // stay legal in configurations with fewer ports (the CI is then unusable there)
  logic [7:0][31:0] in_p, out_p;

  always_comb begin
    in_p = '0;
    for (int k = 0; k < 8; k++)
      if (k < NI) in_p[k] = in[k];
    for (int k = 0; k < NO; k++)
      out[k] = (k < 8) ? out_p[k] : '0;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_LOAD;
    end else if (valid && op == CI_FSDITHER1) begin
      unique case (state)
        S_LOAD: begin
          state     <= S_STORE;
          base_st_q <= in_p[1];
          idx_q     <= in_p[2];
        end
        S_STORE: state <= S_LOAD;
        default: state <= S_LOAD;
      endcase
    end
  end

  always_comb begin
    out_p     = '0;
    done      = valid;
    mem_req   = 1'b0;
    mem_we    = 1'b0;
    mem_addr  = '0;
    mem_wdata = '0;
    if (op == CI_PERM) begin
      for (int k = 0; k < 8; k++)
        if (k < NI && k < NO) out_p[k] = in_p[NI-1-k];
    end else if (op == CI_FSDITHER1) begin
      if (state == S_LOAD) begin
        done     = 1'b0;
        mem_req  = valid;
        mem_addr = in_p[0] + in_p[2];
      end else begin
        mem_req   = valid;
        mem_we    = 1'b1;
        mem_addr  = base_st_q + idx_q;
        mem_wdata = mem_rdata;
        out_p[0]  = idx_q + 32'd1;
        out_p[1]  = 32'd4096;
      end
    end
  end
endmodule
