// byorisc_fwd_unit: bypass network of the scalable register bypassing (SRB) scheme.
//
// For each of the NRP read ports of the instruction in EX1 it compares the read address
// with the NWP destination addresses held by each of the NPIPE later pipeline registers
// (NRP x NPIPE x NWP comparators). A comparator hit counts only if that write lane is
// enabled and the stage's operation is complete (stage_done), so a result that is not
// ready yet (a load still in MEM) is never forwarded.
// Output per read port: pipe_sel (0 = value read from the register file, k = result held
// in the k-th pipeline register after EX1, i.e. 1 = EX/MEM, 2 = MEM/WB) and wp_sel
// (which write lane of that stage). The youngest producer wins; inside one stage the
// lowest lane wins. With FORWARDING = 0 every port takes the register file value.
// Select width ceil(log2(NWP)) + ceil(log2(NPIPE+1)) and the comparator/AND structure
// follow the paper; the priority order is this design's choice.
// Combinational.
module byorisc_fwd_unit #(
  parameter int unsigned RAW        = 8,
  parameter int unsigned NRP        = 8,
  parameter int unsigned NWP        = 8,
  parameter int unsigned NPIPE      = 2,
  parameter bit          FORWARDING = 1'b1,
  localparam int unsigned PSW = $clog2(NPIPE + 1),
  localparam int unsigned WSW = (NWP > 1) ? $clog2(NWP) : 1
) (
  input  logic [NRP-1:0][RAW-1:0]            raddr,
  input  logic [NRP-1:0]                     re,
  input  logic [NPIPE-1:0][NWP-1:0][RAW-1:0] st_waddr,
  input  logic [NPIPE-1:0][NWP-1:0]          st_we,
  input  logic [NPIPE-1:0]                   st_done,
  output logic [NRP-1:0][PSW-1:0]            pipe_sel,
  output logic [NRP-1:0][WSW-1:0]            wp_sel
);
  always_comb begin
    pipe_sel = '0;
    wp_sel   = '0;
    if (FORWARDING) begin
      for (int p = 0; p < NRP; p++) begin
        // scan from the oldest to the youngest so the youngest hit is kept last
        for (int s = NPIPE - 1; s >= 0; s--) begin
          for (int w = NWP - 1; w >= 0; w--) begin
            if (re[p] && st_we[s][w] && st_done[s] && st_waddr[s][w] == raddr[p]) begin
              pipe_sel[p] = PSW'(s + 1);
              wp_sel[p]   = WSW'(w);
            end
          end
        end
      end
    end
  end
endmodule
