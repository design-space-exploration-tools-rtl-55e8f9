// byorisc_fwd_mux: data forwarding multiplexers of EX1.
//
// One (NPIPE*NWP + 1)-to-1 multiplexer per read port. pipe_sel = 0 passes the register
// file read data; pipe_sel = k (1..NPIPE) with wp_sel = w passes write lane w of the
// result vector held in the k-th pipeline register after EX1. The selects come from
// byorisc_fwd_unit. Combinational.
// Structure and count follow the paper's SRB description (Fig. 5).
module byorisc_fwd_mux #(
  parameter int unsigned DW    = 32,
  parameter int unsigned NRP   = 8,
  parameter int unsigned NWP   = 8,
  parameter int unsigned NPIPE = 2,
  localparam int unsigned PSW = $clog2(NPIPE + 1),
  localparam int unsigned WSW = (NWP > 1) ? $clog2(NWP) : 1
) (
  input  logic [NRP-1:0][DW-1:0]            rf_data,
  input  logic [NPIPE-1:0][NWP-1:0][DW-1:0] st_wdata,
  input  logic [NRP-1:0][PSW-1:0]           pipe_sel,
  input  logic [NRP-1:0][WSW-1:0]           wp_sel,
  output logic [NRP-1:0][DW-1:0]            op
);
  always_comb begin
    for (int p = 0; p < NRP; p++) begin
      if (pipe_sel[p] == '0 || int'(pipe_sel[p]) > NPIPE || int'(wp_sel[p]) >= NWP)
        op[p] = rf_data[p];
      else
        op[p] = st_wdata[int'(pipe_sel[p]) - 1][wp_sel[p]];
    end
  end
endmodule
