// byorisc_core: the ByoRISC pipeline, IF - SID - ID - EX - MEM - WB.
//
// A 32-bit load-store processor whose custom instructions (CIs) may read up to NRP and
// write up to NWP registers at once, without any register field in the CI word.
//   IF   the PC unit addresses the synchronous instruction memory.
//   SID  the fetched word is checked for a CI opcode (MSBs non-zero) and its ciocc field
//        addresses the SID table, which returns the CI's register addresses in ID.
//        With HAVE_CI = 0 this stage is skipped: the fetched word goes straight to ID
//        and the pipeline has five stages.
//   ID   base instructions are decoded; for CIs the SID entry supplies the operand
//        vectors. The register file is addressed (synchronous read), J/JAL redirect the
//        PC here (early signalling) and squash the younger instructions.
//   EX   register data arrive from the multi-port register file and pass the forwarding
//        multiplexers; ALU, funnel shifter, 4-cycle multiplier, CI unit and branch unit
//        work here. BEQZ/BNEZ/JR redirect (late signalling) and HALT stops the processor.
//        Loads and stores put their request on the data memory port here.
//   MEM  load data return from the data memory and are aligned.
//   WB   the result vector (NWP lanes) is written to the register file.
// Hazards: there are no interlocks. Results are forwarded from EX/MEM and MEM/WB to any
// read port (scalable register bypassing). A load result is only available from MEM/WB,
// so the instruction right after a load must not use the loaded register (one load
// delay slot). Multi-cycle operations (MUL, multi-cycle CIs) stall IF..EX; the stall is
// a clock enable on the pipeline registers and synchronous memories, and EX/MEM receives
// bubbles meanwhile, so the older instructions drain. Taken control transfers squash the
// wrong-path instructions (no delay slots): 2 for J/JAL (1 with HAVE_CI = 0), 3 for a
// branch resolved in EX (BR_EARLY = 1) and 4 when it is resolved after the EX/MEM
// register (BR_EARLY = 0).
// Register fields and SID addresses are 8 bits wide whatever NREGS is; with fewer than 256
// registers only their low log2(NREGS) bits reach the register file, and programs must
// name registers below NREGS only (the bypass network compares all 8 bits).
// Interface: instruction memory and SID table load ports for the host, the data memory
// core port (one-cycle synchronous read, byte enables), halted and the current pc.
// Follows the paper: stage order and duties (Fig. 4), SID, MPRF and SRB organisation,
// stall of earlier stages for multi-cycle execution, and the configuration options
// BR_EARLY, HAVE_CI, FORWARDING, MULT_TPL (single-cycle or 4-cycle pipelined
// multiplier), SHIFTER_TPL (funnel, barrel or dedicated shifters) and the OPT_* switches
// for optional instruction groups (OPT_MUL = 0 also removes the multiplier).
// Own choices: squashing instead of delay slots, the load delay slot, and the encoding
// of instructions.
module byorisc_core
  import byorisc_pkg::*;
#(
  parameter int unsigned IMEM_WORDS  = 2048,
  parameter int unsigned DAW         = 11,     // data memory word address width (8 KB)
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
  localparam int unsigned EW  = (NRPORTS + NWPORTS) * (RAW + 1),
  localparam int unsigned EAW = $clog2(SID_ENTRIES),
  localparam int unsigned PSW = $clog2(NPIPE + 1),
  localparam int unsigned WSW = (NWPORTS > 1) ? $clog2(NWPORTS) : 1
) (
  input  logic           clk,
  input  logic           rst,
  // program load
  input  logic           imem_we,
  input  logic [PCW-1:0] imem_waddr,
  input  word_t          imem_wdata,
  // SID table load
  input  logic           sid_we,
  input  logic [EAW-1:0] sid_waddr,
  input  logic [EW-1:0]  sid_wdata,
  // data memory core port
  output logic           dm_en,
  output logic [3:0]     dm_be,
  output logic [DAW-1:0] dm_addr,
  output word_t          dm_wdata,
  input  word_t          dm_rdata,
  // status
  output logic           halted,
  output logic [PCW-1:0] pc
);
  localparam int unsigned NRPC = NRPORTS;
  localparam int unsigned NWPC = NWPORTS;

  // ------------------------------------------------------------------ control
  logic stall;            // multi-cycle operation in EX not finished
  logic late_redirect;    // taken branch / JR
  logic [PCW-1:0] late_target;
  logic id_redirect;
  logic [PCW-1:0] id_target;
  logic ex_kill;          // EX instruction squashed by a branch resolved after EX/MEM

  // ------------------------------------------------------------------ IF
  word_t fetched;

  byorisc_pc_unit #(.PCW(PCW)) u_pc (
    .clk, .rst,
    .hold          (stall || halted),
    .id_redirect   (id_redirect),
    .id_target     (id_target),
    .late_redirect (late_redirect),
    .late_target   (late_target),
    .pc            (pc)
  );

  byorisc_imem #(.WORDS(IMEM_WORDS)) u_imem (
    .clk,
    .en    (!stall),
    .raddr (pc),
    .rdata (fetched),
    .we    (imem_we),
    .waddr (imem_waddr),
    .wdata (imem_wdata)
  );

  // IF/SID
  logic           sid_valid;
  logic [PCW-1:0] sid_pc;

  // ------------------------------------------------------------------ SID
  logic                    sid_is_ci;
  logic [NWPC-1:0][RAW-1:0] sid_dst;
  logic [NWPC-1:0]          sid_we_v;
  logic [NRPC-1:0][RAW-1:0] sid_src;
  logic [NRPC-1:0]          sid_re_v;

  // SID/ID
  logic           id_valid;
  logic [PCW-1:0] id_pc;
  word_t          id_inst;
  logic           id_is_ci;

  if (HAVE_CI) begin : g_sid
    logic           id_valid_q;
    logic [PCW-1:0] id_pc_q;
    word_t          id_inst_q;

    byorisc_sid #(.NI(NRPC), .NO(NWPC), .RADW(RAW), .ENTRIES(SID_ENTRIES)) u_sid (
      .clk,
      .en        (!stall),
      .inst      (fetched),
      .is_ci     (sid_is_ci),
      .dst       (sid_dst),
      .we_v      (sid_we_v),
      .src       (sid_src),
      .re_v      (sid_re_v),
      .lut_we    (sid_we),
      .lut_waddr (sid_waddr),
      .lut_wdata (sid_wdata)
    );

    always_ff @(posedge clk) begin
      if (rst) begin
        id_valid_q <= 1'b0;
      end else if (late_redirect || halted) begin
        id_valid_q <= 1'b0;
      end else if (!stall) begin
        id_valid_q <= sid_valid && !id_redirect;
      end
      if (!stall) begin
        id_pc_q   <= sid_pc;
        id_inst_q <= fetched;
      end
    end
    assign id_valid = id_valid_q;
    assign id_pc    = id_pc_q;
    assign id_inst  = id_inst_q;
    assign id_is_ci = sid_is_ci;
  end else begin : g_no_sid
    // Immediate transfer to ID when CIs are not supported
    assign sid_is_ci = 1'b0;
    assign sid_dst   = '0;
    assign sid_we_v  = '0;
    assign sid_src   = '0;
    assign sid_re_v  = '0;
    assign id_valid  = sid_valid;
    assign id_pc     = sid_pc;
    assign id_inst   = fetched;
    assign id_is_ci  = 1'b0;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sid_valid <= 1'b0;
    end else if (late_redirect || halted) begin
      sid_valid <= 1'b0;
    end else if (!stall) begin
      sid_valid <= !id_redirect;
    end
    if (!stall) sid_pc <= pc;
  end

  // ------------------------------------------------------------------ ID
  ctrl_t                    id_ctrl;
  logic [NRPC-1:0][RAW-1:0] id_raddr;
  logic [NRPC-1:0]          id_re;
  logic [NWPC-1:0][RAW-1:0] id_waddr;
  logic [NWPC-1:0]          id_we;
  logic                     id_jump;

  byorisc_decoder #(
    .NRD (NRPC), .NWR (NWPC), .OPT_LS (OPT_LS), .OPT_SHIFT (OPT_SHIFT), .OPT_MUL (OPT_MUL),
    .OPT_LOGIC (OPT_LOGIC),
    .OPT_SET   (OPT_SET)
  ) u_dec (
    .inst     (id_inst),
    .is_ci    (id_is_ci),
    .sid_dst  (sid_dst),
    .sid_we_v (sid_we_v),
    .sid_src  (sid_src),
    .sid_re_v (sid_re_v),
    .ctrl     (id_ctrl),
    .raddr    (id_raddr),
    .re       (id_re),
    .waddr    (id_waddr),
    .we       (id_we)
  );

  // EX side signals of the branch unit are declared with EX below
  br_e            ex_br;
  word_t          ex_brval;
  logic [15:0]    ex_imm;
  logic [PCW-1:0] ex_pc;
  logic           ex_taken;
  logic [PCW-1:0] ex_target;

  byorisc_branch_unit #(.PCW(PCW)) u_br (
    .id_op     (f_op(id_inst)),
    .id_addr   (f_addr(id_inst)),
    .id_jump   (id_jump),
    .id_target (id_target),
    .ex_br     (ex_br),
    .ex_val    (ex_brval),
    .ex_imm    (ex_imm),
    .ex_pc     (ex_pc),
    .ex_taken  (ex_taken),
    .ex_target (ex_target)
  );

  assign id_redirect = id_valid && !id_is_ci && id_jump && !stall && !late_redirect && !halted;

  // register file: read addressed in ID, data in EX; written from WB
  logic [NRPC-1:0][DW-1:0]  rf_rdata;
  logic [NWPC-1:0]          wb_we;
  logic [NWPC-1:0][RAW-1:0] wb_waddr;
  logic [NWPC-1:0][DW-1:0]  wb_wdata;

  // register fields are always 8 bits; a smaller register file uses their low bits
  localparam int unsigned RFAW = $clog2(NREGS);
  logic [NRPC-1:0][RFAW-1:0] rf_raddr;
  logic [NWPC-1:0][RFAW-1:0] rf_waddr;
  always_comb begin
    for (int p = 0; p < NRPC; p++) rf_raddr[p] = id_raddr[p][RFAW-1:0];
    for (int w = 0; w < NWPC; w++) rf_waddr[w] = wb_waddr[w][RFAW-1:0];
  end

  byorisc_mprf #(.DW(DW), .NR(NREGS), .NRP(NRPC), .NWP(NWPC)) u_rf (
    .clk,
    .ren   (!stall),
    .raddr (rf_raddr),
    .rdata (rf_rdata),
    .we    (wb_we & {NWPC{!rst}}),
    .waddr (rf_waddr),
    .wdata (wb_wdata)
  );

  // ID/EX
  logic                     ex_valid;
  ctrl_t                    ex_ctrl;
  logic [NRPC-1:0][RAW-1:0] ex_raddr;
  logic [NRPC-1:0]          ex_re;
  logic [NWPC-1:0][RAW-1:0] ex_waddr;
  logic [NWPC-1:0]          ex_we;
  logic                     ex_first;   // first cycle of the instruction in EX

  always_ff @(posedge clk) begin
    if (rst) begin
      ex_valid <= 1'b0;
      ex_first <= 1'b1;
    end else begin
      ex_first <= !stall;
      if (late_redirect || halted || (ex_valid && !ex_kill && ex_ctrl.halt)) ex_valid <= 1'b0;
      else if (!stall)                                                        ex_valid <= id_valid;
    end
    if (!stall) begin
      ex_ctrl  <= id_ctrl;
      ex_raddr <= id_raddr;
      ex_re    <= id_re;
      ex_waddr <= id_waddr;
      ex_we    <= id_we;
      ex_pc    <= id_pc;
    end
  end

  // ------------------------------------------------------------------ EX
  logic                                 ex_live;
  logic [NRPC-1:0][DW-1:0]              ex_op;
  logic [NPIPE-1:0][NWPC-1:0][RAW-1:0]  st_waddr;
  logic [NPIPE-1:0][NWPC-1:0]           st_we;
  logic [NPIPE-1:0]                     st_done;
  logic [NPIPE-1:0][NWPC-1:0][DW-1:0]   st_wdata;
  logic [NRPC-1:0][PSW-1:0]             pipe_sel;
  logic [NRPC-1:0][WSW-1:0]             wp_sel;

  // EX/MEM and MEM/WB
  logic                     mem_valid;
  logic [NWPC-1:0]          mem_we;
  logic [NWPC-1:0][RAW-1:0] mem_waddr;
  logic [NWPC-1:0][DW-1:0]  mem_wdata;
  mem_op_e                  mem_op;
  logic                     mem_br_taken;
  logic [PCW-1:0]           mem_br_target;

  assign ex_live = ex_valid && !ex_kill;

  assign st_waddr = {wb_waddr, mem_waddr};
  assign st_we    = {wb_we, mem_we & {NWPC{mem_valid}}};
  assign st_done  = {1'b1, !is_load(mem_op)};   // a load in MEM has no result yet
  assign st_wdata = {wb_wdata, mem_wdata};

  byorisc_fwd_unit #(.RAW(RAW), .NRP(NRPC), .NWP(NWPC), .NPIPE(NPIPE), .FORWARDING(FORWARDING)) u_fwd (
    .raddr    (ex_raddr),
    .re       (ex_re),
    .st_waddr (st_waddr),
    .st_we    (st_we),
    .st_done  (st_done),
    .pipe_sel (pipe_sel),
    .wp_sel   (wp_sel)
  );

  byorisc_fwd_mux #(.DW(DW), .NRP(NRPC), .NWP(NWPC), .NPIPE(NPIPE)) u_fmux (
    .rf_data  (rf_rdata),
    .st_wdata (st_wdata),
    .pipe_sel (pipe_sel),
    .wp_sel   (wp_sel),
    .op       (ex_op)
  );

  word_t alu_y, sh_y, mul_y;
  logic  mul_valid;

  byorisc_alu #(.PCW(PCW)) u_alu (
    .op  (ex_ctrl.alu_op),
    .a   (ex_op[0]),
    .b   (ex_op[1]),
    .imm (ex_ctrl.imm),
    .pc  (ex_pc),
    .y   (alu_y)
  );

  byorisc_shifter #(.TPL(SHIFTER_TPL)) u_sh (
    .op (ex_ctrl.sh_op),
    .x  (ex_op[1]),
    .s  (ex_ctrl.sh_imm ? ex_ctrl.imm[4:0] : ex_op[0][4:0]),
    .y  (sh_y)
  );

  if (OPT_MUL) begin : g_mul
    byorisc_mult #(.PIPELINED(MULT_TPL)) u_mul (
      .clk, .rst,
      .start (ex_live && ex_first && ex_ctrl.exu == EXU_MUL),
      .a     (ex_op[0]),
      .b     (ex_op[1]),
      .y     (mul_y),
      .valid (mul_valid)
    );
  end else begin : g_no_mul
    // MUL/MULU decode as no-operation; nothing reaches the multiplier
    assign mul_y     = '0;
    assign mul_valid = 1'b1;
  end

  logic [NWPC-1:0][DW-1:0] ci_out;
  logic                    ci_done;
  logic                    ci_mreq, ci_mwe;
  word_t                   ci_maddr;
  logic [7:0]              ci_mwdata;
  word_t                   load_data;

  if (HAVE_CI) begin : g_ci
    byorisc_ci_unit #(.NI(NRPC), .NO(NWPC)) u_ci (
      .clk, .rst,
      .valid     (ex_live && ex_ctrl.exu == EXU_CI),
      .op        (ex_ctrl.ci_op),
      .in        (ex_op),
      .out       (ci_out),
      .done      (ci_done),
      .mem_req   (ci_mreq),
      .mem_we    (ci_mwe),
      .mem_addr  (ci_maddr),
      .mem_wdata (ci_mwdata),
      .mem_rdata (load_data[7:0])
    );
  end else begin : g_no_ci
    assign ci_out    = '0;
    assign ci_done   = 1'b1;
    assign ci_mreq   = 1'b0;
    assign ci_mwe    = 1'b0;
    assign ci_maddr  = '0;
    assign ci_mwdata = '0;
  end

  byorisc_lsu #(.DAW(DAW)) u_lsu (
    .clk, .rst,
    .base_valid (ex_live),
    .base_op    (ex_ctrl.mem_op),
    .base_addr  (ex_op[0]),
    .base_wdata (ex_op[1]),
    .ci_req     (ci_mreq),
    .ci_we      (ci_mwe),
    .ci_addr    (ci_maddr),
    .ci_wdata   (ci_mwdata),
    .dm_en      (dm_en),
    .dm_be      (dm_be),
    .dm_addr    (dm_addr),
    .dm_wdata   (dm_wdata),
    .dm_rdata   (dm_rdata),
    .load_data  (load_data)
  );

  logic ex_done;
  always_comb begin
    unique case (ex_ctrl.exu)
      EXU_MUL: ex_done = mul_valid;
      EXU_CI:  ex_done = ci_done;
      default: ex_done = 1'b1;
    endcase
  end
  assign stall = ex_live && !ex_done;

  assign ex_br    = ex_live ? ex_ctrl.br : BR_NONE;
  assign ex_brval = ex_op[0];
  assign ex_imm   = ex_ctrl.imm;

  // result vector of EX
  logic [NWPC-1:0][DW-1:0] ex_wdata;
  always_comb begin
    ex_wdata = '0;
    unique case (ex_ctrl.exu)
      EXU_CI:    ex_wdata = ci_out;
      EXU_MUL:   ex_wdata[0] = mul_y;
      EXU_SHIFT: ex_wdata[0] = sh_y;
      default:   ex_wdata[0] = alu_y;
    endcase
  end

  // control transfer: before (BR_EARLY) or after the EX/MEM register
  if (BR_EARLY) begin : g_br_early
    assign late_redirect = ex_taken;
    assign late_target   = ex_target;
    assign ex_kill       = 1'b0;
  end else begin : g_br_late
    assign late_redirect = mem_br_taken;
    assign late_target   = mem_br_target;
    assign ex_kill       = mem_br_taken;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      halted       <= 1'b0;
      mem_valid    <= 1'b0;
      mem_br_taken <= 1'b0;
      mem_op       <= MEM_NONE;
    end else begin
      if (ex_live && ex_ctrl.halt) halted <= 1'b1;
      mem_valid    <= ex_live && !stall;
      mem_br_taken <= ex_taken && !mem_br_taken;
      mem_op       <= (ex_live && !stall) ? ex_ctrl.mem_op : MEM_NONE;
    end
    mem_br_target <= ex_target;
    mem_we        <= (ex_live && !stall) ? ex_we : '0;
    mem_waddr     <= ex_waddr;
    mem_wdata     <= ex_wdata;
  end

  // ------------------------------------------------------------------ MEM
  logic [NWPC-1:0][DW-1:0] mem_result;
  always_comb begin
    mem_result = mem_wdata;
    if (is_load(mem_op)) mem_result[0] = load_data;
  end

  always_ff @(posedge clk) begin
    if (rst) wb_we <= '0;
    else     wb_we <= mem_valid ? mem_we : '0;
    wb_waddr <= mem_waddr;
    wb_wdata <= mem_result;
  end

  // ------------------------------------------------------------------ checks
  // a multi-cycle operation never coexists with a redirect from EX
  always_ff @(posedge clk) begin
    if (!rst) assert (!(stall && late_redirect)) else $error("core: redirect during stall");
  end
endmodule
