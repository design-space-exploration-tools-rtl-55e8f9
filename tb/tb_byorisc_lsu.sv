// tb_byorisc_lsu: the unit is connected to a data memory; random base loads/stores of
// every width and CI byte accesses are checked against a byte array model (store lanes,
// alignment, sign/zero extension, CI read data returned the next cycle).
module tb_byorisc_lsu;
  import byorisc_pkg::*;
  logic clk = 0, rst = 1;
  logic base_valid = 0; mem_op_e base_op = MEM_NONE; word_t base_addr = 0, base_wdata = 0;
  logic ci_req = 0, ci_we = 0; word_t ci_addr = 0; logic [7:0] ci_wdata = 0;
  logic dm_en; logic [3:0] dm_be; logic [10:0] dm_addr; word_t dm_wdata, dm_rdata, load_data;
  logic [7:0] model [256];
  int checks = 0, failures = 0;
  byorisc_lsu dut (.*);
  byorisc_dmem mem (.clk, .a_en(dm_en), .a_be(dm_be), .a_addr(dm_addr), .a_wdata(dm_wdata),
                    .a_rdata(dm_rdata), .b_en(1'b0), .b_we(1'b0), .b_addr('0), .b_wdata('0), .b_rdata());
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    @(negedge clk); rst = 0;
    // fill the first 256 bytes with word stores
    for (int i = 0; i < 64; i++) begin
      base_valid = 1; base_op = MEM_SW; base_addr = 4 * i; base_wdata = $urandom;
      for (int k = 0; k < 4; k++) model[4*i + k] = base_wdata[8*k +: 8];
      @(negedge clk);
    end
    for (int n = 0; n < 3000; n++) begin
      word_t exp; int a; bit is_ld; int kind;
      kind = $urandom_range(0, 9);
      base_valid = 0; ci_req = 0; is_ld = 0;
      if (kind < 8) begin
        base_valid = 1; base_op = mem_op_e'(kind + 1); a = $urandom_range(0, 255);
        if (base_op inside {MEM_LW, MEM_SW}) a = a & ~3;
        if (base_op inside {MEM_LH, MEM_LHU, MEM_SH}) a = a & ~1;
        base_addr = a; base_wdata = $urandom;
        case (base_op)
          MEM_LW:  begin is_ld = 1; exp = {model[a+3], model[a+2], model[a+1], model[a]}; end
          MEM_LB:  begin is_ld = 1; exp = {{24{model[a][7]}}, model[a]}; end
          MEM_LBU: begin is_ld = 1; exp = {24'b0, model[a]}; end
          MEM_LH:  begin is_ld = 1; exp = {{16{model[a+1][7]}}, model[a+1], model[a]}; end
          MEM_LHU: begin is_ld = 1; exp = {16'b0, model[a+1], model[a]}; end
          MEM_SW:  for (int k = 0; k < 4; k++) model[a+k] = base_wdata[8*k +: 8];
          MEM_SH:  for (int k = 0; k < 2; k++) model[a+k] = base_wdata[8*k +: 8];
          default: model[a] = base_wdata[7:0];
        endcase
      end else begin
        ci_req = 1; ci_we = (kind == 9); a = $urandom_range(0, 255); ci_addr = a; ci_wdata = 8'($urandom);
        if (ci_we) model[a] = ci_wdata; else begin is_ld = 1; exp = {24'b0, model[a]}; end
      end
      @(negedge clk);
      base_valid = 0; ci_req = 0;
      if (is_ld) begin
        checks++;
        if (load_data !== exp) begin failures++; $display("FAIL kind %0d addr %0d got %h exp %h", kind, a, load_data, exp); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
