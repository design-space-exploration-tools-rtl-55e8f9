// tb_byorisc_fwd_mux: every select value on every port, random data.
module tb_byorisc_fwd_mux;
  logic [7:0][31:0] rf_data, op; logic [1:0][7:0][31:0] st_wdata;
  logic [7:0][1:0] pipe_sel; logic [7:0][2:0] wp_sel;
  int checks = 0, failures = 0;
  byorisc_fwd_mux dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 2000; n++) begin
      for (int p = 0; p < 8; p++) begin
        rf_data[p] = $urandom; pipe_sel[p] = 2'($urandom_range(0, 2)); wp_sel[p] = 3'($urandom);
      end
      for (int s = 0; s < 2; s++) for (int w = 0; w < 8; w++) st_wdata[s][w] = $urandom;
      #1;
      for (int p = 0; p < 8; p++) begin
        logic [31:0] e;
        e = (pipe_sel[p] == 0) ? rf_data[p] : st_wdata[pipe_sel[p] - 1][wp_sel[p]];
        checks++; if (op[p] !== e) begin failures++; $display("FAIL port %0d", p); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
