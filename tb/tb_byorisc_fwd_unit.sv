// tb_byorisc_fwd_unit: random address vectors with deliberate matches; the selects of
// every read port are compared with a reference search (youngest stage first, lowest
// lane first, only enabled and completed lanes).
module tb_byorisc_fwd_unit;
  logic [7:0][7:0] raddr; logic [7:0] re;
  logic [1:0][7:0][7:0] st_waddr; logic [1:0][7:0] st_we; logic [1:0] st_done;
  logic [7:0][1:0] pipe_sel; logic [7:0][2:0] wp_sel;
  int checks = 0, failures = 0;
  byorisc_fwd_unit dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int hits1 = 0, hits2 = 0;
    for (int n = 0; n < 3000; n++) begin
      for (int p = 0; p < 8; p++) raddr[p] = 8'($urandom_range(0, 15));
      for (int s = 0; s < 2; s++) for (int w = 0; w < 8; w++) st_waddr[s][w] = 8'($urandom_range(0, 15));
      re = 8'($urandom); st_we = 16'($urandom); st_done = 2'($urandom_range(1, 3));
      #1;
      for (int p = 0; p < 8; p++) begin
        int es, ew; bit found;
        es = 0; ew = 0; found = 0;
        for (int s = 0; s < 2 && !found; s++)
          for (int w = 0; w < 8 && !found; w++)
            if (re[p] && st_we[s][w] && st_done[s] && st_waddr[s][w] == raddr[p]) begin
              es = s + 1; ew = w; found = 1;
            end
        checks++;
        if (pipe_sel[p] != 2'(es) || (found && wp_sel[p] != 3'(ew))) begin
          failures++; $display("FAIL port %0d sel %0d/%0d exp %0d/%0d", p, pipe_sel[p], wp_sel[p], es, ew);
        end
        if (es == 1) hits1++; if (es == 2) hits2++;
      end
    end
    checks++; if (hits1 == 0 || hits2 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
