// tb_results_regs: random simultaneous writes to the two banks (t and x)
// of the results array; both banks are compared with a model every cycle,
// which also shows that a write to one bank leaves the other alone.
module tb_results_regs;
  import smd_pkg::*;
  logic clk = 0, rst_n = 0, t_we = 0, x_we = 0;
  logic [IDX_W-1:0] t_addr = '0, x_addr = '0;
  ct_t t_wdata = '0;
  cx_t x_wdata = '0;
  ct_t t [U];
  cx_t x [U];
  ct_t t_ref [U];
  cx_t x_ref [U];
  results_regs dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < U; i++) begin t_ref[i] = '0; x_ref[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      t_we = ($urandom % 2 == 0); t_addr = IDX_W'($urandom); t_wdata = ct_t'({$urandom, $urandom});
      x_we = ($urandom % 2 == 0); x_addr = IDX_W'($urandom); x_wdata = cx_t'($urandom);
      @(negedge clk);
      if (t_we) t_ref[t_addr] = t_wdata;
      if (x_we) x_ref[x_addr] = x_wdata;
      t_we = 0; x_we = 0;
      for (int i = 0; i < U; i++) begin
        checks += 2;
        if (t[i] != t_ref[i]) begin failures++; $display("t %0d wrong", i); end
        if (x[i] != x_ref[i]) begin failures++; $display("x %0d wrong", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
