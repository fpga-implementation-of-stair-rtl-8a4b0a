// tb_nondiag_regs: random host writes into the G array (including an
// out-of-range address 7, which must be ignored) mixed with masked parallel
// write-backs into the S^-1 array; both arrays are compared with a model
// after every cycle.
module tb_nondiag_regs;
  import smd_pkg::*;
  logic clk = 0, rst_n = 0, g_we = 0;
  logic [IDX_W-1:0] g_addr = '0;
  cg_t g_wdata = '0;
  logic [N_ND-1:0] si_we = '0;
  csi_t si_wdata [N_ND];
  cg_t g_nd [N_ND];
  csi_t si_nd [N_ND];
  cg_t g_ref [N_ND];
  csi_t si_ref [N_ND];
  nondiag_regs dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int k = 0; k < N_ND; k++) begin si_wdata[k] = '0; g_ref[k] = '0; si_ref[k] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      g_we = ($urandom % 2 == 0); g_addr = IDX_W'($urandom % U); g_wdata = cg_t'($urandom);
      si_we = N_ND'($urandom);
      for (int k = 0; k < N_ND; k++) si_wdata[k] = csi_t'({$urandom, $urandom});
      @(negedge clk);
      if (g_we && g_addr < N_ND) g_ref[g_addr] = g_wdata;
      for (int k = 0; k < N_ND; k++) if (si_we[k]) si_ref[k] = si_wdata[k];
      g_we = 0; si_we = '0;
      for (int k = 0; k < N_ND; k++) begin
        checks += 2;
        if (g_nd[k] != g_ref[k]) begin failures++; $display("g %0d wrong", k); end
        if (si_nd[k] != si_ref[k]) begin failures++; $display("si %0d wrong", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
