// tb_mf_memory: checks that reset clears the matched-filter array, that
// each write lands in its own entry only, and that all entries read in
// parallel.
module tb_mf_memory;
  import smd_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  logic [IDX_W-1:0] addr = '0;
  cmf_t wdata = '0;
  cmf_t mf [U];
  cmf_t ref_a [U];
  mf_memory dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic compare();
    for (int i = 0; i < U; i++) begin
      checks++;
      if (mf[i] != ref_a[i]) begin failures++; $display("entry %0d wrong", i); end
    end
  endtask
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < U; i++) ref_a[i] = '0;
    compare();
    for (int k = 0; k < 40; k++) begin
      @(negedge clk);
      we = ($urandom % 4 != 0); addr = IDX_W'($urandom % U); wdata = cmf_t'($urandom);
      @(negedge clk);
      if (we) ref_a[addr] = wdata;
      we = 0;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
