// tb_sg_memory: fills the 8 words with random data, reads them back in a
// random order and checks that each word appears one cycle after its read,
// and that a write does not disturb other words.
module tb_sg_memory;
  import smd_pkg::*;
  logic clk = 0, we = 0;
  logic [IDX_W-1:0] waddr = '0, raddr = '0;
  sg_word_t wdata = '0, rdata;
  sg_word_t ref_mem [U];
  sg_memory dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sg_word_t rnd_word();
    sg_word_t w;
    for (int c = 0; c < U; c++) w[c] = cg_t'($urandom);
    return w;
  endfunction

  initial begin
    for (int pass = 0; pass < 4; pass++) begin
      for (int r = 0; r < U; r++) begin
        if (pass > 0 && $urandom % 2 == 0) continue;
        @(negedge clk);
        we = 1; waddr = IDX_W'(r); wdata = rnd_word(); ref_mem[r] = wdata;
      end
      @(negedge clk); we = 0;
      for (int k = 0; k < 2 * U; k++) begin
        logic [IDX_W-1:0] a;
        a = IDX_W'($urandom % U);
        raddr = a;
        @(negedge clk);
        checks++;
        if (rdata != ref_mem[a]) begin failures++; $display("word %0d wrong", a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
