// tb_sg_loader: writes the 64 elements of random 8x8 matrices one per cycle
// (rows in a shuffled order, with idle cycles in between for one matrix) and
// checks that exactly one memory write per row appears, one cycle after the
// row's last column, with the right address and all eight elements in place.
module tb_sg_loader;
  import smd_pkg::*;
  logic clk = 0, rst_n = 0, cs = 0, we = 0;
  logic [2*IDX_W-1:0] addr = '0;
  cg_t wdata = '0;
  logic mem_we;
  logic [IDX_W-1:0] mem_addr;
  sg_word_t mem_wdata;
  sg_loader dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0, writes = 0;
  cg_t mat [U][U];
  int last_row = -1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor: compare every memory write with the matrix
  always @(posedge clk) if (rst_n && mem_we) begin
    writes++;
    checks++;
    if (int'(mem_addr) != last_row) begin
      failures++;
      $display("write to row %0d, expected %0d", mem_addr, last_row);
    end
    for (int c = 0; c < U; c++) begin
      checks++;
      if (mem_wdata[c] != mat[mem_addr][c]) begin
        failures++;
        $display("row %0d col %0d wrong", mem_addr, c);
      end
    end
  end

  initial begin
    int order [U];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      for (int r = 0; r < U; r++) order[r] = (r * 3 + m) % U;
      for (int r = 0; r < U; r++)
        for (int c = 0; c < U; c++) mat[r][c] = cg_t'($urandom);
      for (int k = 0; k < U; k++)
        for (int c = 0; c < U; c++) begin
          @(negedge clk);
          cs = 1; we = 1; addr = {IDX_W'(order[k]), IDX_W'(c)}; wdata = mat[order[k]][c];
          if (c == U - 1) last_row = order[k];
          if (m == 1 && c == 3) begin  // idle cycle and a cs without we
            @(negedge clk); we = 0; wdata = '1;
          end
        end
      @(negedge clk); cs = 0; we = 0;
      repeat (3) @(negedge clk);
    end
    checks++;
    if (writes != 3 * U) begin failures++; $display("writes %0d", writes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
