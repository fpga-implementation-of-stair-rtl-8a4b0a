// tb_nr_divider: runs the Newton-Raphson divider on sets of eight
// diagonals: random values around 1.0 (as a normalised Gramian has), the
// whole positive range of the 13-bit input, powers of two, and zero/negative
// entries. Each 17-bit result (13 fraction bits) is compared with the exact
// reciprocal (within 2 LSB, or saturated at the largest value where 1/d
// does not fit). Checks the write timing: first result 6 cycles after start,
// then every 5 cycles, done with the eighth, 41 cycles after start.
module tb_nr_divider;
  import smd_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [G_W-1:0] diag [U];
  logic we, busy, done;
  logic [IDX_W-1:0] waddr;
  logic signed [SI_W-1:0] wdata;
  nr_divider dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_set();
    int t0, nw;
    @(negedge clk);
    start = 1; t0 = cyc;
    @(negedge clk);
    start = 0;
    nw = 0;
    while (nw < U) begin
      @(posedge clk);
      if (we) begin
        real exact;
        exact = (diag[waddr] > 0) ? 8192.0 * 512.0 / real'(diag[waddr]) : 1.0e9;
        checks++;
        if (int'(waddr) != nw) begin failures++; $display("order wrong"); end
        if (exact >= 65535.0) begin
          if (wdata != 17'sd65535) begin failures++; $display("d=%0d: expected saturation, got %0d", diag[waddr], wdata); end
        end else if (real'(wdata) - exact > 2.0 || exact - real'(wdata) > 2.0) begin
          failures++;
          $display("d=%0d: got %0d expected %f", diag[waddr], wdata, exact);
        end
        checks++;
        if (cyc - t0 != 6 + 5 * nw) begin failures++; $display("write %0d at %0d", nw, cyc - t0); end
        if (nw == U - 1) begin
          checks++;
          if (!done || cyc - t0 != 41) begin failures++; $display("done missing"); end
        end
        nw++;
      end
    end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy"); end
  endtask

  initial begin
    for (int i = 0; i < U; i++) diag[i] = G_W'(512);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      for (int i = 0; i < U; i++) begin
        case (s % 4)
          0: diag[i] = G_W'(400 + $urandom % 250);
          1: diag[i] = G_W'(1 + $urandom % 4095);
          2: diag[i] = G_W'(1 << ((s / 4 + i) % 12));
          default: diag[i] = (i < 2) ? G_W'(-int'(i) * 100) : G_W'(40 + $urandom % 300);
        endcase
      end
      run_set();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
