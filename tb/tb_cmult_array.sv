// tb_cmult_array: streams random operand sets (a new set every cycle,
// with full-scale values among them) through the eight complex multipliers
// and checks each product and its tag exactly two cycles later against
// integer complex multiplication.
module tb_cmult_array;
  import smd_pkg::*;
  logic clk = 0, rst_n = 0;
  ca_t a [U];
  cb_t b [U];
  tag_t tag_in = '0, tag_out;
  cp_t p [U];
  cmult_array dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint er [4][U], ei [4][U];
  tag_t etag [4];
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < U; i++) begin a[i] = '0; b[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      for (int i = 0; i < U; i++) begin
        a[i] = ca_t'({$urandom, $urandom});
        b[i] = cb_t'({$urandom, $urandom});
        if (n == 5) begin
          a[i].re = A_W'(1 << (A_W - 1)); a[i].im = A_W'(1 << (A_W - 1));
          b[i].re = B_W'(1 << (B_W - 1)); b[i].im = '1 >> 1;
        end
        er[n % 4][i] = longint'(a[i].re) * longint'(b[i].re) - longint'(a[i].im) * longint'(b[i].im);
        ei[n % 4][i] = longint'(a[i].re) * longint'(b[i].im) + longint'(a[i].im) * longint'(b[i].re);
      end
      tag_in = tag_t'($urandom);
      etag[n % 4] = tag_in;
      @(negedge clk);
      if (n >= 2) begin
        checks++;
        if (tag_out != etag[(n - 1) % 4]) begin failures++; $display("tag wrong at %0d", n); end
        for (int i = 0; i < U; i++) begin
          checks++;
          if (longint'(p[i].re) != er[(n - 1) % 4][i] || longint'(p[i].im) != ei[(n - 1) % 4][i]) begin
            failures++;
            $display("set %0d lane %0d wrong", n - 1, i);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
