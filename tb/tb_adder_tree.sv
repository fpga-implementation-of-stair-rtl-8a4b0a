// tb_adder_tree: streams random 8-product sets (full-scale ones included)
// into the adder tree and checks each complex sum and its tag two cycles
// later against an integer sum.
module tb_adder_tree;
  import smd_pkg::*;
  logic clk = 0, rst_n = 0;
  cp_t p [U];
  tag_t tag_in = '0, tag_out;
  cs_t sum;
  adder_tree dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint er [4], ei [4];
  tag_t etag [4];
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < U; i++) p[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      er[n % 4] = 0; ei[n % 4] = 0;
      for (int i = 0; i < U; i++) begin
        p[i].re = P_W'({$urandom, $urandom});
        p[i].im = P_W'({$urandom, $urandom});
        if (n == 7) begin p[i].re = P_W'(64'sd1 <<< (P_W - 1)); p[i].im = '1 >> 1; end
        er[n % 4] += longint'(p[i].re);
        ei[n % 4] += longint'(p[i].im);
      end
      tag_in = tag_t'($urandom);
      etag[n % 4] = tag_in;
      @(negedge clk);
      if (n >= 2) begin
        checks += 2;
        if (tag_out != etag[(n - 1) % 4]) begin failures++; $display("tag wrong"); end
        if (longint'(sum.re) != er[(n - 1) % 4] || longint'(sum.im) != ei[(n - 1) % 4]) begin
          failures++;
          $display("sum %0d wrong", n - 1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
