// tb_adder_array: random (S-G)x rows and matched-filter values, including
// the extremes of both formats; each sum is compared with t + mf * 2^6
// computed in integers.
module tb_adder_array;
  import smd_pkg::*;
  ct_t t [U];
  cmf_t mf [U];
  cb_t s [U];
  adder_array dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < U; i++) begin
        t[i] = ct_t'({$urandom, $urandom});
        mf[i] = cmf_t'($urandom);
        if (n == 0) begin
          t[i].re = T_W'(1 << (T_W - 1)); mf[i].re = MF_W'(1 << (MF_W - 1));
          t[i].im = '1 >> 1; mf[i].im = '1 >> 1;
        end
      end
      #1;
      for (int i = 0; i < U; i++) begin
        longint er, ei;
        er = longint'(t[i].re) + longint'(mf[i].re) * 64;
        ei = longint'(t[i].im) + longint'(mf[i].im) * 64;
        checks++;
        if (longint'(s[i].re) != er || longint'(s[i].im) != ei) begin
          failures++;
          $display("lane %0d: got %0d %0d expected %0d %0d", i, s[i].re, s[i].im, er, ei);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
