// adder_array: U = 8 complex adders forming (S-G) x_{t-1} + x_MF, the vector
// that S^-1 multiplies in every iteration. Operands are aligned to 16
// fraction bits (the matched filter's 10 fraction bits are shifted up by 6)
// and added without loss into the 22-bit b-operand format of the multiplier
// array. Purely combinational. The adder array is the paper's; the output
// format is this design's choice.
module adder_array
  import smd_pkg::*;
(
  input  ct_t  t  [U],
  input  cmf_t mf [U],
  output cb_t  s  [U]
);

  always_comb begin
    for (int i = 0; i < U; i++) begin
      s[i].re = B_W'(t[i].re) + (B_W'(mf[i].re) <<< (T_F - MF_F));
      s[i].im = B_W'(t[i].im) + (B_W'(mf[i].im) <<< (T_F - MF_F));
    end
  end

endmodule
