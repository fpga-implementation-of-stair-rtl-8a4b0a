// cmult: one pipelined complex multiplier, p = a * b, with four real
// multiplications (ar*br - ai*bi, ar*bi + ai*br). Two register stages, as in
// an FPGA DSP slice: the operands are registered, then the full-precision
// products. Latency 2 cycles, one product per cycle. The operand widths come
// from smd_pkg (18 x 22 bits, 40-bit result, no rounding). This is a helper
// of cmult_array; its structure is this design's choice.
module cmult
  import smd_pkg::*;
(
  input  logic clk,
  input  ca_t  a,
  input  cb_t  b,
  output cp_t  p
);

  ca_t a_q;
  cb_t b_q;

  always_ff @(posedge clk) begin
    a_q  <= a;
    b_q  <= b;
    p.re <= P_W'(a_q.re) * P_W'(b_q.re) - P_W'(a_q.im) * P_W'(b_q.im);
    p.im <= P_W'(a_q.re) * P_W'(b_q.im) + P_W'(a_q.im) * P_W'(b_q.re);
  end

endmodule
