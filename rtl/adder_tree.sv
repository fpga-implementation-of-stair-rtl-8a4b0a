// adder_tree: sums the U = 8 complex products of the multiplier array into
// one complex dot product, so that one row of a matrix-vector product is
// finished per cycle. Three levels of adders (8 -> 4 -> 2 -> 1) at full
// precision (the sum grows by 3 bits); a register after the second level and
// one at the output give a latency of 2 cycles. The operation tag is delayed
// along. The adder tree is the paper's; the pipelining is this design's
// choice.
module adder_tree
  import smd_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  cp_t  p [U],
  input  tag_t tag_in,
  output cs_t  sum,
  output tag_t tag_out
);

  cs_t  l1 [4];
  cs_t  l2 [2];
  cs_t  l2_q [2];
  tag_t tag_q;

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      l1[i].re = S_W'(p[2*i].re) + S_W'(p[2*i+1].re);
      l1[i].im = S_W'(p[2*i].im) + S_W'(p[2*i+1].im);
    end
    for (int i = 0; i < 2; i++) begin
      l2[i].re = l1[2*i].re + l1[2*i+1].re;
      l2[i].im = l1[2*i].im + l1[2*i+1].im;
    end
  end

  always_ff @(posedge clk) begin
    l2_q   <= l2;
    sum.re <= l2_q[0].re + l2_q[1].re;
    sum.im <= l2_q[0].im + l2_q[1].im;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag_q   <= '0;
      tag_out <= '0;
    end else begin
      tag_q   <= tag_in;
      tag_out <= tag_q;
    end
  end

endmodule
