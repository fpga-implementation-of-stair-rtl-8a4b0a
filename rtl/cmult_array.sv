// cmult_array: the array of U = 8 complex multipliers shared in time by all
// multiplications of the detector (the paper's central unit). Lane j
// multiplies a[j] by b[j]; all lanes run every cycle. A tag describing the
// operation travels alongside and leaves with the products, two cycles after
// the operands enter (latency 2, one set of operands per cycle).
// Eight multipliers follow the paper; the pipeline depth and tagging are this
// design's choice.
module cmult_array
  import smd_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  ca_t  a [U],
  input  cb_t  b [U],
  input  tag_t tag_in,
  output cp_t  p [U],
  output tag_t tag_out
);

  tag_t tag_q;

  for (genvar j = 0; j < U; j++) begin : g_lane
    cmult u_cmult (.clk(clk), .a(a[j]), .b(b[j]), .p(p[j]));
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
