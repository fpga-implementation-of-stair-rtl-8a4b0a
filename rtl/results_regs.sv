// results_regs: the results register array at the output of the adder tree.
// It has two banks of U = 8 complex entries:
//   t : row results of (S-G) x_{t-1}, 20 bit with 16 fraction bits
//   x : the estimate x_t, 12 bit with 8 fraction bits; after the last
//       iteration this bank is the detector output.
// Each bank is written one row per cycle and read in parallel. Two banks are
// needed because x_{t-1} is still read by the multiplier array while the
// first rows of (S-G)x_{t-1} come back from the adder tree. The word lengths
// are the paper's; the two-bank organisation is this design's choice. Reset
// clears both banks.
module results_regs
  import smd_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             t_we,
  input  logic [IDX_W-1:0] t_addr,
  input  ct_t              t_wdata,
  input  logic             x_we,
  input  logic [IDX_W-1:0] x_addr,
  input  cx_t              x_wdata,
  output ct_t              t [U],
  output cx_t              x [U]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < U; i++) begin
        t[i] <= '0;
        x[i] <= '0;
      end
    end else begin
      if (t_we) t[t_addr] <= t_wdata;
      if (x_we) x[x_addr] <= x_wdata;
    end
  end

endmodule
