// mf_memory: register array holding the U = 8 complex matched-filter values
// x_MF = H^H y (15 bit, 10 fraction bits per part). Written one element per
// cycle through we/addr/wdata; all eight are read in parallel, since the
// matched filter feeds both the multiplier array (initial estimate) and the
// adder array (every iteration). Reset clears the array. Register storage
// follows the paper; the write port is this design's choice.
module mf_memory
  import smd_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [IDX_W-1:0] addr,
  input  cmf_t             wdata,
  output cmf_t             mf [U]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < U; i++) mf[i] <= '0;
    end else if (we) begin
      mf[addr] <= wdata;
    end
  end

endmodule
