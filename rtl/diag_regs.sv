// diag_regs: register array holding the U = 8 diagonal elements of the
// Gramian G (real, 13 bit with 9 fraction bits). The diagonal of a Hermitian
// Gramian is real, so no imaginary part is stored. Written one element per
// cycle; read in parallel by the Newton-Raphson divider. Reset loads 1.0 so
// that an unwritten entry still has a finite reciprocal. The register array
// follows the paper; port and reset value are this design's choices.
module diag_regs
  import smd_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  we,
  input  logic [IDX_W-1:0]      addr,
  input  logic signed [G_W-1:0] wdata,
  output logic signed [G_W-1:0] diag [U]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < U; i++) diag[i] <= G_W'(1 << G_F);
    end else if (we) begin
      diag[addr] <= wdata;
    end
  end

endmodule
