// invdiag_memory: the 1/diag(S) memory, a register array of the U = 8
// reciprocals of the diagonal of S (= diagonal of G), each 17 bit with
// 13 fraction bits. Written by the Newton-Raphson divider one entry at a
// time; read in parallel by the operand selection of the multiplier array.
// Reset clears it. The 17-bit width is the paper's; the fraction split and
// the port are this design's choice.
module invdiag_memory
  import smd_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   we,
  input  logic [IDX_W-1:0]       addr,
  input  logic signed [SI_W-1:0] wdata,
  output logic signed [SI_W-1:0] inv [U]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < U; i++) inv[i] <= '0;
    end else if (we) begin
      inv[addr] <= wdata;
    end
  end

endmodule
