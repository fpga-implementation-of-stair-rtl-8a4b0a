// nondiag_regs: the two register arrays for the off-diagonal part of the
// stair matrix. An 8x8 stair matrix with off-diagonals on rows 2,4,6,8
// (counted from one) has seven of them: (2,1) (2,3) (4,3) (4,5) (6,5) (6,7)
// (8,7). Entry k of both arrays belongs to the k-th of these positions.
//
//   g_nd  : G(i,j) for the seven positions (13 bit, 9 fraction bits),
//           written by the host one entry per cycle (g_we/g_addr/g_wdata).
//   si_nd : the matching entries of S^-1 (17 bit, 13 fraction bits),
//           written back from the multiplier array, all lanes in one cycle
//           under a per-entry enable (si_we). The same registers first hold
//           the intermediate product S^-1(i,i)*S^-1(j,j) and are then
//           overwritten with -G(i,j) times that product (Algorithm 1).
// Both arrays are read in parallel. Reset clears them. The split into the two
// arrays and the write-back from the multiplier array follow the paper's
// block diagram; the ports are this design's choice.
module nondiag_regs
  import smd_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             g_we,
  input  logic [IDX_W-1:0] g_addr,      // 0 .. N_ND-1
  input  cg_t              g_wdata,
  input  logic [N_ND-1:0]  si_we,
  input  csi_t             si_wdata [N_ND],
  output cg_t              g_nd  [N_ND],
  output csi_t             si_nd [N_ND]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_ND; k++) begin
        g_nd[k]  <= '0;
        si_nd[k] <= '0;
      end
    end else begin
      if (g_we && g_addr < IDX_W'(N_ND)) g_nd[g_addr] <= g_wdata;
      for (int k = 0; k < N_ND; k++) begin
        if (si_we[k]) si_nd[k] <= si_wdata[k];
      end
    end
  end

endmodule
