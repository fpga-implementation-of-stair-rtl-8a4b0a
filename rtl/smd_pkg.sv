// smd_pkg: shared constants, fixed-point types and rounding helpers of the
// stair-matrix MIMO detector.
//
// Number formats (two's complement, Qi.f = f fraction bits):
//   G, S-G, off-diagonals of S : 13 bit, 9 fraction bits (the paper's word length)
//   matched filter x_MF        : 15 bit, 10 fraction bits (paper)
//   S^-1 entries               : 17 bit (paper); 13 fraction bits is this design's choice
//   (S-G)x products            : 20 bit, 16 fraction bits (paper)
//   estimate x                 : 12 bit, 8 fraction bits (paper)
// The multiplier array works on one common operand format chosen here:
//   operand a : 18 bit, 13 fraction bits   operand b : 22 bit, 16 fraction bits
//   product   : 40 bit, 29 fraction bits   tree sum  : 43 bit, 29 fraction bits
// Results are brought back to a narrower format by rounding the dropped
// fraction bits (add half, truncate) and wrapping the integer bits, as the
// paper's fixed-point model does.
package smd_pkg;

  localparam int unsigned U = 8;             // users = Gramian dimension
  localparam int unsigned N_ND = U - 1;      // non-zero off-diagonals of a stair matrix
  localparam int unsigned IDX_W = $clog2(U);

  localparam int unsigned G_W = 13, G_F = 9;
  localparam int unsigned MF_W = 15, MF_F = 10;
  localparam int unsigned SI_W = 17, SI_F = 13;
  localparam int unsigned T_W = 20, T_F = 16;
  localparam int unsigned X_W = 12, X_F = 8;
  localparam int unsigned NR_W = 18;         // Newton-Raphson word length

  localparam int unsigned A_W = 18, A_F = 13;
  localparam int unsigned B_W = 22, B_F = 16;
  localparam int unsigned P_W = A_W + B_W, P_F = A_F + B_F;
  localparam int unsigned S_W = P_W + IDX_W;

  typedef struct packed { logic signed [G_W-1:0] re; logic signed [G_W-1:0] im; } cg_t;   // 26 bit
  typedef struct packed { logic signed [MF_W-1:0] re; logic signed [MF_W-1:0] im; } cmf_t;
  typedef struct packed { logic signed [SI_W-1:0] re; logic signed [SI_W-1:0] im; } csi_t;
  typedef struct packed { logic signed [T_W-1:0] re; logic signed [T_W-1:0] im; } ct_t;
  typedef struct packed { logic signed [X_W-1:0] re; logic signed [X_W-1:0] im; } cx_t;
  typedef struct packed { logic signed [A_W-1:0] re; logic signed [A_W-1:0] im; } ca_t;
  typedef struct packed { logic signed [B_W-1:0] re; logic signed [B_W-1:0] im; } cb_t;
  typedef struct packed { logic signed [P_W-1:0] re; logic signed [P_W-1:0] im; } cp_t;
  typedef struct packed { logic signed [S_W-1:0] re; logic signed [S_W-1:0] im; } cs_t;

  typedef cg_t [U-1:0] sg_word_t;              // one S-G memory word: 26 x 8 bits

  // Operation the shared multiplier array performs in a cycle.
  typedef enum logic [2:0] {
    OP_NONE  = 3'd0,
    OP_ND1   = 3'd1,  // p_k = S^-1(i,i) * S^-1(j,j)             (lane k, k = 0..6)
    OP_ND2   = 3'd2,  // S^-1(i,j) = -G(i,j) * p_k                (lane k)
    OP_X0    = 3'd3,  // row r of S^-1 times x_MF                 (dot product)
    OP_SGX   = 3'd4,  // row r of (S-G) times x_{t-1}             (dot product)
    OP_SINVB = 3'd5   // row r of S^-1 times ((S-G)x_{t-1} + x_MF) (dot product)
  } op_t;

  // Tag that travels with the operands through the multiplier array and
  // the adder tree, so that results are written back where they belong.
  typedef struct packed {
    logic             valid;
    op_t              op;
    logic [IDX_W-1:0] row;
  } tag_t;

  // Row and column of the k-th stored off-diagonal (0-based). Rows 1,3,5,7
  // (rows 2,4,6,8 counted from one) carry the off-diagonals:
  // k=0:(1,0) k=1:(1,2) k=2:(3,2) k=3:(3,4) k=4:(5,4) k=5:(5,6) k=6:(7,6).
  function automatic logic [IDX_W-1:0] nd_row(input int unsigned k);
    return IDX_W'(2 * (k / 2) + 1);
  endfunction
  function automatic logic [IDX_W-1:0] nd_col(input int unsigned k);
    return (k % 2 == 0) ? IDX_W'(2 * (k / 2)) : IDX_W'(2 * (k / 2) + 2);
  endfunction

  // Round away the low SH bits of a sum (add half, arithmetic shift), then
  // keep the low bits (wrap). Fixed output widths, one helper per format.
  function automatic logic signed [S_W-1:0] rnd_shift(input logic signed [S_W-1:0] v, input int unsigned sh);
    logic signed [S_W-1:0] half;
    half = (sh == 0) ? '0 : (S_W'(1) <<< (sh - 1));
    return (v + half) >>> sh;
  endfunction
  function automatic logic signed [T_W-1:0] q_t(input logic signed [S_W-1:0] v);
    logic signed [S_W-1:0] r;
    r = rnd_shift(v, P_F - T_F);
    return r[T_W-1:0];
  endfunction
  function automatic logic signed [X_W-1:0] q_x(input logic signed [S_W-1:0] v);
    logic signed [S_W-1:0] r;
    r = rnd_shift(v, P_F - X_F);
    return r[X_W-1:0];
  endfunction
  function automatic logic signed [SI_W-1:0] q_si(input logic signed [S_W-1:0] v);
    logic signed [S_W-1:0] r;
    r = rnd_shift(v, P_F - SI_F);
    return r[SI_W-1:0];
  endfunction

endpackage
