// stair_detector: iterative stair-matrix MIMO detector for U = 8 single-
// antenna users (the base station's antenna count only enters through the
// Gramian and matched filter computed ahead of this block).
//
// It solves G x = x_MF, with G = H^H H + s^2 I (8x8 Hermitian) and
// x_MF = H^H y, by splitting G into a stair matrix S (the diagonal plus the
// seven off-diagonals (2,1) (2,3) (4,3) (4,5) (6,5) (6,7) (8,7), counted from
// one) and the rest:
//     x_0 = S^-1 x_MF,     x_t = S^-1 ((S - G) x_{t-1} + x_MF),  t = 1..ITERS.
// S^-1 is formed directly: 1/S(i,i) by the Newton-Raphson divider and
// S^-1(i,j) = -G(i,j) S^-1(i,i) S^-1(j,j) for the seven off-diagonals.
// All products use one array of eight complex multipliers followed by an
// adder tree (one matrix row per cycle) and, for the iteration, an adder
// array that adds x_MF.
//
// Interface: before 'start' the host writes the matched filter (mf_*), the
// diagonal of G (diag_*) and the seven off-diagonals of G (nd_*, entry k as
// listed above). From the start cycle on it writes the 64 elements of S-G,
// one per cycle (sg_cs/sg_we/sg_addr = {row, column}/sg_wdata), row by row;
// S-G is zero on the stair positions and -G elsewhere. 'done' pulses when
// x_hat (12 bit, 8 fraction bits per part) holds the estimate after ITERS
// iterations; with S-G written in 64 consecutive cycles that is the 116th
// cycle counting the start cycle as the first. x_hat keeps its value until
// the next detection overwrites it.
// Block structure, word lengths, the 8-word S-G memory, the time sharing of
// the multiplier array and the cycle counts follow the paper; the pipeline
// stages, the operand formats inside the multiplier array and the host
// interface are this design's choices.
module stair_detector
  import smd_pkg::*;
#(
  parameter int unsigned ITERS = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  // S-G, one element per write
  input  logic                  sg_cs,
  input  logic                  sg_we,
  input  logic [2*IDX_W-1:0]    sg_addr,
  input  cg_t                   sg_wdata,
  // matched filter
  input  logic                  mf_we,
  input  logic [IDX_W-1:0]      mf_addr,
  input  cmf_t                  mf_wdata,
  // diagonal of G (real)
  input  logic                  diag_we,
  input  logic [IDX_W-1:0]      diag_addr,
  input  logic signed [G_W-1:0] diag_wdata,
  // off-diagonals of S (= of G at the stair positions)
  input  logic                  nd_we,
  input  logic [IDX_W-1:0]      nd_addr,
  input  cg_t                   nd_wdata,
  // result
  output logic                  busy,
  output logic                  done,
  output cx_t                   x_hat [U]
);

  // storage
  logic                   row_we;
  logic [IDX_W-1:0]       row_addr;
  sg_word_t               row_wdata, sg_row;
  cmf_t                   mf [U];
  logic signed [G_W-1:0]  diag [U];
  logic signed [SI_W-1:0] inv [U];
  cg_t                    g_nd [N_ND];
  csi_t                   si_nd [N_ND];
  ct_t                    t [U];
  cx_t                    x [U];

  // control and datapath
  logic                   nr_start, nr_done, nr_we, nr_busy;
  logic [IDX_W-1:0]       nr_waddr, sg_raddr;
  logic signed [SI_W-1:0] nr_wdata;
  tag_t                   tag, m_tag, s_tag;
  ca_t                    a [U];
  cb_t                    b [U], bsum [U];
  cp_t                    p [U];
  cs_t                    sum;

  // write-back
  logic [N_ND-1:0]        si_we;
  csi_t                   si_wdata [N_ND];
  logic                   t_we, x_we;

  sg_loader u_loader (
    .clk, .rst_n, .cs(sg_cs), .we(sg_we), .addr(sg_addr), .wdata(sg_wdata),
    .mem_we(row_we), .mem_addr(row_addr), .mem_wdata(row_wdata)
  );

  sg_memory u_sg_mem (
    .clk, .we(row_we), .waddr(row_addr), .wdata(row_wdata),
    .raddr(sg_raddr), .rdata(sg_row)
  );

  mf_memory u_mf (
    .clk, .rst_n, .we(mf_we), .addr(mf_addr), .wdata(mf_wdata), .mf
  );

  diag_regs u_diag (
    .clk, .rst_n, .we(diag_we), .addr(diag_addr), .wdata(diag_wdata), .diag
  );

  nr_divider u_nr (
    .clk, .rst_n, .start(nr_start), .diag, .we(nr_we), .waddr(nr_waddr),
    .wdata(nr_wdata), .busy(nr_busy), .done(nr_done)
  );

  invdiag_memory u_inv (
    .clk, .rst_n, .we(nr_we), .addr(nr_waddr), .wdata(nr_wdata), .inv
  );

  nondiag_regs u_nd (
    .clk, .rst_n, .g_we(nd_we), .g_addr(nd_addr), .g_wdata(nd_wdata),
    .si_we, .si_wdata, .g_nd, .si_nd
  );

  controller #(.ITERS(ITERS)) u_ctrl (
    .clk, .rst_n, .start, .nr_done, .sg_row_we(row_we), .nr_start,
    .sg_raddr, .tag, .busy, .done
  );

  adder_array u_add (.t, .mf, .s(bsum));

  operand_mux u_opmux (
    .tag, .sg_row, .inv, .g_nd, .si_nd, .mf, .x, .bsum, .a, .b
  );

  cmult_array u_mult (.clk, .rst_n, .a, .b, .tag_in(tag), .p, .tag_out(m_tag));

  adder_tree u_tree (.clk, .rst_n, .p, .tag_in(m_tag), .sum, .tag_out(s_tag));

  // write-back: single products into the off-diagonal array, row sums into
  // the results array
  always_comb begin
    si_we = '0;
    for (int k = 0; k < N_ND; k++) begin
      si_wdata[k].re = q_si(S_W'(p[k].re));
      si_wdata[k].im = (m_tag.op == OP_ND2) ? q_si(S_W'(p[k].im)) : '0;
    end
    if (m_tag.valid && (m_tag.op == OP_ND1 || m_tag.op == OP_ND2)) si_we = '1;
    t_we = s_tag.valid && s_tag.op == OP_SGX;
    x_we = s_tag.valid && (s_tag.op == OP_X0 || s_tag.op == OP_SINVB);
  end

  results_regs u_res (
    .clk, .rst_n,
    .t_we, .t_addr(s_tag.row), .t_wdata('{re: q_t(sum.re), im: q_t(sum.im)}),
    .x_we, .x_addr(s_tag.row), .x_wdata('{re: q_x(sum.re), im: q_x(sum.im)}),
    .t, .x
  );

  assign x_hat = x;

  // the multiplier array must not start on S^-1 while reciprocals are missing
  a_no_issue_during_division: assert property (
    @(posedge clk) disable iff (!rst_n) nr_busy |-> !tag.valid
  ) else $error("multiplier array used while the divider is busy");

endmodule
