// operand_mux: routes the stored operands to the U = 8 complex multipliers
// for each of the four time-shared uses of the multiplier array, and aligns
// them to the common operand formats (a: 13 fraction bits, b: 16 fraction
// bits). Purely combinational; the tag selects the operation and the row.
//
//   OP_ND1   lane k<7: a = 1/S(i,i), b = 1/S(j,j)         (Algorithm 1, 1st product)
//   OP_ND2   lane k<7: a = -G(i,j),  b = that product     (Algorithm 1, 2nd product)
//   OP_X0    lane j  : a = S^-1(r,j), b = x_MF(j)           (x_0 = S^-1 x_MF)
//   OP_SGX   lane j  : a = (S-G)(r,j), b = x_{t-1}(j)        ((S-G) x_{t-1})
//   OP_SINVB lane j  : a = S^-1(r,j), b = (S-G)x_{t-1}(j)+x_MF(j)
//
// Row r of S^-1 is rebuilt from the two register arrays: 1/S(r,r) at column r
// and, on the rows carrying off-diagonals (odd r counted from zero), the
// stored entries at columns r-1 and r+1. All other lanes get zero. Unused
// lanes and OP_NONE give zero operands. The four uses are the paper's; the
// lane assignment and alignment are this design's choice.
module operand_mux
  import smd_pkg::*;
(
  input  tag_t                   tag,
  input  sg_word_t               sg_row,   // S-G row 'tag.row' from the S-G memory
  input  logic signed [SI_W-1:0] inv [U],  // 1/diag(S)
  input  cg_t                    g_nd  [N_ND],
  input  csi_t                   si_nd [N_ND],
  input  cmf_t                   mf [U],
  input  cx_t                    x  [U],
  input  cb_t                    bsum [U], // output of the adder array
  output ca_t                    a [U],
  output cb_t                    b [U]
);

  csi_t si_row [U];   // row tag.row of S^-1

  always_comb begin
    for (int j = 0; j < U; j++) si_row[j] = '0;
    si_row[tag.row].re = inv[tag.row];
    if (tag.row[0]) begin
      si_row[tag.row - 1'b1] = si_nd[tag.row - 1'b1];
      if (tag.row != IDX_W'(U - 1)) si_row[tag.row + 1'b1] = si_nd[tag.row];
    end
  end

  always_comb begin
    for (int j = 0; j < U; j++) begin
      a[j] = '0;
      b[j] = '0;
    end
    if (tag.valid) begin
      unique case (tag.op)
        OP_ND1: begin
          for (int k = 0; k < N_ND; k++) begin
            a[k].re = A_W'(inv[nd_row(k)]);
            b[k].re = B_W'(inv[nd_col(k)]) <<< (B_F - SI_F);
          end
        end
        OP_ND2: begin
          for (int k = 0; k < N_ND; k++) begin
            a[k].re = -(A_W'(g_nd[k].re) <<< (A_F - G_F));
            a[k].im = -(A_W'(g_nd[k].im) <<< (A_F - G_F));
            b[k].re = B_W'(si_nd[k].re) <<< (B_F - SI_F);
            b[k].im = B_W'(si_nd[k].im) <<< (B_F - SI_F);
          end
        end
        OP_X0, OP_SINVB: begin
          for (int j = 0; j < U; j++) begin
            a[j].re = A_W'(si_row[j].re);
            a[j].im = A_W'(si_row[j].im);
            if (tag.op == OP_X0) begin
              b[j].re = B_W'(mf[j].re) <<< (B_F - MF_F);
              b[j].im = B_W'(mf[j].im) <<< (B_F - MF_F);
            end else begin
              b[j] = bsum[j];
            end
          end
        end
        OP_SGX: begin
          for (int j = 0; j < U; j++) begin
            a[j].re = A_W'(sg_row[j].re) <<< (A_F - G_F);
            a[j].im = A_W'(sg_row[j].im) <<< (A_F - G_F);
            b[j].re = B_W'(x[j].re) <<< (B_F - X_F);
            b[j].im = B_W'(x[j].im) <<< (B_F - X_F);
          end
        end
        default: ;
      endcase
    end
  end

endmodule
