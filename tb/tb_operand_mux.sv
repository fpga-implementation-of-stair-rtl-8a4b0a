// tb_operand_mux: random stored values; for every operation and row the
// eight operand pairs are compared with the expected ones. The expected
// S^-1 row is taken from a full 8x8 matrix assembled here from the
// reciprocals and the off-diagonal list (2,1) (2,3) (4,3) (4,5) (6,5) (6,7)
// (8,7), counted from one; alignment shifts are applied in integers.
module tb_operand_mux;
  import smd_pkg::*;
  tag_t tag;
  sg_word_t sg_row;
  logic signed [SI_W-1:0] inv [U];
  cg_t g_nd [N_ND];
  csi_t si_nd [N_ND];
  cmf_t mf [U];
  cx_t x [U];
  cb_t bsum [U];
  ca_t a [U];
  cb_t b [U];
  operand_mux dut (.*);
  int checks = 0, failures = 0;
  longint sr [U][U], si [U][U];
  int pos_r [N_ND] = '{1, 1, 3, 3, 5, 5, 7};
  int pos_c [N_ND] = '{0, 2, 2, 4, 4, 6, 6};

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_lane(int j, longint ear, longint eai, longint ebr, longint ebi);
    checks++;
    if (longint'(a[j].re) != ear || longint'(a[j].im) != eai ||
        longint'(b[j].re) != ebr || longint'(b[j].im) != ebi) begin
      failures++;
      $display("op %0d row %0d lane %0d: a=(%0d,%0d) b=(%0d,%0d) expected a=(%0d,%0d) b=(%0d,%0d)",
               tag.op, tag.row, j, a[j].re, a[j].im, b[j].re, b[j].im, ear, eai, ebr, ebi);
    end
  endtask

  initial begin
    for (int n = 0; n < 30; n++) begin
      for (int i = 0; i < U; i++) begin
        sg_row[i] = cg_t'($urandom);
        inv[i] = SI_W'($urandom);
        mf[i] = cmf_t'($urandom);
        x[i] = cx_t'($urandom);
        bsum[i] = cb_t'({$urandom, $urandom});
      end
      for (int k = 0; k < N_ND; k++) begin
        g_nd[k] = cg_t'($urandom);
        si_nd[k] = csi_t'({$urandom, $urandom});
      end
      for (int i = 0; i < U; i++)
        for (int j = 0; j < U; j++) begin
          sr[i][j] = (i == j) ? longint'(inv[i]) : 0;
          si[i][j] = 0;
        end
      for (int k = 0; k < N_ND; k++) begin
        sr[pos_r[k]][pos_c[k]] = longint'(si_nd[k].re);
        si[pos_r[k]][pos_c[k]] = longint'(si_nd[k].im);
      end
      for (int op = 0; op < 6; op++)
        for (int r = 0; r < U; r++) begin
          tag.valid = (n % 10 != 9);
          tag.op = op_t'(op);
          tag.row = IDX_W'(r);
          #1;
          for (int j = 0; j < U; j++) begin
            if (!tag.valid || op == OP_NONE || ((op == OP_ND1 || op == OP_ND2) && j == U - 1))
              expect_lane(j, 0, 0, 0, 0);
            else if (op == OP_ND1)
              expect_lane(j, longint'(inv[pos_r[j]]), 0, longint'(inv[pos_c[j]]) * 8, 0);
            else if (op == OP_ND2)
              expect_lane(j, -longint'(g_nd[j].re) * 16, -longint'(g_nd[j].im) * 16,
                          longint'(si_nd[j].re) * 8, longint'(si_nd[j].im) * 8);
            else if (op == OP_X0)
              expect_lane(j, sr[r][j], si[r][j], longint'(mf[j].re) * 64, longint'(mf[j].im) * 64);
            else if (op == OP_SGX)
              expect_lane(j, longint'(sg_row[j].re) * 16, longint'(sg_row[j].im) * 16,
                          longint'(x[j].re) * 256, longint'(x[j].im) * 256);
            else
              expect_lane(j, sr[r][j], si[r][j], longint'(bsum[j].re), longint'(bsum[j].im));
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
