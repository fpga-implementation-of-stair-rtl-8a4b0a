// tb_stair_detector: end-to-end test of the stair-matrix detector at its
// default size (8 users, 2 iterations).
//
// Each trial draws a 128 x 8 Rayleigh channel H, 256-QAM symbols x and
// Gaussian noise, forms G = H^H H + s^2 I and x_MF = H^H y in floating point,
// quantises them to the detector's input formats (G: 13 bit / 9 fraction
// bits, x_MF: 15 / 10) and runs one detection. Checks per trial:
//   - each 1/diag(S) produced by the Newton-Raphson divider is within
//     2 LSB of the exact reciprocal of the quantised diagonal;
//   - x_hat equals, bit for bit, a fixed-point model of
//     x_0 = S^-1 x_MF, x_t = S^-1((S-G)x_{t-1} + x_MF) written here with
//     integer arithmetic (using the divider's reciprocals);
//   - done arrives in the 116th cycle when S-G is written in 64 consecutive
//     cycles from the start cycle (trials with gaps in the S-G writes check
//     that the detector waits for the load instead);
//   - the decisions on x_hat match the transmitted symbols (symbol error
//     rate below 5 % over all trials; floating-point
//     stair detection with two iterations gives about 1.4 % at this SNR).
// Mechanism counters (reciprocals, off-diagonal inverse, x_0 rows, wait for
// the S-G load, iteration rows, S-G rows assembled) must all be non-zero.
module tb_stair_detector;
  import smd_pkg::*;

  localparam int NB = 128;        // base-station antennas
  localparam int TRIALS = 24;
  localparam real SIGMA2 = 0.001; // noise variance (30 dB SNR per antenna)

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic sg_cs = 1'b0, sg_we = 1'b0, mf_we = 1'b0, diag_we = 1'b0, nd_we = 1'b0;
  logic [2*IDX_W-1:0] sg_addr = '0;
  logic [IDX_W-1:0] mf_addr = '0, diag_addr = '0, nd_addr = '0;
  cg_t sg_wdata = '0, nd_wdata = '0;
  cmf_t mf_wdata = '0;
  logic signed [G_W-1:0] diag_wdata = '0;
  logic busy, done;
  cx_t x_hat [U];

  stair_detector dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_recip = 0, n_nd = 0, n_x0 = 0, n_wait = 0, n_iter_rows = 0, n_rows = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_nr.we) n_recip++;
    if (dut.si_we != '0) n_nd++;
    if (dut.s_tag.valid && dut.s_tag.op == OP_X0) n_x0++;
    if (dut.s_tag.valid && dut.s_tag.op == OP_SINVB) n_iter_rows++;
    if (dut.u_ctrl.state == dut.u_ctrl.S_WAIT_LOAD) n_wait++;
    if (dut.row_we) n_rows++;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- fixed-point helpers ----------------
  function automatic longint wrap(longint v, int w);
    longint m = (64'sd1 <<< w) - 1;
    longint r = v & m;
    if (r[w-1]) r = r - (64'sd1 <<< w);
    return r;
  endfunction
  function automatic longint rnd(longint v, int sh);
    return (v + (64'sd1 <<< (sh - 1))) >>> sh;
  endfunction
  function automatic longint qr(real v, int f);  // round real to f fraction bits
    return longint'($floor(v * (2.0 ** f) + 0.5));
  endfunction

  real pi = 3.14159265358979;
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * pi * u2);
  endfunction

  // ---------------- per-trial data ----------------
  real hr [NB][U], hi [NB][U], yr [NB], yi [NB];
  int  sym_r [U], sym_i [U];
  longint gq_r [U][U], gq_i [U][U], mfq_r [U], mfq_i [U];
  longint sinv_r [U][U], sinv_i [U][U];
  longint xm_r [U], xm_i [U], tm_r [U], tm_i [U], bs_r [U], bs_i [U];
  int sym_err = 0, sym_tot = 0;

  function automatic bit stair_pos(int i, int j);
    if (i == j) return 1;
    if ((i % 2) == 1 && (j == i - 1 || j == i + 1)) return 1;
    return 0;
  endfunction

  task automatic make_trial();
    real s = 1.0 / $sqrt(2.0 * NB);
    real qs = 1.0 / $sqrt(170.0);
    for (int n = 0; n < NB; n++)
      for (int u = 0; u < U; u++) begin
        hr[n][u] = gauss() * s;
        hi[n][u] = gauss() * s;
      end
    for (int u = 0; u < U; u++) begin
      sym_r[u] = 2 * int'($urandom % 16) - 15;
      sym_i[u] = 2 * int'($urandom % 16) - 15;
    end
    for (int n = 0; n < NB; n++) begin
      yr[n] = gauss() * $sqrt(SIGMA2 / 2.0);
      yi[n] = gauss() * $sqrt(SIGMA2 / 2.0);
      for (int u = 0; u < U; u++) begin
        yr[n] += (hr[n][u] * sym_r[u] - hi[n][u] * sym_i[u]) * qs;
        yi[n] += (hr[n][u] * sym_i[u] + hi[n][u] * sym_r[u]) * qs;
      end
    end
    for (int i = 0; i < U; i++) begin
      real ar = 0.0, ai = 0.0;
      for (int j = 0; j < U; j++) begin
        real gr = (i == j) ? SIGMA2 : 0.0, gi = 0.0;
        for (int n = 0; n < NB; n++) begin  // conj(h_ni) * h_nj
          gr += hr[n][i] * hr[n][j] + hi[n][i] * hi[n][j];
          gi += hr[n][i] * hi[n][j] - hi[n][i] * hr[n][j];
        end
        gq_r[i][j] = wrap(qr(gr, G_F), G_W);
        gq_i[i][j] = (i == j) ? 0 : wrap(qr(gi, G_F), G_W);
      end
      for (int n = 0; n < NB; n++) begin
        ar += hr[n][i] * yr[n] + hi[n][i] * yi[n];
        ai += hr[n][i] * yi[n] - hi[n][i] * yr[n];
      end
      mfq_r[i] = wrap(qr(ar, MF_F), MF_W);
      mfq_i[i] = wrap(qr(ai, MF_F), MF_W);
    end
  endtask

  // reference model, using the divider's reciprocals inv[]
  task automatic model(input longint inv [U]);
    longint p, ar, ai, br, bi, accr, acci;
    for (int i = 0; i < U; i++)
      for (int j = 0; j < U; j++) begin
        sinv_r[i][j] = 0;
        sinv_i[i][j] = 0;
      end
    for (int i = 0; i < U; i++) sinv_r[i][i] = inv[i];
    for (int i = 1; i < U; i += 2)
      for (int j = i - 1; j <= i + 1 && j < U; j += 2) begin
        p = wrap(rnd(inv[i] * (inv[j] <<< 3), 16), SI_W);
        sinv_r[i][j] = wrap(rnd(-(gq_r[i][j] <<< 4) * (p <<< 3), 16), SI_W);
        sinv_i[i][j] = wrap(rnd(-(gq_i[i][j] <<< 4) * (p <<< 3), 16), SI_W);
      end
    for (int i = 0; i < U; i++) begin
      accr = 0; acci = 0;
      for (int j = 0; j < U; j++) begin
        br = mfq_r[j] <<< 6; bi = mfq_i[j] <<< 6;
        accr += sinv_r[i][j] * br - sinv_i[i][j] * bi;
        acci += sinv_r[i][j] * bi + sinv_i[i][j] * br;
      end
      xm_r[i] = wrap(rnd(accr, 21), X_W);
      xm_i[i] = wrap(rnd(acci, 21), X_W);
    end
    for (int t = 0; t < 2; t++) begin
      for (int i = 0; i < U; i++) begin
        accr = 0; acci = 0;
        for (int j = 0; j < U; j++) begin
          if (stair_pos(i, j)) continue;
          ar = -(gq_r[i][j] <<< 4); ai = -(gq_i[i][j] <<< 4);
          br = xm_r[j] <<< 8; bi = xm_i[j] <<< 8;
          accr += ar * br - ai * bi;
          acci += ar * bi + ai * br;
        end
        tm_r[i] = wrap(rnd(accr, 13), T_W);
        tm_i[i] = wrap(rnd(acci, 13), T_W);
      end
      for (int j = 0; j < U; j++) begin
        bs_r[j] = tm_r[j] + (mfq_r[j] <<< 6);
        bs_i[j] = tm_i[j] + (mfq_i[j] <<< 6);
      end
      for (int i = 0; i < U; i++) begin
        accr = 0; acci = 0;
        for (int j = 0; j < U; j++) begin
          accr += sinv_r[i][j] * bs_r[j] - sinv_i[i][j] * bs_i[j];
          acci += sinv_r[i][j] * bs_i[j] + sinv_i[i][j] * bs_r[j];
        end
        xm_r[i] = wrap(rnd(accr, 21), X_W);
        xm_i[i] = wrap(rnd(acci, 21), X_W);
      end
    end
  endtask

  function automatic int slice(longint v);  // nearest odd level -15..15
    real s = real'(v) / 256.0 * $sqrt(170.0);
    int l = 2 * int'($floor(s / 2.0)) + 1;
    if (l > 15) l = 15;
    if (l < -15) l = -15;
    return l;
  endfunction

  // ---------------- one detection ----------------
  task automatic run_trial(input int gap);
    longint t_start, t_done;
    longint inv [U];
    // registers written before start
    for (int i = 0; i < U; i++) begin
      @(negedge clk);
      mf_we = 1; mf_addr = IDX_W'(i);
      mf_wdata.re = MF_W'(mfq_r[i]); mf_wdata.im = MF_W'(mfq_i[i]);
      diag_we = 1; diag_addr = IDX_W'(i); diag_wdata = G_W'(gq_r[i][i]);
      nd_we = (i < N_ND); nd_addr = IDX_W'(i);
      nd_wdata.re = G_W'(gq_r[nd_row(i)][nd_col(i)]);
      nd_wdata.im = G_W'(gq_i[nd_row(i)][nd_col(i)]);
    end
    @(negedge clk);
    mf_we = 0; diag_we = 0; nd_we = 0;
    // start, S-G written from the start cycle on
    start = 1;
    t_start = cycle;
    for (int i = 0; i < U; i++)
      for (int j = 0; j < U; j++) begin
        sg_cs = 1; sg_we = 1; sg_addr = {IDX_W'(i), IDX_W'(j)};
        sg_wdata.re = stair_pos(i, j) ? '0 : G_W'(-gq_r[i][j]);
        sg_wdata.im = stair_pos(i, j) ? '0 : G_W'(-gq_i[i][j]);
        @(negedge clk);
        start = 0;
        if (gap > 0 && j == U - 1) begin
          sg_cs = 0; sg_we = 0;
          repeat (gap) @(negedge clk);
        end
      end
    sg_cs = 0; sg_we = 0;
    while (!done) @(negedge clk);
    t_done = cycle;
    // reciprocals
    for (int i = 0; i < U; i++) begin
      real exact = 512.0 * 8192.0 / real'(gq_r[i][i]);
      inv[i] = longint'(dut.inv[i]);
      checks++;
      if (real'(inv[i]) - exact > 2.0 || exact - real'(inv[i]) > 2.0) begin
        failures++;
        $display("reciprocal %0d: got %0d expected %f", i, inv[i], exact);
      end
    end
    model(inv);
    for (int i = 0; i < U; i++) begin
      checks++;
      if (longint'(x_hat[i].re) != xm_r[i] || longint'(x_hat[i].im) != xm_i[i]) begin
        failures++;
        $display("x[%0d]: got (%0d,%0d) expected (%0d,%0d)", i, x_hat[i].re, x_hat[i].im, xm_r[i], xm_i[i]);
      end
      sym_tot++;
      if (slice(longint'(x_hat[i].re)) != sym_r[i] || slice(longint'(x_hat[i].im)) != sym_i[i]) sym_err++;
    end
    checks++;
    if (gap == 0) begin
      if (t_done - t_start + 1 != 116) begin
        failures++;
        $display("latency %0d cycles, expected 116", t_done - t_start + 1);
      end
    end else if (t_done - t_start + 1 != 116 + 7 * gap) begin
      failures++;
      $display("latency with gaps %0d cycles, expected %0d", t_done - t_start + 1, 116 + 7 * gap);
    end
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int tr = 0; tr < TRIALS; tr++) begin
      make_trial();
      run_trial((tr % 4 == 3) ? 3 : 0);
    end
    checks++;
    if (sym_err * 20 > sym_tot) begin
      failures++;
      $display("symbol errors %0d of %0d", sym_err, sym_tot);
    end
    $display("symbol errors %0d of %0d", sym_err, sym_tot);
    $display("mechanisms: reciprocals=%0d offdiag_writes=%0d x0_rows=%0d wait_load_cycles=%0d iteration_rows=%0d sg_rows=%0d",
             n_recip, n_nd, n_x0, n_wait, n_iter_rows, n_rows);
    checks += 6;
    if (n_recip == 0) failures++;
    if (n_nd == 0) failures++;
    if (n_x0 == 0) failures++;
    if (n_wait == 0) failures++;
    if (n_iter_rows == 0) failures++;
    if (n_rows == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
