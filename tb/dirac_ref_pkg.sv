// dirac_ref_pkg: reference model of the Wilson-Dirac stencil for the
// testbenches, written with the simulator's double precision `real`.
//
// Two references are given:
//   ref_dslash_exact  follows the hardware's order of operations (spin
//                     projection, colour products summed as ((p0)+p1)+p2,
//                     lower spin half rebuilt from the upper one, 9-term tree
//                     ((t0+t1)+(t2+t3))+((t4+t5)+(t6+t7)) + t8, then * 0.5),
//                     so a correct datapath matches it bit for bit.
//   ref_dslash_plain  the textbook formula with full 4x4 gamma matrices and the
//                     matrix applied to all four spin components; it shares no
//                     shortcut with the hardware and is compared with a
//                     relative tolerance.
// Gamma matrices are written out in the chiral representation; direction 0 is
// gamma_4 (time), directions 1..3 are gamma_1..gamma_3.
package dirac_ref_pkg;
  import dirac_pkg::*;

  typedef real cmat4_t [4][4][2];

  function automatic real fr(fp_t x);
    return $bitstoreal(x);
  endfunction
  function automatic fp_t tf(real x);
    return $realtobits(x);
  endfunction

  // gamma[mu][row][col] as {re, im}
  function automatic cmat4_t gamma(int mu);
    cmat4_t g;
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin g[i][j][0] = 0.0; g[i][j][1] = 0.0; end
    case (mu)
      0: begin // gamma_4
        g[0][2][0] = 1; g[1][3][0] = 1; g[2][0][0] = 1; g[3][1][0] = 1;
      end
      1: begin // gamma_1
        g[0][3][1] = -1; g[1][2][1] = -1; g[2][1][1] = 1; g[3][0][1] = 1;
      end
      2: begin // gamma_2
        g[0][3][0] = -1; g[1][2][0] = 1; g[2][1][0] = 1; g[3][0][0] = -1;
      end
      default: begin // gamma_3
        g[0][2][1] = -1; g[1][3][1] = 1; g[2][0][1] = 1; g[3][1][1] = -1;
      end
    endcase
    return g;
  endfunction

  // random normal number, |x| in [2^-4, 2^5)
  function automatic fp_t rand_fp();
    logic [MAN_W-1:0] f;
    int e;
    f = {$urandom, $urandom};
    e = 1023 + int'($urandom % 9) - 4;
    return {1'($urandom), 11'(e), f};
  endfunction

  function automatic spinor_t rand_spinor();
    spinor_t p;
    for (int s = 0; s < 4; s++) for (int c = 0; c < 3; c++) begin
      p[s][c].re = rand_fp(); p[s][c].im = rand_fp();
    end
    return p;
  endfunction

  function automatic su3_t rand_su3();
    su3_t u;
    for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) begin
      u[r][c].re = rand_fp(); u[r][c].im = rand_fp();
    end
    return u;
  endfunction

  function automatic su3_t dagger(su3_t u);
    su3_t d;
    for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) begin
      d[r][c].re = u[c][r].re;
      d[r][c].im = fp_neg(u[c][r].im);
    end
    return d;
  endfunction

  function automatic stencil_in_t rand_stencil();
    stencil_in_t st;
    st.psi_c = rand_spinor();
    for (int k = 0; k < 8; k++) begin
      st.psi_hop[k] = rand_spinor();
      st.u[k]       = rand_su3();
    end
    return st;
  endfunction

  // sign of the projector: forward hops use 1 - gamma, backward 1 + gamma
  function automatic real hop_sign(int k);
    return (k < 4) ? -1.0 : 1.0;
  endfunction

  // complex (a*b) with the hardware's product grouping
  function automatic void cmul(input real ar, ai, br, bi, output real yr, yi);
    yr = ar * br - ai * bi;
    yi = ar * bi + ai * br;
  endfunction

  // upper half of (1 -/+ gamma) psi, one rounding per component
  function automatic void project(input int k, input spinor_t p, output real h[2][3][2]);
    cmat4_t g;
    real accr, acci, tr, ti;
    g = gamma(k % 4);
    for (int s = 0; s < 2; s++) for (int c = 0; c < 3; c++) begin
      accr = 0.0; acci = 0.0;
      for (int j = 0; j < 4; j++) begin
        cmul(g[s][j][0], g[s][j][1], fr(p[j][c].re), fr(p[j][c].im), tr, ti);
        accr = accr + tr; acci = acci + ti;
      end
      h[s][c][0] = fr(p[s][c].re) + hop_sign(k) * accr;
      h[s][c][1] = fr(p[s][c].im) + hop_sign(k) * acci;
    end
  endfunction

  function automatic spinor_t ref_dslash_exact(stencil_in_t st, fp_t mass);
    real h[2][3][2];
    real chi[8][2][3][2];
    real full[8][4][3][2];
    real m2, pr, pi_, ar, ai, accr, acci, tr, ti;
    real t[9], l1[4], l2[2], l3, l4;
    cmat4_t g;
    spinor_t out;
    m2 = 2.0 * fr(mass);
    for (int k = 0; k < 8; k++) begin
      project(k, st.psi_hop[k], h);
      for (int s = 0; s < 2; s++) for (int r = 0; r < 3; r++) begin
        for (int j = 0; j < 3; j++) begin
          cmul(fr(st.u[k][r][j].re), fr(st.u[k][r][j].im), h[s][j][0], h[s][j][1], pr, pi_);
          if (j == 0) begin ar = pr; ai = pi_; end
          else begin ar = ar + pr; ai = ai + pi_; end
        end
        chi[k][s][r][0] = ar; chi[k][s][r][1] = ai;
      end
      g = gamma(k % 4);
      for (int c = 0; c < 3; c++) begin
        for (int s = 0; s < 2; s++) begin
          full[k][s][c][0] = chi[k][s][c][0];
          full[k][s][c][1] = chi[k][s][c][1];
          // lower row 2+s = sign * (A^dagger chi), A^dagger = lower-left block
          accr = 0.0; acci = 0.0;
          for (int j = 0; j < 2; j++) begin
            cmul(g[2+s][j][0], g[2+s][j][1], chi[k][j][c][0], chi[k][j][c][1], tr, ti);
            accr = accr + tr; acci = acci + ti;
          end
          full[k][2+s][c][0] = hop_sign(k) * accr;
          full[k][2+s][c][1] = hop_sign(k) * acci;
        end
      end
    end
    for (int s = 0; s < 4; s++) for (int c = 0; c < 3; c++) for (int q = 0; q < 2; q++) begin
      for (int k = 0; k < 8; k++) t[k] = full[k][s][c][q];
      t[8] = m2 * (q ? fr(st.psi_c[s][c].im) : fr(st.psi_c[s][c].re));
      for (int i = 0; i < 4; i++) l1[i] = t[2*i] + t[2*i+1];
      l2[0] = l1[0] + l1[1];
      l2[1] = l1[2] + l1[3];
      l3 = l2[0] + l2[1];
      l4 = (l3 + t[8]) * 0.5;
      if (q == 0) out[s][c].re = tf(l4); else out[s][c].im = tf(l4);
    end
    return out;
  endfunction

  // straightforward evaluation, for comparison with a tolerance
  function automatic void ref_dslash_plain(input stencil_in_t st, input fp_t mass,
                                           output real res[4][3][2]);
    cmat4_t g;
    real ps[4][3][2];
    real pr, pi_, tr, ti;
    for (int s = 0; s < 4; s++) for (int c = 0; c < 3; c++) begin
      res[s][c][0] = fr(mass) * fr(st.psi_c[s][c].re);
      res[s][c][1] = fr(mass) * fr(st.psi_c[s][c].im);
    end
    for (int k = 0; k < 8; k++) begin
      g = gamma(k % 4);
      // ps = (1 -/+ gamma) psi
      for (int s = 0; s < 4; s++) for (int c = 0; c < 3; c++) begin
        pr = fr(st.psi_hop[k][s][c].re); pi_ = fr(st.psi_hop[k][s][c].im);
        for (int j = 0; j < 4; j++) begin
          cmul(g[s][j][0], g[s][j][1], fr(st.psi_hop[k][j][c].re), fr(st.psi_hop[k][j][c].im), tr, ti);
          pr = pr + hop_sign(k) * tr; pi_ = pi_ + hop_sign(k) * ti;
        end
        ps[s][c][0] = pr; ps[s][c][1] = pi_;
      end
      // res += 1/2 U ps
      for (int s = 0; s < 4; s++) for (int r = 0; r < 3; r++)
        for (int j = 0; j < 3; j++) begin
          cmul(fr(st.u[k][r][j].re), fr(st.u[k][r][j].im), ps[s][j][0], ps[s][j][1], tr, ti);
          res[s][r][0] = res[s][r][0] + 0.5 * tr;
          res[s][r][1] = res[s][r][1] + 0.5 * ti;
        end
    end
  endfunction

  // largest deviation of a result from the plain reference, relative to the
  // largest magnitude among the reference values
  function automatic real rel_dev(spinor_t got, real res[4][3][2]);
    real dmax, vmax, d;
    dmax = 0.0; vmax = 1e-300;
    for (int s = 0; s < 4; s++) for (int c = 0; c < 3; c++) for (int q = 0; q < 2; q++) begin
      d = (q ? fr(got[s][c].im) : fr(got[s][c].re)) - res[s][c][q];
      if (d < 0) d = -d;
      if (d > dmax) dmax = d;
      d = res[s][c][q] < 0 ? -res[s][c][q] : res[s][c][q];
      if (d > vmax) vmax = d;
    end
    return dmax / vmax;
  endfunction

endpackage
