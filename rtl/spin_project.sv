// spin_project: stage 2 of the stencil pipeline.
//
// For each of the eight neighbour spinors psi_hop[k] it forms the two upper
// spin components of the projection (1 -/+ gamma_mu) psi: forward hops
// (k = 0..3, mu = k) use 1 - gamma_mu, backward hops (k = 4..7, mu = k-4) use
// 1 + gamma_mu. With gamma = [[0, A], [A^dagger, 0]] the upper half is
//   h[s] = psi[s] -/+ i^c(mu,s) * psi[2 + a_col(mu,s)],   s = 0, 1,
// i.e. one vector addition or subtraction per spin row: 8 additions and 8
// subtractions of colour vectors, 96 real additions, all in parallel. The
// lower half is not computed; stage 4 rebuilds it from the upper half.
// Latency ADD_LAT (14) cycles, one new set per cycle.
module spin_project
  import dirac_pkg::*;
(
  input  logic                         clk,
  input  spinor_t     [NHOP-1:0]       psi_hop,
  output halfspinor_t [NHOP-1:0]       h
);
  for (genvar k = 0; k < NHOP; k++) begin : g_hop
    localparam int unsigned MU  = k % NDIR;
    localparam bit          FWD = (k < NDIR);
    for (genvar s = 0; s < 2; s++) begin : g_spin
      cplx_t [2:0] other;
      for (genvar c = 0; c < 3; c++) begin : g_col
        cplx_t t;
        always_comb begin
          t = mul_ipow(psi_hop[k][2 + a_col(MU, s)][c], a_phase(MU, s));
          other[c] = FWD ? cplx_t'({fp_neg(t.re), fp_neg(t.im)}) : t;
        end
        fp_add u_re (.clk(clk), .a(psi_hop[k][s][c].re), .b(other[c].re), .y(h[k][s][c].re));
        fp_add u_im (.clk(clk), .a(psi_hop[k][s][c].im), .b(other[c].im), .y(h[k][s][c].im));
      end
    end
  end
endmodule
