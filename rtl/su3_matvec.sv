// su3_matvec: stage 3 building block, colour matrix times colour vector,
// w = U v with U a 3x3 complex matrix and v a complex 3-vector.
//
// Five-layer cascade, each layer one arithmetic latency:
//   layer 1  the 36 real products  u_re*v_re, u_im*v_im, u_re*v_im, u_im*v_re
//   layer 2  complex products      p_j = (ur vr - ui vi) + i (ur vi + ui vr)
//   layer 3  accumulator start     acc = 0 + p_0   (exact, realised as a delay)
//   layer 4  acc = acc + p_1
//   layer 5  acc = acc + p_2
// so each of the 9 complex multiply-accumulates costs 4 multiplications and 4
// additions and the result appears MUL_LAT + 4*ADD_LAT = 70 cycles after the
// operands. Fully pipelined. The stencil uses 16 instances (8 matrices times
// the 2 spin components of each projected half spinor); for backward hops the
// matrix is the stored U^dagger, so no conjugation is done here.
module su3_matvec
  import dirac_pkg::*;
(
  input  logic    clk,
  input  su3_t    u,
  input  colvec_t v,
  output colvec_t w
);
  for (genvar r = 0; r < 3; r++) begin : g_row
    fp_t   [2:0] prr, pii, pri, pir;    // layer 1 outputs
    cplx_t [2:0] p;                     // layer 2 outputs
    cplx_t       p1_d, p2_d, acc0, acc1;
    for (genvar j = 0; j < 3; j++) begin : g_term
      fp_mul u_rr (.clk(clk), .a(u[r][j].re), .b(v[j].re), .y(prr[j]));
      fp_mul u_ii (.clk(clk), .a(u[r][j].im), .b(v[j].im), .y(pii[j]));
      fp_mul u_ri (.clk(clk), .a(u[r][j].re), .b(v[j].im), .y(pri[j]));
      fp_mul u_ir (.clk(clk), .a(u[r][j].im), .b(v[j].re), .y(pir[j]));
      fp_add u_cre (.clk(clk), .a(prr[j]), .b(fp_neg(pii[j])), .y(p[j].re));
      fp_add u_cim (.clk(clk), .a(pri[j]), .b(pir[j]),         .y(p[j].im));
    end
    // layer 3: 0 + p_0 = p_0 exactly, so the addition is a delay
    delay_line #(.W($bits(cplx_t)), .N(ADD_LAT))     u_d0 (.clk(clk), .rst_n(1'b1), .d(p[0]), .q(acc0));
    delay_line #(.W($bits(cplx_t)), .N(ADD_LAT))     u_d1 (.clk(clk), .rst_n(1'b1), .d(p[1]), .q(p1_d));
    delay_line #(.W($bits(cplx_t)), .N(2 * ADD_LAT)) u_d2 (.clk(clk), .rst_n(1'b1), .d(p[2]), .q(p2_d));
    // layer 4
    fp_add u_a1re (.clk(clk), .a(acc0.re), .b(p1_d.re), .y(acc1.re));
    fp_add u_a1im (.clk(clk), .a(acc0.im), .b(p1_d.im), .y(acc1.im));
    // layer 5
    fp_add u_a2re (.clk(clk), .a(acc1.re), .b(p2_d.re), .y(w[r].re));
    fp_add u_a2im (.clk(clk), .a(acc1.im), .b(p2_d.im), .y(w[r].im));
  end
endmodule
