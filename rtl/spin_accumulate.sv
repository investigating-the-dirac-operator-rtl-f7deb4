// spin_accumulate: stage 4 of the stencil pipeline.
//
// Input: the eight colour-rotated half spinors chi[k] = U h[k] from stage 3
// and the mass term m2psi = 2 (m_q + 4) psi(n), aligned with them.
// For every hop the full four-spinor contribution is rebuilt from its upper
// half without arithmetic: the upper components are chi[k] and the lower ones
// are -/+ A^dagger chi[k] (minus for forward hops, plus for backward hops),
// which is a swap of spin rows, a swap of real and imaginary part and sign
// changes. For each of the 24 real outputs the 9 terms (8 hops and the mass
// term) are then summed by a 4-layer adder tree
//   ((t0+t1)+(t2+t3)) + ((t4+t5)+(t6+t7))  + t8
// with t8 delayed past the first three layers, and the sum is halved in a
// final copy stage (exponent decrement, exact). So the output is
//   (m_q + 4) psi(n) + 1/2 * sum_k (projected, colour-rotated neighbour k)
// Latency 4*ADD_LAT + 1 = 57 cycles, one result per cycle.
module spin_accumulate
  import dirac_pkg::*;
(
  input  logic                    clk,
  input  halfspinor_t [NHOP-1:0]  chi,
  input  spinor_t                 m2psi,
  output spinor_t                 d_out
);
  localparam int EMAX = (1 << EXP_W) - 1;

  // halve a floating point number: exponent minus one, flushing to zero
  function automatic fp_t fp_half(fp_t a);
    logic [EXP_W-1:0] e;
    e = a[FP_W-2 -: EXP_W];
    if (int'(e) == EMAX) return a;
    if (e <= 1)          return {a[FP_W-1], {(FP_W-1){1'b0}}};
    return {a[FP_W-1], e - 1'b1, a[MAN_W-1:0]};
  endfunction

  spinor_t sum;

  for (genvar s = 0; s < 4; s++) begin : g_spin
    for (genvar c = 0; c < 3; c++) begin : g_col
      cplx_t [NHOP-1:0] t;
      for (genvar k = 0; k < NHOP; k++) begin : g_term
        localparam int unsigned MU  = k % NDIR;
        localparam bit          FWD = (k < NDIR);
        if (s < 2) begin : g_up
          assign t[k] = chi[k][s][c];
        end else begin : g_low
          localparam int unsigned J = a_col(MU, s - 2);
          cplx_t r;
          always_comb begin
            r    = mul_ipow(chi[k][J][c], 2'd0 - a_phase(MU, J));   // conj(i^c) = i^(-c)
            t[k] = FWD ? cplx_t'({fp_neg(r.re), fp_neg(r.im)}) : r;
          end
        end
      end
      for (genvar q = 0; q < 2; q++) begin : g_part
        fp_t [3:0] l1;
        fp_t [1:0] l2;
        fp_t       l3, l4, m_d;
        for (genvar i = 0; i < 4; i++) begin : g_l1
          fp_add u_add (.clk(clk), .a(q ? t[2*i].im : t[2*i].re),
                        .b(q ? t[2*i+1].im : t[2*i+1].re), .y(l1[i]));
        end
        fp_add u_l2a (.clk(clk), .a(l1[0]), .b(l1[1]), .y(l2[0]));
        fp_add u_l2b (.clk(clk), .a(l1[2]), .b(l1[3]), .y(l2[1]));
        fp_add u_l3  (.clk(clk), .a(l2[0]), .b(l2[1]), .y(l3));
        delay_line #(.W(FP_W), .N(3 * ADD_LAT)) u_md (
          .clk(clk), .rst_n(1'b1), .d(q ? m2psi[s][c].im : m2psi[s][c].re), .q(m_d));
        fp_add u_l4  (.clk(clk), .a(l3), .b(m_d), .y(l4));
        if (q == 0) begin : g_re
          assign sum[s][c].re = l4;
        end else begin : g_im
          assign sum[s][c].im = l4;
        end
      end
    end
  end

  // copy stage with the factor 1/2
  always_ff @(posedge clk) begin
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < 3; c++) begin
        d_out[s][c].re <= fp_half(sum[s][c].re);
        d_out[s][c].im <= fp_half(sum[s][c].im);
      end
  end
endmodule
