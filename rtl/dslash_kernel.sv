// dslash_kernel: one Wilson-Dirac stencil evaluation per clock cycle,
//   D psi(n) = (m_q + 4) psi(n)
//            + 1/2 sum_mu [ U_mu(n) (1 - gamma_mu) psi(n+mu)
//                         + U_mu^dagger(n-mu) (1 + gamma_mu) psi(n-mu) ]
//
// Four pipeline stages, as in the stencil computation sequence:
//   stage 1   1 cycle   inputs copied into local registers
//   stage 2  14 cycles  spin projection, 16 colour-vector add/sub (spin_project)
//   stage 3  70 cycles  16 SU(3) matrix-vector products, 5 layers (su3_matvec)
//   stage 4  57 cycles  rebuild + 4-layer sum + halving copy (spin_accumulate)
// Total KERNEL_LAT = 142 cycles from in_valid to out_valid; initiation
// interval 1 (a new stencil may enter every cycle, no stalls). The mass term
// 2(m_q+4) psi(n) is multiplied during stages 2-3 (24 multiplications) and
// delayed to meet stage 4. Operation count: 96 + 1152 + 216 = 1464 per site,
// counting the accumulator start 0 + p_0 of stage 3 as four operations as the
// paper does, though here it is an exact delay.
//
// Interface: in_valid/in_tag/in_data/mass (mass = m_q + 4 as a floating point
// number, held constant during a sweep; doubled here by an exponent
// increment). out_valid/out_tag follow the same data by KERNEL_LAT cycles;
// the tag is carried unchanged (a site index or record number).
module dslash_kernel
  import dirac_pkg::*;
#(
  parameter int unsigned TAG_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  stencil_in_t      in_data,
  input  fp_t              mass,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output spinor_t          out_data
);
  // ---- stage 1: local registers
  stencil_in_t s1;
  fp_t         mass2;
  logic        s1_valid;
  logic [TAG_W-1:0] s1_tag;

  always_ff @(posedge clk) begin
    s1    <= in_data;
    s1_tag <= in_tag;
    // 2 (m_q + 4): exponent + 1 (mass is a normal number of modest size)
    mass2 <= {mass[FP_W-1], mass[FP_W-2 -: EXP_W] + 1'b1, mass[MAN_W-1:0]};
  end
  always_ff @(posedge clk) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= in_valid;
  end

  // ---- stage 2: projection
  halfspinor_t [NHOP-1:0] h;
  spin_project u_s2 (.clk(clk), .psi_hop(s1.psi_hop), .h(h));

  // link matrices wait for stage 2
  su3_t [NHOP-1:0] u_d;
  delay_line #(.W($bits(u_d)), .N(STAGE2_LAT)) u_udly (
    .clk(clk), .rst_n(1'b1), .d(s1.u), .q(u_d));

  // ---- stage 3: colour rotation, 16 matrix-vector products
  halfspinor_t [NHOP-1:0] chi;
  for (genvar k = 0; k < NHOP; k++) begin : g_hop
    for (genvar s = 0; s < 2; s++) begin : g_spin
      su3_matvec u_mv (.clk(clk), .u(u_d[k]), .v(h[k][s]), .w(chi[k][s]));
    end
  end

  // mass term, computed alongside stages 2 and 3
  spinor_t m2psi, m2psi_d;
  for (genvar s = 0; s < 4; s++) begin : g_ms
    for (genvar c = 0; c < 3; c++) begin : g_mc
      fp_mul u_mre (.clk(clk), .a(mass2), .b(s1.psi_c[s][c].re), .y(m2psi[s][c].re));
      fp_mul u_mim (.clk(clk), .a(mass2), .b(s1.psi_c[s][c].im), .y(m2psi[s][c].im));
    end
  end
  delay_line #(.W($bits(spinor_t)), .N(STAGE2_LAT + STAGE3_LAT - MUL_LAT)) u_mdly (
    .clk(clk), .rst_n(1'b1), .d(m2psi), .q(m2psi_d));

  // ---- stage 4: accumulation
  spin_accumulate u_s4 (.clk(clk), .chi(chi), .m2psi(m2psi_d), .d_out(out_data));

  // valid and tag follow the data
  localparam int unsigned REST = KERNEL_LAT - STAGE1_LAT;
  delay_line #(.W(1), .N(REST), .HAS_RST(1'b1)) u_vdly (
    .clk(clk), .rst_n(rst_n), .d(s1_valid), .q(out_valid));
  delay_line #(.W(TAG_W), .N(REST)) u_tdly (
    .clk(clk), .rst_n(1'b1), .d(s1_tag), .q(out_tag));

endmodule
