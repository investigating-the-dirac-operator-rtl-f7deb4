// lattice_store: on-chip memory holding a whole (sub)lattice so that one
// stencil's complete input can be read in a single cycle.
//
// A block RAM delivers one word per port per cycle, so every operand of the
// stencil lives in a bank of its own:
//   * 8 link banks. Bank k = 0..3 holds U_k(n); bank 4+k holds the
//     conjugate-transposed link of the backward neighbour, U_k^dagger(n-k),
//     stored at address n. The host writes the daggered, shifted copy itself
//     (links are stored twice, once plain and once daggered); all 8 banks are
//     then read at the same address n.
//   * 9 spinor banks, each a full copy of the spinor field: bank 0 is read at
//     n, bank 1+k at the address of neighbour k. A write goes to all 9 copies.
// One word of a bank is a whole spinor (24 numbers) or matrix (18 numbers).
//
// Read: rd_en with rd_site and rd_nbr; rd_data holds the stencil_in_t one
// cycle later (registered read, the stage-1 copy of the stencil pipeline
// happens in the kernel). Write: one spinor and/or one link per cycle.
// Sizes default to the 12 x 8 x 8 x 8 lattice, the largest that fits on chip
// in double precision.
module lattice_store
  import dirac_pkg::*;
#(
  parameter int unsigned L0 = 12,
  parameter int unsigned L1 = 8,
  parameter int unsigned L2 = 8,
  parameter int unsigned L3 = 8,
  localparam int unsigned V  = L0 * L1 * L2 * L3,
  localparam int unsigned AW = $clog2(V)
) (
  input  logic                   clk,
  // host writes
  input  logic                   psi_we,
  input  logic [AW-1:0]          psi_waddr,
  input  spinor_t                psi_wdata,
  input  logic                   u_we,
  input  logic [2:0]             u_wbank,
  input  logic [AW-1:0]          u_waddr,
  input  su3_t                   u_wdata,
  // stencil reads
  input  logic                   rd_en,
  input  logic [AW-1:0]          rd_site,
  input  logic [NHOP-1:0][AW-1:0] rd_nbr,
  output stencil_in_t            rd_data
);
  for (genvar j = 0; j <= NHOP; j++) begin : g_psi
    spinor_t mem [V];
    logic [AW-1:0] ra;
    assign ra = (j == 0) ? rd_site : rd_nbr[(j == 0) ? 0 : j - 1];
    always_ff @(posedge clk) begin
      if (psi_we) mem[psi_waddr] <= psi_wdata;
      if (rd_en) begin
        if (j == 0) rd_data.psi_c <= mem[ra];
        else        rd_data.psi_hop[(j == 0) ? 0 : j - 1] <= mem[ra];
      end
    end
  end

  for (genvar k = 0; k < NHOP; k++) begin : g_u
    su3_t mem [V];
    always_ff @(posedge clk) begin
      if (u_we && u_wbank == 3'(k)) mem[u_waddr] <= u_wdata;
      if (rd_en) rd_data.u[k] <= mem[rd_site];
    end
  end
endmodule
