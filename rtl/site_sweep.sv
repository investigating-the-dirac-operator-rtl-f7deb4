// site_sweep: loop controller of the on-chip mode. After a start pulse it
// visits every site of the L0 x L1 x L2 x L3 lattice once, one site per
// cycle, and gives for each the site index n and the indices of its eight
// neighbours n +/- mu. Sites are numbered n = x0 + L0*(x1 + L1*(x2 + L2*x3));
// direction mu = 0 is the one of extent L0 (each extent at most 255, the
// coordinate counters being 8 bits wide). Boundaries are periodic (own
// choice: the text does not say how the lattice edge is treated); the
// neighbour index is formed by adding or subtracting the direction's stride,
// corrected by (L_mu - 1)*stride at the edge, so no multiplier is needed.
//
// Timing: start is accepted when idle; issue_valid is high for exactly V
// cycles starting the cycle after start, issue_last marks the final site.
module site_sweep
  import dirac_pkg::*;
#(
  parameter int unsigned L0 = 12,
  parameter int unsigned L1 = 8,
  parameter int unsigned L2 = 8,
  parameter int unsigned L3 = 8,
  localparam int unsigned V  = L0 * L1 * L2 * L3,
  localparam int unsigned AW = $clog2(V)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  output logic                    issue_valid,
  output logic                    issue_last,
  output logic [AW-1:0]           issue_site,
  output logic [NHOP-1:0][AW-1:0] issue_nbr,
  output logic [NDIR-1:0]         issue_wrap    // site lies on the lattice edge in direction mu
);
  localparam int unsigned L [NDIR] = '{L0, L1, L2, L3};
  localparam int unsigned S [NDIR] = '{1, L0, L0 * L1, L0 * L1 * L2};

  logic [NDIR-1:0][7:0] x;
  logic [AW-1:0]        n;
  logic                 active;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0;
      n      <= '0;
      x      <= '0;
    end else if (!active) begin
      if (start) begin
        active <= 1'b1;
        n      <= '0;
        x      <= '0;
      end
    end else begin
      if (issue_last) active <= 1'b0;
      n <= n + 1'b1;
      // odometer over the four coordinates
      for (int mu = 0; mu < int'(NDIR); mu++) begin
        logic carry;
        carry = 1'b1;
        for (int nu = 0; nu < mu; nu++) carry &= (int'(x[nu]) == int'(L[nu]) - 1);
        if (carry) x[mu] <= (int'(x[mu]) == int'(L[mu]) - 1) ? 8'd0 : x[mu] + 8'd1;
      end
    end
  end

  always_comb begin
    issue_valid = active;
    issue_site  = n;
    issue_last  = active && (int'(n) == int'(V) - 1);
    for (int mu = 0; mu < int'(NDIR); mu++) begin
      logic hi, lo;
      hi = (int'(x[mu]) == int'(L[mu]) - 1);
      lo = (x[mu] == 8'd0);
      issue_wrap[mu]        = hi | lo;
      issue_nbr[mu]         = hi ? AW'(n - AW'((L[mu] - 1) * S[mu])) : AW'(n + AW'(S[mu]));
      issue_nbr[NDIR + mu]  = lo ? AW'(n + AW'((L[mu] - 1) * S[mu])) : AW'(n - AW'(S[mu]));
    end
  end
endmodule
