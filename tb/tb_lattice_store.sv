// tb_lattice_store: on a 3x2x2x2 lattice, writes random spinors and links
// (some sites rewritten), then issues 200 random reads with independent
// random site and neighbour addresses, checking every field of the returned
// stencil set one cycle later against a shadow copy; also checks that a
// cycle without rd_en holds the previous output.
module tb_lattice_store;
  import dirac_pkg::*;
  import dirac_ref_pkg::*;

  localparam int L0 = 3, L1 = 2, L2 = 2, L3 = 2;
  localparam int V = L0 * L1 * L2 * L3;
  localparam int AW = $clog2(V);
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic psi_we = 0, u_we = 0, rd_en = 0;
  logic [AW-1:0] psi_waddr, u_waddr, rd_site;
  logic [2:0] u_wbank;
  spinor_t psi_wdata;
  su3_t u_wdata;
  logic [NHOP-1:0][AW-1:0] rd_nbr;
  stencil_in_t rd_data, held;

  lattice_store #(.L0(L0), .L1(L1), .L2(L2), .L3(L3)) dut (.*);

  spinor_t sh_psi [V];
  su3_t    sh_u   [8][V];
  int checks = 0, failures = 0;

  initial begin
    for (int pass = 0; pass < 2; pass++)
      for (int n = 0; n < V; n++) begin
        if (pass == 1 && n % 3 != 0) continue;
        @(posedge clk);
        psi_we <= 1; psi_waddr <= AW'(n); sh_psi[n] = rand_spinor(); psi_wdata <= sh_psi[n];
        u_we <= 1; u_waddr <= AW'(n); u_wbank <= 3'(n % 8);
        sh_u[n % 8][n] = rand_su3(); u_wdata <= sh_u[n % 8][n];
      end
    for (int k = 0; k < 8; k++)
      for (int n = 0; n < V; n++) begin
        if (k == n % 8) continue;
        @(posedge clk);
        psi_we <= 0;
        u_we <= 1; u_waddr <= AW'(n); u_wbank <= 3'(k);
        sh_u[k][n] = rand_su3(); u_wdata <= sh_u[k][n];
      end
    @(posedge clk);
    u_we <= 0; psi_we <= 0;
    for (int i = 0; i < 200; i++) begin
      int site, nb[8];
      stencil_in_t e;
      site = int'($urandom % V);
      for (int k = 0; k < 8; k++) nb[k] = int'($urandom % V);
      rd_en <= 1; rd_site <= AW'(site);
      for (int k = 0; k < 8; k++) rd_nbr[k] <= AW'(nb[k]);
      @(posedge clk);
      rd_en <= (i % 5 != 4);
      @(negedge clk);
      e.psi_c = sh_psi[site];
      for (int k = 0; k < 8; k++) begin e.psi_hop[k] = sh_psi[nb[k]]; e.u[k] = sh_u[k][site]; end
      checks++;
      if (rd_data.psi_c !== e.psi_c) begin failures++; $display("read %0d centre spinor", i); end
      for (int k = 0; k < 8; k++) begin
        checks += 2;
        if (rd_data.psi_hop[k] !== e.psi_hop[k]) begin failures++; $display("read %0d hop spinor %0d", i, k); end
        if (rd_data.u[k] !== e.u[k]) begin failures++; $display("read %0d link bank %0d", i, k); end
      end
      if (i % 5 == 4) begin
        // no read this cycle: output must hold
        held = rd_data;
        rd_site <= AW'(($urandom % V));
        @(posedge clk);
        @(negedge clk);
        checks++;
        if (rd_data !== held) begin failures++; $display("output changed without rd_en"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
