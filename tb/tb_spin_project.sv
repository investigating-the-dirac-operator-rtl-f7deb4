// tb_spin_project: feeds 300 random sets of eight neighbour spinors, one set
// per cycle, and compares the sixteen half-spinor components with the upper
// half of (1 -/+ gamma_mu) psi computed from the written-out 4x4 gamma
// matrices, bit for bit, 14 cycles (one addition) later.
module tb_spin_project;
  import dirac_pkg::*;
  import dirac_ref_pkg::*;

  localparam int N = 300;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  spinor_t     [NHOP-1:0] psi_hop;
  halfspinor_t [NHOP-1:0] h;
  spin_project dut (.clk(clk), .psi_hop(psi_hop), .h(h));

  spinor_t stim [N][NHOP];
  int      checks = 0, failures = 0;
  longint  cycle = 0;

  initial for (int i = 0; i < N; i++) for (int k = 0; k < NHOP; k++) stim[i][k] = rand_spinor();

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (cycle < N) for (int k = 0; k < NHOP; k++) psi_hop[k] <= stim[int'(cycle)][k];
    if (cycle >= longint'(STAGE2_LAT) + 1 && cycle < N + longint'(STAGE2_LAT) + 1) begin
      int i;
      real r [2][3][2];
      i = int'(cycle) - int'(STAGE2_LAT) - 1;
      for (int k = 0; k < NHOP; k++) begin
        project(k, stim[i][k], r);
        for (int s = 0; s < 2; s++) for (int c = 0; c < 3; c++) begin
          checks++;
          if (h[k][s][c].re !== tf(r[s][c][0]) || h[k][s][c].im !== tf(r[s][c][1])) begin
            failures++;
            if (failures < 10) $display("set %0d hop %0d spin %0d colour %0d wrong", i, k, s, c);
          end
        end
      end
    end
    if (cycle == N + longint'(STAGE2_LAT) + 2) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (N + 500) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
