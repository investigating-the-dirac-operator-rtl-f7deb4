// tb_su3_matvec: 500 random matrix-vector pairs, one per cycle; each product
// is compared bit for bit with w_r = ((U_r0 v_0) + U_r1 v_1) + U_r2 v_2 in
// double precision (complex products as (ar br - ai bi, ar bi + ai br)) and
// must appear exactly 70 cycles (5 layers of 14) after its operands.
module tb_su3_matvec;
  import dirac_pkg::*;
  import dirac_ref_pkg::*;

  localparam int N = 500;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  su3_t    u;
  colvec_t v, w;
  su3_matvec dut (.clk(clk), .u(u), .v(v), .w(w));

  su3_t    su [N];
  spinor_t sv [N];   // colour vector taken from spin component 0
  int      checks = 0, failures = 0;
  longint  cycle = 0;

  initial for (int i = 0; i < N; i++) begin su[i] = rand_su3(); sv[i] = rand_spinor(); end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (cycle < N) begin u <= su[int'(cycle)]; v <= sv[int'(cycle)][0]; end
    if (cycle >= longint'(STAGE3_LAT) + 1 && cycle < N + longint'(STAGE3_LAT) + 1) begin
      int i;
      real ar, ai, pr, pi_;
      i = int'(cycle) - int'(STAGE3_LAT) - 1;
      for (int r = 0; r < 3; r++) begin
        for (int j = 0; j < 3; j++) begin
          cmul(fr(su[i][r][j].re), fr(su[i][r][j].im), fr(sv[i][0][j].re), fr(sv[i][0][j].im), pr, pi_);
          if (j == 0) begin ar = pr; ai = pi_; end else begin ar = ar + pr; ai = ai + pi_; end
        end
        checks++;
        if (w[r].re !== tf(ar) || w[r].im !== tf(ai)) begin
          failures++;
          if (failures < 10) $display("product %0d row %0d: %h %h expected %h %h", i, r, w[r].re, w[r].im, tf(ar), tf(ai));
        end
      end
    end
    if (cycle == N + longint'(STAGE3_LAT) + 2) begin
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
