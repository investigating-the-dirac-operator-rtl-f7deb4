// tb_spin_accumulate: 200 random sets of eight half spinors and a mass term,
// one set per cycle. The expected spinor is built independently: the lower
// spin rows of each hop are -/+ (lower-left block of the written-out gamma
// matrix) times the upper rows, the nine terms are summed in the tree order
// ((t0+t1)+(t2+t3))+((t4+t5)+(t6+t7)) + t8 and halved. Checked bit for bit
// and at the stage latency of 57 cycles (four additions and one copy).
module tb_spin_accumulate;
  import dirac_pkg::*;
  import dirac_ref_pkg::*;

  localparam int N = 200;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  halfspinor_t [NHOP-1:0] chi;
  spinor_t                m2psi, d_out;
  spin_accumulate dut (.clk(clk), .chi(chi), .m2psi(m2psi), .d_out(d_out));

  spinor_t sc [N][NHOP];   // spin rows 0,1 used as the half spinor
  spinor_t sm [N];
  int      checks = 0, failures = 0;
  longint  cycle = 0;

  initial for (int i = 0; i < N; i++) begin
    sm[i] = rand_spinor();
    for (int k = 0; k < NHOP; k++) sc[i][k] = rand_spinor();
  end

  function automatic spinor_t expected(int i);
    spinor_t o;
    real full [8][4][3][2];
    real t [9];
    real accr, acci, tr, ti, l1[4], l2[2], l3;
    cmat4_t g;
    for (int k = 0; k < 8; k++) begin
      g = gamma(k % 4);
      for (int c = 0; c < 3; c++) for (int s = 0; s < 2; s++) begin
        full[k][s][c][0] = fr(sc[i][k][s][c].re);
        full[k][s][c][1] = fr(sc[i][k][s][c].im);
        accr = 0.0; acci = 0.0;
        for (int j = 0; j < 2; j++) begin
          cmul(g[2+s][j][0], g[2+s][j][1], fr(sc[i][k][j][c].re), fr(sc[i][k][j][c].im), tr, ti);
          accr = accr + tr; acci = acci + ti;
        end
        full[k][2+s][c][0] = hop_sign(k) * accr;
        full[k][2+s][c][1] = hop_sign(k) * acci;
      end
    end
    for (int s = 0; s < 4; s++) for (int c = 0; c < 3; c++) for (int q = 0; q < 2; q++) begin
      for (int k = 0; k < 8; k++) t[k] = full[k][s][c][q];
      t[8] = q ? fr(sm[i][s][c].im) : fr(sm[i][s][c].re);
      for (int m = 0; m < 4; m++) l1[m] = t[2*m] + t[2*m+1];
      l2[0] = l1[0] + l1[1]; l2[1] = l1[2] + l1[3];
      l3 = (l2[0] + l2[1] + t[8]) * 0.5;
      if (q) o[s][c].im = tf(l3); else o[s][c].re = tf(l3);
    end
    return o;
  endfunction

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (cycle < N) begin
      m2psi <= sm[int'(cycle)];
      for (int k = 0; k < NHOP; k++) chi[k] <= sc[int'(cycle)][k][1:0];
    end
    if (cycle >= longint'(STAGE4_LAT) + 1 && cycle < N + longint'(STAGE4_LAT) + 1) begin
      int i;
      spinor_t e;
      i = int'(cycle) - int'(STAGE4_LAT) - 1;
      e = expected(i);
      for (int s = 0; s < 4; s++) begin
        checks++;
        if (d_out[s] !== e[s]) begin
          failures++;
          if (failures < 10) $display("set %0d spin %0d wrong", i, s);
        end
      end
    end
    if (cycle == N + longint'(STAGE4_LAT) + 2) begin
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
