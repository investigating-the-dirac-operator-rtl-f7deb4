// tb_fp_mul: checks the pipelined adder against the simulator's own double
// precision addition (round to nearest even) on directed cases (exact
// cancellation, zero operands, large exponent gaps, carries from rounding,
// infinities) and 2000 random pairs, one per cycle, and checks that each sum
// appears exactly LAT = 14 cycles after its operands.
module tb_fp_mul;
  import dirac_pkg::*;
  import dirac_ref_pkg::*;

  localparam int NDIR_CASES = 10;
  localparam int N = 2000;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  fp_t a, b, y;
  fp_mul dut (.clk(clk), .a(a), .b(b), .y(y));

  fp_t    va [N], vb [N];
  int     checks = 0, failures = 0;
  longint cycle = 0;

  function automatic fp_t ref_mul(fp_t x, fp_t z);
    return tf(fr(x) * fr(z));
  endfunction

  initial begin
    // directed cases
    va[0] = tf(1.5);                   vb[0] = tf(-1.5);
    va[1] = tf(0.0);                   vb[1] = tf(3.25);          // zero
    va[2] = tf(-7.0);                  vb[2] = tf(-0.0);
    va[3] = 64'h3fffffffffffffff;      vb[3] = 64'h3fffffffffffffff; // product needs the upper normalisation
    va[4] = 64'h3ff0000000000001;      vb[4] = 64'h3ff0000000000001;
    va[5] = 64'h3ff8000000000000;      vb[5] = 64'h3ff5555555555555;
    va[6] = tf(1.0e200);               vb[6] = tf(1.0e200);       // overflow to +inf
    va[7] = 64'h7ff0000000000000;      vb[7] = tf(-2.0);          // -inf
    va[8] = tf(3.0);                   vb[8] = tf(0.1);
    va[9] = tf(-1.0e-3);               vb[9] = tf(7.77);
    for (int i = NDIR_CASES; i < N; i++) begin
      va[i] = rand_fp();
      vb[i] = rand_fp();
    end
  end

  // drive one pair per cycle, compare LAT cycles later
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (cycle < N) begin
      a <= va[int'(cycle)];
      b <= vb[int'(cycle)];
    end
    // pair i was applied at edge i+1 (sampled at edge i+1's NBA) and is sampled by the
    // pipeline from then; its sum is visible after edge i+1+LAT
    if (cycle >= longint'(MUL_LAT) + 1 && cycle < N + longint'(MUL_LAT) + 1) begin
      int i;
      i = int'(cycle) - int'(MUL_LAT) - 1;
      checks++;
      if (y !== ref_mul(va[i], vb[i])) begin
        failures++;
        if (failures < 10) $display("mul %0d: %h * %h = %h, expected %h", i, va[i], vb[i], y, ref_mul(va[i], vb[i]));
      end
    end
    if (cycle == N + longint'(MUL_LAT) + 2) begin
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
