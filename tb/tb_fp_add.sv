// tb_fp_add: checks the pipelined adder against the simulator's own double
// precision addition (round to nearest even) on directed cases (exact
// cancellation, zero operands, large exponent gaps, carries from rounding,
// infinities) and 2000 random pairs, one per cycle, and checks that each sum
// appears exactly LAT = 14 cycles after its operands.
module tb_fp_add;
  import dirac_pkg::*;
  import dirac_ref_pkg::*;

  localparam int NDIR_CASES = 10;
  localparam int N = 2000;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  fp_t a, b, y;
  fp_add dut (.clk(clk), .a(a), .b(b), .y(y));

  fp_t    va [N], vb [N];
  int     checks = 0, failures = 0;
  longint cycle = 0;

  function automatic fp_t ref_add(fp_t x, fp_t z);
    return tf(fr(x) + fr(z));
  endfunction

  initial begin
    // directed cases
    va[0] = tf(1.5);                   vb[0] = tf(-1.5);          // exact cancellation -> +0
    va[1] = tf(0.0);                   vb[1] = tf(3.25);
    va[2] = tf(-7.0);                  vb[2] = tf(0.0);
    va[3] = tf(1.0);                   vb[3] = tf(1.0e-30);       // gap beyond the mantissa
    va[4] = tf(1.0);                   vb[4] = 64'h3ca0000000000001; // just above half an ulp
    va[5] = 64'h3fffffffffffffff;      vb[5] = 64'h3cb0000000000000; // rounding carries
    va[6] = tf(1.0);                   vb[6] = tf(-0.9999999999999999);
    va[7] = 64'h7ff0000000000000;      vb[7] = tf(2.0);           // +inf
    va[8] = tf(1.0);                   vb[8] = 64'h3ca0000000000000; // tie, stays even
    va[9] = tf(3.0);                   vb[9] = tf(-1.0000000000000002);
    for (int i = NDIR_CASES; i < N; i++) begin
      va[i] = rand_fp();
      vb[i] = rand_fp();
      if (i % 4 == 0) vb[i] = {vb[i][63], va[i][62:52] - 11'($urandom % 3), vb[i][51:0]}; // near cancellation
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
    if (cycle >= longint'(ADD_LAT) + 1 && cycle < N + longint'(ADD_LAT) + 1) begin
      int i;
      i = int'(cycle) - int'(ADD_LAT) - 1;
      checks++;
      if (y !== ref_add(va[i], vb[i])) begin
        failures++;
        if (failures < 10) $display("add %0d: %h + %h = %h, expected %h", i, va[i], vb[i], y, ref_add(va[i], vb[i]));
      end
    end
    if (cycle == N + longint'(ADD_LAT) + 2) begin
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
