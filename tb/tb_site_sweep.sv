// tb_site_sweep: runs two sweeps over a 3x4x2x5 lattice and checks, for every
// issued site, the index sequence 0..V-1 on consecutive cycles, the eight
// neighbour indices against ((x +/- 1) mod L) computed from the coordinates,
// the edge flags, the last-site flag, and that exactly V sites are issued.
module tb_site_sweep;
  import dirac_pkg::*;

  localparam int L [4] = '{3, 4, 2, 5};
  localparam int V = 3 * 4 * 2 * 5;
  localparam int AW = $clog2(V);
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  always #5 clk = ~clk;

  logic issue_valid, issue_last;
  logic [AW-1:0] issue_site;
  logic [NHOP-1:0][AW-1:0] issue_nbr;
  logic [NDIR-1:0] issue_wrap;

  site_sweep #(.L0(L[0]), .L1(L[1]), .L2(L[2]), .L3(L[3])) dut (.*);

  int checks = 0, failures = 0, seen = 0, expect_n = 0, runs = 0;

  function automatic int idx(int x[4]);
    return x[0] + L[0] * (x[1] + L[1] * (x[2] + L[2] * x[3]));
  endfunction

  always @(posedge clk) if (rst_n && issue_valid) begin
    int x[4], y[4], n;
    n = int'(issue_site);
    checks++;
    if (n != expect_n) begin failures++; $display("site %0d, expected %0d", n, expect_n); end
    x[0] = n % L[0]; x[1] = (n / L[0]) % L[1]; x[2] = (n / (L[0]*L[1])) % L[2]; x[3] = n / (L[0]*L[1]*L[2]);
    for (int mu = 0; mu < 4; mu++) begin
      y = x; y[mu] = (x[mu] + 1) % L[mu];
      checks++;
      if (int'(issue_nbr[mu]) != idx(y)) begin failures++; $display("site %0d fwd %0d: %0d", n, mu, issue_nbr[mu]); end
      y = x; y[mu] = (x[mu] + L[mu] - 1) % L[mu];
      checks++;
      if (int'(issue_nbr[4+mu]) != idx(y)) begin failures++; $display("site %0d bwd %0d: %0d", n, mu, issue_nbr[4+mu]); end
      checks++;
      if (issue_wrap[mu] != (x[mu] == 0 || x[mu] == L[mu] - 1)) begin failures++; $display("wrap flag"); end
    end
    checks++;
    if (issue_last != (n == V - 1)) begin failures++; $display("last flag at %0d", n); end
    expect_n = (n + 1) % V;
    seen++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int r = 0; r < 2; r++) begin
      @(posedge clk);
      start <= 1'b1;
      @(posedge clk);
      start <= 1'b0;
      repeat (V + 10) @(posedge clk);
      runs++;
    end
    checks++;
    if (seen != 2 * V) begin failures++; $display("issued %0d sites, expected %0d", seen, 2 * V); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
