// tb_dirac_top_full: the end-to-end test of tb_dirac_top run on the
// accelerator with all its default sizes: a 12 x 8 x 8 x 8 lattice (6144
// sites) in double precision, 2048-bit stream beats. The lattice is loaded,
// swept on chip, streamed, and swept again with another mass; all 3 x 6144
// results are checked as in tb_dirac_top.
module tb_dirac_top_full;
  import dirac_pkg::*;
  import dirac_ref_pkg::*;

  localparam int L [4] = '{12, 8, 8, 8};
  localparam int V = L[0] * L[1] * L[2] * L[3];
  localparam int AW = $clog2(V);
  localparam int BEAT_W = 2048;
  localparam int REC_W = $bits(stencil_in_t);
  localparam int WATCHDOG = 400000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic mode = 1'b0, psi_we = 1'b0, u_we = 1'b0, start = 1'b0, s_valid = 1'b0;
  fp_t mass;
  logic [AW-1:0] psi_waddr, u_waddr;
  spinor_t psi_wdata, res_data;
  logic [2:0] u_wbank;
  su3_t u_wdata;
  logic busy, done, s_ready, res_valid;
  logic [BEAT_W-1:0] s_data;
  logic [31:0] res_tag;

  dirac_top dut (.*);

  spinor_t sh_psi [V];
  su3_t    sh_u   [4][V];      // U_mu(n)
  stencil_in_t st [V];
  int checks = 0, failures = 0;
  int n_sweep_res = 0, n_edge_res = 0, n_stream_rec = 0, n_mode_sw = 0, n_bubble = 0, n_held = 0, n_done = 0;
  int phase = 0, n_res = 0;
  longint cycle = 0, t_start = 0, t_last = 0;
  real res [4][3][2];

  function automatic int idx(int x[4]);
    return x[0] + L[0] * (x[1] + L[1] * (x[2] + L[2] * x[3]));
  endfunction
  function automatic void coords(int n, output int x[4]);
    x[0] = n % L[0]; x[1] = (n / L[0]) % L[1]; x[2] = (n / (L[0]*L[1])) % L[2]; x[3] = n / (L[0]*L[1]*L[2]);
  endfunction
  function automatic bit on_edge(int n);
    int x[4];
    coords(n, x);
    for (int mu = 0; mu < 4; mu++) if (x[mu] == 0 || x[mu] == L[mu] - 1) return 1'b1;
    return 1'b0;
  endfunction

  // expected stencil set of site n, from the coordinates
  function automatic stencil_in_t gather(int n);
    stencil_in_t s;
    int x[4], y[4];
    coords(n, x);
    s.psi_c = sh_psi[n];
    for (int mu = 0; mu < 4; mu++) begin
      y = x; y[mu] = (x[mu] + 1) % L[mu];
      s.psi_hop[mu] = sh_psi[idx(y)];
      s.u[mu] = sh_u[mu][n];
      y = x; y[mu] = (x[mu] + L[mu] - 1) % L[mu];
      s.psi_hop[4+mu] = sh_psi[idx(y)];
      s.u[4+mu] = dagger(sh_u[mu][idx(y)]);
    end
    return s;
  endfunction

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && !mode && s_valid && !s_ready) n_held++;
    if (rst_n && done) n_done++;
    if (rst_n && res_valid) begin
      int i;
      spinor_t e;
      i = int'(res_tag);
      checks++;
      if (i != n_res % V) begin failures++; $display("result tag %0d, expected %0d", i, n_res % V); end
      if (i < V) begin
        e = ref_dslash_exact(st[i], mass);
        checks++;
        if (res_data !== e) begin failures++; $display("phase %0d site %0d: result differs", phase, i); end
        ref_dslash_plain(st[i], mass, res);
        checks++;
        if (rel_dev(res_data, res) > 1e-12) begin failures++; $display("site %0d off by %g", i, rel_dev(res_data, res)); end
      end
      if (phase != 2) begin
        n_sweep_res++;
        if (on_edge(i)) n_edge_res++;
        checks++;
        if (n_res % V == 0) begin
          if (cycle - t_start != 2 + longint'(KERNEL_LAT)) begin
            failures++; $display("first result %0d cycles after start", cycle - t_start);
          end
        end else if (cycle != t_last + 1) begin
          failures++; $display("gap before result %0d", i);
        end
      end
      t_last = cycle;
      n_res++;
    end
  end

  task automatic load_lattice();
    for (int n = 0; n < V; n++) begin
      sh_psi[n] = rand_spinor();
      for (int mu = 0; mu < 4; mu++) sh_u[mu][n] = rand_su3();
    end
    for (int n = 0; n < V; n++) st[n] = gather(n);
    for (int n = 0; n < V; n++)
      for (int k = 0; k < 8; k++) begin
        psi_we <= (k == 0); psi_waddr <= AW'(n); psi_wdata <= sh_psi[n];
        u_we <= 1'b1; u_wbank <= 3'(k); u_waddr <= AW'(n); u_wdata <= st[n].u[k];
        @(posedge clk);
      end
    psi_we <= 1'b0; u_we <= 1'b0;
  endtask

  task automatic sweep();
    int n0;
    n0 = n_res;
    start <= 1'b1;
    @(posedge clk);
    t_start = cycle;
    start <= 1'b0;
    // offer a beat meanwhile: it must be held off
    s_valid <= 1'b1;
    s_data <= '0;
    @(posedge clk);
    s_valid <= 1'b0;
    while (n_res < n0 + V || busy) @(posedge clk);
  endtask

  task automatic stream_all();
    logic [BEAT_W-1:0] beat;
    int nbits, nbeat, n0;
    logic [REC_W-1:0] rec;
    n0 = n_res;
    nbits = V * REC_W;
    nbeat = (nbits + BEAT_W - 1) / BEAT_W;
    for (int j = 0; j < nbeat; j++) begin
      for (int b = 0; b < BEAT_W; b += 64) begin
        int p, r;
        p = j * BEAT_W + b;
        r = p / REC_W;
        rec = (r < V) ? REC_W'(st[r]) : '0;
        beat[b +: 64] = (r < V) ? rec[p % REC_W +: 64] : 64'd0;
      end
      if ($urandom % 4 == 0) begin
        s_valid <= 1'b0;
        n_bubble++;
        repeat (1 + $urandom % 3) @(posedge clk);
      end
      s_valid <= 1'b1;
      s_data <= beat;
      do @(posedge clk); while (!s_ready);
    end
    s_valid <= 1'b0;
    while (n_res < n0 + V) @(posedge clk);
  endtask

  always @(posedge clk) if (rst_n && dut.u_gather.rec_valid) n_stream_rec++;

  initial begin
    mass = tf(0.1 + 4.0);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    load_lattice();
    phase = 1;
    sweep();
    // to the streamed mode
    phase = 2;
    mode <= 1'b1; n_mode_sw++;
    @(posedge clk);
    stream_all();
    repeat (5) @(posedge clk);
    // back to the on-chip mode, other mass
    phase = 3;
    mode <= 1'b0; n_mode_sw++;
    mass = tf(-0.25 + 4.0);
    @(posedge clk);
    sweep();
    repeat (5) @(posedge clk);

    $display("mechanisms: sweep results %0d, edge-site results %0d, streamed records %0d, mode switches %0d, stream bubbles %0d, stream held off %0d, done pulses %0d",
             n_sweep_res, n_edge_res, n_stream_rec, n_mode_sw, n_bubble, n_held, n_done);
    checks++; if (n_sweep_res != 2 * V) begin failures++; $display("sweep results %0d", n_sweep_res); end
    checks++; if (n_edge_res == 0) failures++;
    checks++; if (n_stream_rec != V) begin failures++; $display("streamed records %0d", n_stream_rec); end
    checks++; if (n_mode_sw != 2) failures++;
    checks++; if (n_bubble == 0) failures++;
    checks++; if (n_held == 0) failures++;
    checks++; if (n_done != 2) begin failures++; $display("done pulses %0d", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog: %0d results", n_res);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
