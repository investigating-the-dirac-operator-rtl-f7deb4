// tb_dslash_kernel: self-checking test of the stencil pipeline.
// Drives 40 random stencils, the first 30 back to back (initiation interval
// 1) and the rest with gaps, and checks for each result: bit-exact agreement
// with the order-matched reference, agreement within 1e-12 (relative) with the
// plain textbook formula, the tag, and that it leaves exactly KERNEL_LAT = 142
// cycles after it entered.
module tb_dslash_kernel;
  import dirac_pkg::*;
  import dirac_ref_pkg::*;

  localparam int N = 40;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid, out_valid;
  logic [15:0] in_tag, out_tag;
  stencil_in_t in_data;
  fp_t         mass;
  spinor_t     out_data;

  dslash_kernel #(.TAG_W(16)) dut (.*);

  stencil_in_t stim [N];
  longint      t_in [N];
  longint      cycle = 0;
  int          checks = 0, failures = 0, n_out = 0;
  real         res [4][3][2];

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    mass = tf(0.1 + 4.0);          // m_q = 0.1
    for (int i = 0; i < N; i++) stim[i] = rand_stencil();
    in_valid = 1'b0; in_tag = '0; in_data = stim[0];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      if (i >= 30) begin
        in_valid <= 1'b0;
        repeat (i % 3 + 1) @(posedge clk);
      end
      in_valid <= 1'b1;
      in_tag   <= 16'(i);
      in_data  <= stim[i];
      @(posedge clk);
    end
    in_valid <= 1'b0;
  end

  // latency = edges between the one that samples the input and the one that
  // samples the result, i.e. the number of register stages on the path
  always @(posedge clk) if (rst_n && in_valid) t_in[int'(in_tag)] = cycle;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int i;
      spinor_t exp_d;
      i = int'(out_tag);
      checks++;
      if (i != n_out) begin
        failures++; $display("tag %0d, expected %0d", i, n_out);
      end
      if (i < N) begin
        exp_d = ref_dslash_exact(stim[i], mass);
        checks++;
        if (out_data !== exp_d) begin
          failures++; $display("stencil %0d differs from exact reference", i);
        end
        ref_dslash_plain(stim[i], mass, res);
        checks++;
        if (rel_dev(out_data, res) > 1e-12) begin
          failures++; $display("stencil %0d deviates %g from plain formula", i, rel_dev(out_data, res));
        end
        checks++;
        if (cycle - t_in[i] != longint'(KERNEL_LAT)) begin
          failures++; $display("stencil %0d latency %0d", i, cycle - t_in[i]);
        end
      end
      n_out++;
      if (n_out == N) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d results", n_out, N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
